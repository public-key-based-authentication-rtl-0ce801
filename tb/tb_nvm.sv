// tb_nvm -- checks the NVM model: erased (all-ones) initial contents, write
// and read back of every word with one-cycle read latency, and that a read
// without a write leaves the contents unchanged.
module tb_nvm;
  localparam int WORDS = 9, WIDTH = 32, AW = 4;
  logic clk = 0;
  always #5 clk = ~clk;
  logic en = 0, we = 0;
  logic [AW-1:0] addr = '0;
  logic [WIDTH-1:0] wdata = '0, rdata;
  int checks = 0, failures = 0;

  nvm #(.WORDS(WORDS), .WIDTH(WIDTH), .AW(AW)) dut (.*);

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", msg); end
  endtask

  task automatic rd(input int a, output logic [WIDTH-1:0] d);
    @(negedge clk); en = 1; we = 0; addr = AW'(a);
    @(negedge clk); en = 0; d = rdata;
  endtask

  initial begin
    logic [WIDTH-1:0] d;
    for (int i = 0; i < WORDS; i++) begin rd(i, d); check(d == '1, "erased"); end
    for (int i = 0; i < WORDS; i++) begin
      @(negedge clk); en = 1; we = 1; addr = AW'(i); wdata = 32'h600D_0000 ^ (i * 32'h0101_0101);
    end
    @(negedge clk); en = 0; we = 0;
    for (int i = 0; i < WORDS; i++) begin rd(i, d); check(d == (32'h600D_0000 ^ (i * 32'h0101_0101)), "read back"); end
    rd(3, d); rd(3, d);
    check(d == (32'h600D_0000 ^ (3 * 32'h0101_0101)), "reads do not disturb");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
