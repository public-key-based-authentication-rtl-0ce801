// nvm -- BEHAVIOURAL MODEL (not synthesizable) of a small non-volatile memory
// macro, used to keep the trusted third party's public key PK_TTP and the
// device's own certificate Cert_ID on the device.
//
// Contents survive power cycles and reset; they start in the erased state (all
// ones), as a freshly manufactured flash/OTP array would.  A real part would
// be the process's NVM or OTP macro with the same single port; write timing
// (program pulses, busy times) is not modelled: a write completes in one clock.
//
// Interface: single synchronous port (en, we, addr, wdata); rdata one cycle
// after a read; rdata holds its value until the next read.  The size, 196
// words, is 8 words of PK_TTP and 186 of Cert_ID, each area followed by one
// write-protect word: 6208 bits of data against the 6832 the protocol needs
// with the larger helper data.  Word organisation is this design's choice.
module nvm #(
  parameter int WORDS = 196,
  parameter int WIDTH = 32,
  parameter int AW    = 8
) (
  input  logic             clk,
  input  logic             en,
  input  logic             we,
  input  logic [AW-1:0]    addr,
  input  logic [WIDTH-1:0] wdata,
  output logic [WIDTH-1:0] rdata
);

  logic [WIDTH-1:0] mem [WORDS];

  initial begin
    for (int i = 0; i < WORDS; i++) mem[i] = '1;
    rdata = '0;
  end

  always @(posedge clk) begin
    if (en) begin
      if (we) mem[addr] <= wdata;
      else    rdata     <= mem[addr];
    end
  end

endmodule
