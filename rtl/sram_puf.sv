// sram_puf -- BEHAVIOURAL MODEL (not synthesizable) of the uninitialised SRAM
// block that serves as the physical unclonable function.
//
// A real SRAM macro powers up with each cell in its preferred state, set by
// random transistor mismatch in its cross-coupled inverters, except for a few
// cells that settle differently on every power-up.  This model reproduces that
// at word level: a cell's preferred value is a fixed hash of DEVICE_SEED and its
// bit position (a different DEVICE_SEED is a different chip), and on every
// power-up each cell independently settles to the opposite value with
// probability NOISE_PERMILLE/1000.  The noise rate is this design's assumption;
// the paper gives none.
//
// Interface: a plain single-port synchronous SRAM (en, we, addr, wdata; rdata
// one cycle after en) plus `power_up`, a one-cycle pulse standing for a power
// cycle of the array, after which its contents are re-drawn.  The contents are
// meaningless until the first power_up.
module sram_puf #(
  parameter int          WORDS          = 180,
  parameter int          WIDTH          = 32,
  parameter int          AW             = 8,
  parameter logic [31:0] DEVICE_SEED    = 32'h5EED_0001,
  parameter int          NOISE_PERMILLE = 50
) (
  input  logic             clk,
  input  logic             power_up,
  input  logic             en,
  input  logic             we,
  input  logic [AW-1:0]    addr,
  input  logic [WIDTH-1:0] wdata,
  output logic [WIDTH-1:0] rdata
);

  logic [WIDTH-1:0] mem [WORDS];

  // Preferred power-up state of one cell: an integer hash of the device seed and
  // the cell's bit position.
  function automatic logic preferred(input int unsigned pos);
    logic [31:0] h;
    h = DEVICE_SEED ^ (pos * 32'h9E37_79B9);
    h = h ^ (h >> 16);
    h = h * 32'h85EB_CA6B;
    h = h ^ (h >> 13);
    h = h * 32'hC2B2_AE35;
    h = h ^ (h >> 16);
    return h[0];
  endfunction

  always @(posedge clk) begin
    if (power_up) begin
      for (int w = 0; w < WORDS; w++)
        for (int b = 0; b < WIDTH; b++)
          mem[w][b] <= preferred(w * WIDTH + b) ^ ($urandom_range(999) < NOISE_PERMILLE);
      rdata <= '0;
    end else if (en) begin
      if (we) mem[addr] <= wdata;
      else    rdata     <= mem[addr];
    end
  end

endmodule
