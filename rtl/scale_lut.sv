// scale_lut -- look-up table of power-of-two modulus scale factors.
//
// For the on-the-fly strategy every RNG combination u (one output of each RNG)
// is scaled so that its L2 norm matches the expected norm of a Gaussian
// vector of the same dimension d:  s = E||u_hat|| / ||u||, with
// E||u_hat|| = sqrt(2) * Gamma((d+1)/2) / Gamma(d/2). Because all RNGs run in
// a fixed phase relation, the output of RNG1 identifies the combination, so s
// is stored per RNG1 value in a table of 2^ADDR_W entries. s is rounded to
// the nearest power of two and stored as its signed exponent k (s = 2^k), so
// scaling is a shift.
//
// Interface: synchronous read, `rdata` holds the entry at `raddr` of the
// previous cycle (one block-RAM read). The host fills the table through the
// write port before training; the table is not reset.
//
// Table size, addressing by RNG1 and power-of-two rounding follow the source
// work; the exponent width EXP_W is this design's choice.
module scale_lut #(
  parameter int ADDR_W = 14,
  parameter int EXP_W  = 4
) (
  input  logic                    clk,
  input  logic                    we,
  input  logic [ADDR_W-1:0]       waddr,
  input  logic signed [EXP_W-1:0] wdata,
  input  logic [ADDR_W-1:0]       raddr,
  output logic signed [EXP_W-1:0] rdata
);
  logic signed [EXP_W-1:0] mem [2**ADDR_W];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end
endmodule
