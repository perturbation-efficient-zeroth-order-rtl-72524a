// urng_lfsr -- one uniform random number generator of the on-the-fly array.
//
// A W-bit maximal-length Galois LFSR: on `step` the state shifts right by one
// and, when the bit shifted out is 1, is xored with the tap mask from
// pezo_pkg::lfsr_mask. It visits every value 1 .. 2^W-1 once per period of
// 2^W-1 steps and never 0. The state is the random number; the engine reads
// it as a uniform value in (-1, 1) (see otf_generator).
//
// Interface: `load` writes `load_val` (used to restore a checkpoint) and wins
// over `step`. Reset loads SEED. The new state is visible the cycle after
// `step`/`load`.
//
// The LFSR as the uniform generator follows the source work; the Galois form,
// the tap polynomial and the reset seed are this design's choices.
module urng_lfsr #(
  parameter int          W    = 14,
  parameter logic [15:0] SEED = 16'h0001
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         step,
  input  logic         load,
  input  logic [W-1:0] load_val,
  output logic [W-1:0] state
);
  localparam logic [W-1:0] MASK = W'(pezo_pkg::lfsr_mask(W));

  initial begin
    assert (W >= 3 && W <= 16) else $error("urng_lfsr: W must be 3..16");
    assert (SEED[W-1:0] != '0) else $error("urng_lfsr: SEED must be non-zero");
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    state <= SEED[W-1:0];
    else if (load) state <= load_val;
    else if (step) state <= (state >> 1) ^ (state[0] ? MASK : '0);
  end
endmodule
