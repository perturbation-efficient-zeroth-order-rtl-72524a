// zo_weight_update -- the weight lanes that apply a perturbation or the
// zeroth-order update.
//
// Every lane computes  w_out = sat( w_in + round(coef * u) )  for its weight
// w_in and perturbation value u. One coefficient serves the whole pass:
// +eps perturbs the weights to theta + eps*u, -2*eps moves them to
// theta - eps*u, and eps - eta*g restores theta and applies the ZO-SGD step
// theta - eta*g*u in one pass (g is the projected gradient, see
// zo_step_ctrl). Rounding is to nearest (half up), the result saturates to
// W_W bits.
//
// Formats: weight Q(W_W-W_FRAC).W_FRAC, perturbation Q4.12 (pezo_pkg),
// coefficient COEF_W bits with COEF_FRAC fraction bits. Lanes whose bit in
// `in_en` is clear pass their weight unchanged. The result is registered:
// `out_valid`/`w_out` follow `in_valid` by one cycle.
//
// The arithmetic is the perturbation and update rule of zeroth-order SGD;
// the formats, rounding and single-pass restore+update are this design's
// choices.
module zo_weight_update
  import pezo_pkg::*;
#(
  parameter int LANES     = 8,
  parameter int W_W       = 16,
  parameter int W_FRAC    = 14,
  parameter int COEF_W    = 24,
  parameter int COEF_FRAC = 20
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic [LANES-1:0]         in_en,
  input  logic signed [W_W-1:0]    w_in  [LANES],
  input  pezo_pkg::pert_t          pert  [LANES],
  input  logic signed [COEF_W-1:0] coef,
  output logic                     out_valid,
  output logic signed [W_W-1:0]    w_out [LANES]
);
  localparam int SH = COEF_FRAC + PERT_FRAC - W_FRAC;   // product -> weight LSB
  localparam int PW = COEF_W + PERT_W;
  localparam logic signed [PW+1:0] WMAX = (PW+2)'(2**(W_W-1) - 1);
  localparam logic signed [PW+1:0] WMIN = -(PW+2)'(2**(W_W-1));

  initial assert (SH >= 1) else $error("zo_weight_update: need COEF_FRAC+PERT_FRAC > W_FRAC");

  function automatic logic signed [W_W-1:0] lane(input logic signed [W_W-1:0] w,
                                                 input pert_t u,
                                                 input logic signed [COEF_W-1:0] c);
    logic signed [PW-1:0]   prod;
    logic signed [PW+1:0]   d, s;
    prod = c * u;
    d    = ((PW+2)'(prod) + (PW+2)'(2**(SH-1))) >>> SH;
    s    = (PW+2)'(w) + d;
    if (s > WMAX) s = WMAX;
    if (s < WMIN) s = WMIN;
    return s[W_W-1:0];
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int l = 0; l < LANES; l++) w_out[l] <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid)
        for (int l = 0; l < LANES; l++)
          w_out[l] <= in_en[l] ? lane(w_in[l], pert[l], coef) : w_in[l];
    end
  end
endmodule
