// zo_step_ctrl -- sequencer of one zeroth-order SGD step with one query.
//
// A step estimates the gradient from two forward passes (Eq. 1 with q = 1)
// and updates the weights (Eq. 2):
//   1. checkpoint the perturbation source (gen_mark), then run pass POS
//      with coefficient +eps: weights become theta + eps*u;
//   2. ask the forward engine for the loss (fwd_req) and take L+;
//   3. rewind the source and run pass NEG with -2*eps: theta - eps*u;
//   4. fwd_req again and take L-;
//   5. compute g = (L+ - L-) / (2*eps) and the update coefficient
//      eps - eta*g, rewind, run pass UPD: theta - eta*g*u.
// gen_mark and gen_rewind are one-cycle pulses given in a cycle of their
// own, while no pass is open, so no weight beat can meet them.
// A pass is announced by `pass_start` (one cycle, the first of the pass);
// during it `pass_active` is high and `phase`/`coef` are steady; the weight
// streamer ends it with `pass_done`. `done` pulses when the step is over.
//
// eps is a power of two, eps = 2^-eps_exp (1 .. COEF_FRAC), so dividing by
// 2*eps is a shift: eta*g = eta*(L+ - L-)*2^eps_exp / 2 is formed with one
// multiply and rounded to nearest. Losses are LOSS_W-bit fixed point with
// LOSS_FRAC fraction bits, eta and coef have COEF_FRAC fraction bits; the
// coefficient saturates to COEF_W bits.
//
// The step itself is zeroth-order SGD as the source work states it; the pass
// order, the power-of-two eps, the formats and the handshake are this
// design's choices.
module zo_step_ctrl
  import pezo_pkg::*;
#(
  parameter int COEF_W    = 24,
  parameter int COEF_FRAC = 20,
  parameter int LOSS_W    = 32,
  parameter int LOSS_FRAC = 16
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  input  logic [4:0]               eps_exp,
  input  logic signed [COEF_W-1:0] eta,
  input  logic                     pass_done,
  input  logic                     loss_valid,
  input  logic signed [LOSS_W-1:0] loss,
  output pezo_pkg::zo_phase_e      phase,
  output logic                     pass_active,
  output logic                     pass_start,
  output logic signed [COEF_W-1:0] coef,
  output logic                     fwd_req,
  output logic                     gen_mark,
  output logic                     gen_rewind,
  output logic                     busy,
  output logic                     done,
  output logic signed [LOSS_W:0]   dloss
);

  typedef enum logic [3:0] {
    S_IDLE, S_MARK, S_POS, S_LPOS, S_RW1, S_NEG, S_LNEG, S_RW2, S_UPD
  } state_e;

  localparam logic signed [95:0] CMAX = 96'sd2**(COEF_W-1) - 1;
  localparam logic signed [95:0] CMIN = -(96'sd2**(COEF_W-1));

  state_e                   st;
  logic signed [LOSS_W-1:0] l_pos;
  logic signed [COEF_W-1:0] eps_q, coef_upd;

  assign eps_q = COEF_W'(1) <<< (COEF_FRAC - int'(eps_exp));
  assign dloss = (LOSS_W+1)'(l_pos) - (LOSS_W+1)'(loss);   // valid while taking L-

  function automatic logic signed [COEF_W-1:0] upd_coef(input logic signed [LOSS_W:0] dl,
                                                        input logic signed [COEF_W-1:0] e,
                                                        input logic signed [COEF_W-1:0] eps_c,
                                                        input logic [4:0] ex);
    logic signed [95:0] p, eg, c;
    p  = 96'(dl) * 96'(e);
    p  = p <<< ex;
    eg = (p + (96'sd1 <<< LOSS_FRAC)) >>> (LOSS_FRAC + 1);
    c  = 96'(eps_c) - eg;
    if (c > CMAX) c = CMAX;
    if (c < CMIN) c = CMIN;
    return c[COEF_W-1:0];
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st         <= S_IDLE;
      l_pos      <= '0;
      coef_upd   <= '0;
      pass_start <= 1'b0;
      fwd_req    <= 1'b0;
      gen_mark   <= 1'b0;
      gen_rewind <= 1'b0;
      done       <= 1'b0;
    end else begin
      pass_start <= 1'b0;
      fwd_req    <= 1'b0;
      gen_mark   <= 1'b0;
      gen_rewind <= 1'b0;
      done       <= 1'b0;
      unique case (st)
        S_IDLE: if (start) begin
          gen_mark <= 1'b1;            // checkpoint in a cycle of its own
          st       <= S_MARK;
        end
        S_MARK: begin
          pass_start <= 1'b1;
          st         <= S_POS;
        end
        S_POS: if (pass_done) begin
          fwd_req <= 1'b1;
          st      <= S_LPOS;
        end
        S_LPOS: if (loss_valid) begin
          l_pos      <= loss;
          gen_rewind <= 1'b1;          // rewind before the next pass opens
          st         <= S_RW1;
        end
        S_RW1: begin
          pass_start <= 1'b1;
          st         <= S_NEG;
        end
        S_NEG: if (pass_done) begin
          fwd_req <= 1'b1;
          st      <= S_LNEG;
        end
        S_LNEG: if (loss_valid) begin
          coef_upd   <= upd_coef(dloss, eta, eps_q, eps_exp);
          gen_rewind <= 1'b1;
          st         <= S_RW2;
        end
        S_RW2: begin
          pass_start <= 1'b1;
          st         <= S_UPD;
        end
        S_UPD: if (pass_done) begin
          done <= 1'b1;
          st   <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    unique case (st)
      S_POS:   begin phase = PH_POS; coef = eps_q;              end
      S_NEG:   begin phase = PH_NEG; coef = -(eps_q <<< 1);     end
      S_UPD:   begin phase = PH_UPD; coef = coef_upd;           end
      default: begin phase = PH_NONE; coef = '0;                end
    endcase
  end

  assign pass_active = (st == S_POS) || (st == S_NEG) || (st == S_UPD);
  assign busy        = (st != S_IDLE);

  initial assert (COEF_W > COEF_FRAC + 2) else $error("zo_step_ctrl: COEF_W too small for 2*eps");
  assert property (@(posedge clk) disable iff (!rst_n)
                   start && st == S_IDLE |-> eps_exp >= 5'd1 && int'(eps_exp) <= COEF_FRAC);
endmodule
