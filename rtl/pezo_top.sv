// pezo_top -- PeZO perturbation engine for zeroth-order on-device training.
//
// Weights stream through LANES update lanes in "passes". In each pass every
// weight gets one perturbation number u, which comes from one of the two
// random number reuse strategies, chosen by `mode`:
//   MODE_PREGEN  pregen_pool: 4095 pre-scaled numbers read circularly;
//   MODE_OTF     otf_generator: 31 LFSRs, one combination per weight matrix,
//                repeated over the matrix and scaled by a power of two from
//                the modulus-scaling LUT, array rotated once per RNG period.
// zo_step_ctrl runs a whole zeroth-order step: pass +eps, loss L+, pass
// -2*eps, loss L-, pass with eps - eta*g (restore and update), rewinding the
// source between passes so that all three passes see the same u.
//
// Host load (before training, no pass running): cfg_we with cfg_sel =
// CFG_POOL writes pool entry cfg_addr (12-bit Q4.8 value in cfg_wdata), with
// CFG_LUT writes scale exponent cfg_addr (signed 4 bits in cfg_wdata).
//
// Weight stream: after `pass_start` the streamer sends beats of up to LANES
// weights: w_in_count valid lanes (from lane 0), w_in_last on the last beat of
// each weight matrix and w_in_end on the last beat of the model. A beat moves
// when w_in_valid and w_in_ready are high; w_in_ready is low outside a pass
// and, in on-the-fly mode, for one cycle after a scale-table write (so never
// during a pass, as the host loads the table between steps). The result
// leaves on w_out_* three cycles after the beat, with its tags; lanes beyond
// the count carry their input unchanged. The beat with w_out_end closes the
// pass. After passes POS and NEG the engine raises fwd_req; the forward
// engine (outside) answers with loss_valid/loss.
//
// Status outputs show the pool pointer and its wrap, the RNG rotation and
// pointer and the end of RNG1's period.
//
// Parameters: LANES weights per beat, POOL_N pool numbers, N_RNG RNGs of
// RNG_W bits, and ROT_EACH_STEP, which chooses when the RNG array rotates
// (0, default: once per RNG period; 1: with every step).
module pezo_top
  import pezo_pkg::*;
#(
  parameter int LANES  = 8,
  parameter int POOL_N = 4095,
  parameter int N_RNG  = 31,
  parameter int RNG_W  = 14,
  parameter bit ROT_EACH_STEP = 1'b0
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  pezo_pkg::gen_mode_e       mode,
  // host load
  input  logic                      cfg_we,
  input  pezo_pkg::cfg_sel_e        cfg_sel,
  input  logic [15:0]               cfg_addr,
  input  logic [15:0]               cfg_wdata,
  // step control
  input  logic                      step_start,
  input  logic [4:0]                eps_exp,
  input  logic signed [23:0]        eta,
  output logic                      step_busy,
  output logic                      step_done,
  output pezo_pkg::zo_phase_e       phase,
  output logic                      pass_start,
  output logic                      pass_active,
  // forward engine
  output logic                      fwd_req,
  input  logic                      loss_valid,
  input  logic signed [31:0]        loss,
  // weight stream in
  input  logic                      w_in_valid,
  output logic                      w_in_ready,
  input  logic signed [15:0]        w_in [LANES],
  input  logic [$clog2(LANES+1)-1:0] w_in_count,
  input  logic                      w_in_last,
  input  logic                      w_in_end,
  // weight stream out
  output logic                      w_out_valid,
  output logic signed [15:0]        w_out [LANES],
  output logic [$clog2(LANES+1)-1:0] w_out_count,
  output logic                      w_out_last,
  output logic                      w_out_end,
  // status
  output logic [$clog2(POOL_N)-1:0] pool_ptr,
  output logic                      pool_wrap,
  output logic [$clog2(N_RNG)-1:0]  rng_rot,
  output logic [$clog2(N_RNG)-1:0]  rng_ptr,
  output logic                      rng_circle_end
);
  localparam int CW = $clog2(LANES+1);

  logic               gen_mark, gen_rewind, otf_ready, take, pass_done;
  logic signed [23:0] coef;
  logic               pool_pvalid, otf_pvalid;
  pert_t              pool_pert [LANES];
  pert_t              otf_pert  [LANES];
  pert_t              pert      [LANES];
  logic [32:0]        dloss_unused;

  zo_step_ctrl #(.COEF_W(24), .COEF_FRAC(20), .LOSS_W(32), .LOSS_FRAC(16)) u_ctrl (
    .clk, .rst_n,
    .start (step_start), .eps_exp, .eta,
    .pass_done, .loss_valid, .loss,
    .phase, .pass_active, .pass_start, .coef,
    .fwd_req, .gen_mark, .gen_rewind,
    .busy (step_busy), .done (step_done), .dloss (dloss_unused)
  );

  assign w_in_ready = pass_active && (mode == MODE_PREGEN || otf_ready);
  assign take       = w_in_valid && w_in_ready;

  pregen_pool #(.POOL_N(POOL_N), .BANKS(LANES), .VAL_W(12), .VAL_FRAC(8)) u_pool (
    .clk, .rst_n,
    .req       (take && mode == MODE_PREGEN),
    .req_count (w_in_count),
    .mark      (gen_mark), .rewind (gen_rewind),
    .we        (cfg_we && cfg_sel == CFG_POOL),
    .waddr     (cfg_addr[$clog2(POOL_N)-1:0]),
    .wdata     (cfg_wdata[11:0]),
    .pert_valid(pool_pvalid), .pert (pool_pert),
    .ptr       (pool_ptr), .wrapped (pool_wrap)
  );

  otf_generator #(.LANES(LANES), .N_RNG(N_RNG), .RNG_W(RNG_W), .EXP_W(4),
                  .ROT_EACH_STEP(ROT_EACH_STEP)) u_otf (
    .clk, .rst_n,
    .req       (w_in_valid && pass_active && mode == MODE_OTF),
    .req_count (w_in_count),
    .req_last  (w_in_last),
    .ready     (otf_ready),
    .mark      (gen_mark), .rewind (gen_rewind),
    .lut_we    (cfg_we && cfg_sel == CFG_LUT),
    .lut_waddr (cfg_addr[RNG_W-1:0]),
    .lut_wdata (cfg_wdata[3:0]),
    .pert_valid(otf_pvalid), .pert (otf_pert),
    .rot       (rng_rot), .ptr (rng_ptr), .circle_end (rng_circle_end)
  );

  // weights wait two cycles for their perturbation
  logic               v_d   [2];
  logic signed [15:0] w_d   [2][LANES];
  logic [CW-1:0]      cnt_d [3];
  logic               last_d[3], end_d[3];
  logic [LANES-1:0]   en;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < 2; s++) begin
        v_d[s] <= 1'b0;
        for (int l = 0; l < LANES; l++) w_d[s][l] <= '0;
      end
      for (int s = 0; s < 3; s++) begin
        cnt_d[s] <= '0; last_d[s] <= 1'b0; end_d[s] <= 1'b0;
      end
    end else begin
      v_d[0]    <= take;
      v_d[1]    <= v_d[0];
      w_d[0]    <= w_in;
      w_d[1]    <= w_d[0];
      cnt_d[0]  <= w_in_count;
      last_d[0] <= w_in_last;
      end_d[0]  <= w_in_end;
      for (int s = 1; s < 3; s++) begin
        cnt_d[s]  <= cnt_d[s-1];
        last_d[s] <= last_d[s-1];
        end_d[s]  <= end_d[s-1];
      end
    end
  end

  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      pert[l] = (mode == MODE_OTF) ? otf_pert[l] : pool_pert[l];
      en[l]   = (l < int'(cnt_d[1]));
    end
  end

  zo_weight_update #(.LANES(LANES), .W_W(16), .W_FRAC(14), .COEF_W(24), .COEF_FRAC(20)) u_lanes (
    .clk, .rst_n,
    .in_valid (v_d[1]), .in_en (en),
    .w_in     (w_d[1]), .pert (pert), .coef (coef),
    .out_valid(w_out_valid), .w_out (w_out)
  );

  assign w_out_count = cnt_d[2];
  assign w_out_last  = last_d[2];
  assign w_out_end   = end_d[2] && w_out_valid;
  assign pass_done   = w_out_end;

  // the perturbation of the selected source arrives with its weights
  assert property (@(posedge clk) disable iff (!rst_n)
                   v_d[1] |-> (mode == MODE_OTF ? otf_pvalid : pool_pvalid));
  // the host does not load while a pass runs
  assert property (@(posedge clk) disable iff (!rst_n) cfg_we |-> !pass_active);
endmodule
