// otf_generator -- on-the-fly perturbation source: RNG array, modulus scaling
// and assembly of the perturbation stream.
//
// The weights of one matrix are perturbed by one combination of the RNG array
// (N_RNG numbers), repeated ("concatenated") to the length of the matrix: the
// e-th weight of a matrix gets array position e mod N_RNG. What is left of the
// last repetition is dropped, and the next matrix starts at position 0 with
// the next combination (the array steps once per matrix). Every number is
// multiplied by the scale factor 2^k of the current combination, where k is
// read from scale_lut at the address given by RNG1's output. A raw RNG value
// v (1 .. 2^RNG_W-1) stands for the uniform number (v - 2^(RNG_W-1)) /
// 2^(RNG_W-1); after scaling it is output in Q4.12 (pezo_pkg::PERT_W bits,
// PERT_FRAC fraction bits), saturating.
//
// Interface: a beat is `req` with `req_count` (1..LANES) valid lanes and
// `req_last` on the last beat of a matrix; it is taken when `ready` is high.
// `pert` follows exactly two cycles after a taken beat, lanes at and above
// req_count read 0. The table is read in parallel with the array: its
// address is the value RNG1 takes in the next cycle (`lead_d` of the array),
// so the synchronous read delivers the exponent of a combination in the very
// cycle the combination appears, and array steps and rewinds cost no cycle.
// `ready` is low only after reset and for one cycle after a LUT write, while
// the table is read again. `mark`/`rewind` checkpoint and restore the array
// and restart at position 0. `lut_*` is the host's write port into the scale
// table.
//
// From the source work: repetition to the matrix length with the leftover
// dropped, the power-of-two LUT addressed by RNG1 and read concurrently with
// the rest of the datapath. This design's choices: LANES, the value mapping,
// the Q4.12 format, the two-cycle latency, the look-ahead addressing.
// ROT_EACH_STEP is passed to otf_rng_array (0: rotate once per RNG period,
// as the figure shows; 1: rotate with every step, as the text says).
module otf_generator
  import pezo_pkg::*;
#(
  parameter int LANES = 8,
  parameter int N_RNG = 31,
  parameter int RNG_W = 14,
  parameter int EXP_W = 4,
  parameter bit ROT_EACH_STEP = 1'b0
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      req,
  input  logic [$clog2(LANES+1)-1:0] req_count,
  input  logic                      req_last,
  output logic                      ready,
  input  logic                      mark,
  input  logic                      rewind,
  input  logic                      lut_we,
  input  logic [RNG_W-1:0]          lut_waddr,
  input  logic signed [EXP_W-1:0]   lut_wdata,
  output logic                      pert_valid,
  output pezo_pkg::pert_t           pert [LANES],
  output logic [$clog2(N_RNG)-1:0]  rot,
  output logic [$clog2(N_RNG)-1:0]  ptr,
  output logic                      circle_end
);
  localparam int RW = $clog2(N_RNG);
  localparam int SH0 = PERT_FRAC - (RNG_W - 1);   // shift for k = 0
  localparam logic signed [63:0] PMAX = 64'sd2**(PERT_W-1) - 1;
  localparam logic signed [63:0] PMIN = -(64'sd2**(PERT_W-1));

  logic [RNG_W-1:0]        vals [N_RNG];
  logic [RNG_W-1:0]        lead_d;
  logic signed [EXP_W-1:0] k_exp;
  logic                    k_valid;
  logic                    take, do_step;
  logic [RW-1:0]           base;

  assign ready   = k_valid;
  assign take    = req && ready;
  assign do_step = take && req_last;

  otf_rng_array #(.N_RNG(N_RNG), .RNG_W(RNG_W), .ROT_EACH_STEP(ROT_EACH_STEP)) u_array (
    .clk, .rst_n,
    .step (do_step), .mark (mark), .rewind (rewind),
    .vals, .lead_d, .rot, .ptr, .circle_end
  );

  scale_lut #(.ADDR_W(RNG_W), .EXP_W(EXP_W)) u_lut (
    .clk,
    .we (lut_we), .waddr (lut_waddr), .wdata (lut_wdata),
    .raddr (lead_d), .rdata (k_exp)
  );

  // k_exp always belongs to the current combination, except in the first
  // cycle after reset and after a table write (the read may be stale)
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      k_valid <= 1'b0;
    else if (lut_we) k_valid <= 1'b0;
    else             k_valid <= 1'b1;
  end

  // position of lane 0 inside the repeated combination
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      base <= '0;
    else if (rewind) base <= '0;
    else if (take)   base <= req_last ? '0 : RW'((int'(base) + int'(req_count)) % N_RNG);
  end

  // stage 1: pick the raw numbers of each lane
  logic [RNG_W-1:0]        raw_s1 [LANES];
  logic [LANES-1:0]        en_s1;
  logic signed [EXP_W-1:0] k_s1;
  logic                    valid_s1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid_s1 <= 1'b0;
      en_s1    <= '0;
      k_s1     <= '0;
      for (int l = 0; l < LANES; l++) raw_s1[l] <= '0;
    end else begin
      valid_s1 <= take;
      if (take) begin
        k_s1 <= k_exp;
        for (int l = 0; l < LANES; l++) begin
          raw_s1[l] <= vals[(int'(base) + l) % N_RNG];
          en_s1[l]  <= (l < int'(req_count));
        end
      end
    end
  end

  // stage 2: centre, scale by 2^k (a shift), saturate
  function automatic pezo_pkg::pert_t scale_val(input logic [RNG_W-1:0] v,
                                      input logic signed [EXP_W-1:0] k);
    logic signed [63:0] u, x;
    int sh;
    u  = 64'(signed'({1'b0, v})) - 64'sd2**(RNG_W-1);
    sh = SH0 + int'(k);
    x  = (sh >= 0) ? (u <<< sh) : (u >>> (-sh));
    if (x > PMAX) x = PMAX;
    if (x < PMIN) x = PMIN;
    return pezo_pkg::pert_t'(x);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pert_valid <= 1'b0;
      for (int l = 0; l < LANES; l++) pert[l] <= '0;
    end else begin
      pert_valid <= valid_s1;
      if (valid_s1)
        for (int l = 0; l < LANES; l++)
          pert[l] <= en_s1[l] ? scale_val(raw_s1[l], k_s1) : '0;
    end
  end

  // a beat never carries more lanes than there are, nor none
  assert property (@(posedge clk) disable iff (!rst_n)
                   req |-> (req_count != '0 && int'(req_count) <= LANES));
endmodule
