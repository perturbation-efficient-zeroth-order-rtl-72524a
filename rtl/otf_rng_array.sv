// otf_rng_array -- the array of N_RNG uniform RNGs of the on-the-fly strategy,
// with the "RNG shift" and the RNG pointer.
//
// Each `step` advances all RNGs by one state, so the array yields a new
// combination of N_RNG numbers (one column of the array). RNG j is a
// urng_lfsr with the same polynomial as the others and seed
// 1 + j*floor((2^RNG_W-1)/N_RNG); the RNGs therefore stay in a fixed phase
// relation and the value of RNG1 (index 0) alone identifies the combination.
// When RNG1 steps back to its seed, one full RNG period has passed ("circle
// end") and the array order rotates by one: the RNG at the first position
// moves to the end. The rotation is an index offset `rot` (a circular
// buffer), not a move of the registers: position p of the array holds RNG
// (p + rot) mod N_RNG. With the rotation the array gives N_RNG*(2^RNG_W-1)
// different ordered combinations instead of 2^RNG_W-1.
//
// Outputs: `vals[p]` is the number at array position p (RNG1's output is
// vals[ptr]); `lead_d` is the value RNG1 will hold in the next cycle
// (after this cycle's step or rewind), so that a synchronous scale LUT
// addressed by `lead_d` delivers the factor of the combination in the same
// cycle the combination appears; `ptr` is the array
// position of RNG1, (N_RNG - rot) mod N_RNG; `circle_end` pulses with the
// step that rotates the array.
//
// `mark` saves all RNG states and the rotation; `rewind` restores them, so a
// perturbation can be regenerated exactly for the second query and for the
// update pass. `rewind` wins over `step`. All changes appear the cycle after.
//
// From the source work: the array of RNGs, one combination per weight matrix,
// the rotation after a full RNG period (the figure's "Circle End" then "RNG
// Shift"; its text says "after each clock cycle"), the pointer. The text's
// reading is available as ROT_EACH_STEP = 1: the array then rotates with
// every step, and `circle_end` still marks the end of RNG1's period. This
// design's choices: the seeds, rotation by offset, the checkpoint.
module otf_rng_array #(
  parameter int N_RNG = 31,
  parameter int RNG_W = 14,
  parameter bit ROT_EACH_STEP = 1'b0
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     step,
  input  logic                     mark,
  input  logic                     rewind,
  output logic [RNG_W-1:0]         vals [N_RNG],
  output logic [RNG_W-1:0]         lead_d,
  output logic [$clog2(N_RNG)-1:0] rot,
  output logic [$clog2(N_RNG)-1:0] ptr,
  output logic                     circle_end
);
  localparam int RW      = $clog2(N_RNG);
  localparam int PERIOD  = 2**RNG_W - 1;
  localparam int SPACING = PERIOD / N_RNG;
  localparam logic [RNG_W-1:0] MASK  = RNG_W'(pezo_pkg::lfsr_mask(RNG_W));
  localparam logic [RNG_W-1:0] SEED0 = RNG_W'(1);

  initial assert (N_RNG >= 2 && N_RNG <= PERIOD)
    else $error("otf_rng_array: need 2 <= N_RNG <= 2^RNG_W-1");

  logic [RNG_W-1:0] st      [N_RNG];
  logic [RNG_W-1:0] saved   [N_RNG];
  logic [RW-1:0]    rot_saved;
  logic [RNG_W-1:0] lead_next;
  logic             rot_evt;

  for (genvar j = 0; j < N_RNG; j++) begin : g_rng
    localparam logic [15:0] SEED = 16'(1 + j * SPACING);
    urng_lfsr #(.W(RNG_W), .SEED(SEED)) u_rng (
      .clk, .rst_n,
      .step     (step),
      .load     (rewind),
      .load_val (saved[j]),
      .state    (st[j])
    );
  end

  assign lead_next  = (st[0] >> 1) ^ (st[0][0] ? MASK : '0);
  assign circle_end = step && !rewind && (lead_next == SEED0);
  assign lead_d     = rewind ? saved[0] : (step ? lead_next : st[0]);
  assign rot_evt    = ROT_EACH_STEP ? (step && !rewind) : circle_end;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rot       <= '0;
      rot_saved <= '0;
    end else begin
      if (rewind)          rot <= rot_saved;
      else if (rot_evt)    rot <= (rot == RW'(N_RNG - 1)) ? '0 : rot + 1'b1;
      if (mark)            rot_saved <= rot;
    end
  end

  // checkpoint copy of the RNG states (taken before this cycle's step)
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int j = 0; j < N_RNG; j++) saved[j] <= RNG_W'(1 + j * SPACING);
    end else if (mark) begin
      for (int j = 0; j < N_RNG; j++) saved[j] <= st[j];
    end
  end

  always_comb begin
    for (int p = 0; p < N_RNG; p++) begin
      int idx;
      idx = p + int'(rot);
      if (idx >= N_RNG) idx -= N_RNG;
      vals[p] = st[idx];
    end
    ptr = (rot == '0) ? '0 : RW'(N_RNG - int'(rot));
  end
endmodule
