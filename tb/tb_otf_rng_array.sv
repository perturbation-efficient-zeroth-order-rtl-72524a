// tb_otf_rng_array -- self-checking test of the RNG array with its rotation,
// pointer and checkpoint, at a reduced size (7 RNGs of 5 bits, period 31) so
// that many rotations happen.
//
// A reference keeps seven LFSR states (seeds 1 + 4j), the rotation count and
// a checkpoint. Random step/mark/rewind stimulus runs for several thousand
// cycles; every cycle the array order, RNG1's value, the pointer and the
// rotation event are compared, and the look-ahead output `lead_d` must equal
// RNG1's value one cycle later. Rotations must happen exactly when RNG1
// completes a period (every 31 steps). A second instance with
// ROT_EACH_STEP = 1 gets the same stimulus and must rotate with every step
// while its RNG states, RNG1 look-ahead and period marks stay the same.
`timescale 1ns/1ps
module tb_otf_rng_array;
  localparam int N = 7, W = 5, PERIOD = 31, SP = PERIOD / N;
  localparam logic [W-1:0] MASK = 5'h14;   // x^5 + x^3 + 1
  logic clk = 0, rst_n = 0, step = 0, mark = 0, rewind = 0;
  logic [W-1:0] vals [N];
  logic [W-1:0] lead_d, ld_seen;
  logic [2:0]   rot, ptr;
  logic         circle_end;
  int checks = 0, failures = 0, rotations = 0, rewinds = 0;

  otf_rng_array #(.N_RNG(N), .RNG_W(W)) dut (.*);

  logic [W-1:0] vals2 [N];
  logic [W-1:0] lead_d2;
  logic [2:0]   rot2, ptr2;
  logic         circle_end2;
  otf_rng_array #(.N_RNG(N), .RNG_W(W), .ROT_EACH_STEP(1'b1)) dut2 (
    .clk, .rst_n, .step, .mark, .rewind,
    .vals (vals2), .lead_d (lead_d2), .rot (rot2), .ptr (ptr2), .circle_end (circle_end2)
  );

  always #5 clk = ~clk;
  initial begin
    #1_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [W-1:0] r [N], rs [N];
  int rrot, rrot_s, nsteps, nsteps_s, rrot2, rrot2_s;

  function automatic logic [W-1:0] nx(input logic [W-1:0] s);
    return s[0] ? ((s >> 1) ^ MASK) : (s >> 1);
  endfunction

  task automatic compare();
    checks++;
    for (int p = 0; p < N; p++)
      if (vals2[p] !== r[(p + rrot2) % N]) begin
        failures++;
        if (failures < 10) $display("each-step: pos %0d got %0d want %0d (rot %0d)", p, vals2[p], r[(p+rrot2)%N], rrot2);
      end
    checks++;
    if (int'(rot2) != rrot2 || int'(ptr2) != (N - rrot2) % N || lead_d2 !== lead_d || circle_end2 !== circle_end) begin
      failures++;
      if (failures < 10) $display("each-step: rot %0d/%0d ptr %0d", rot2, rrot2, ptr2);
    end
    checks++;
    for (int p = 0; p < N; p++)
      if (vals[p] !== r[(p + rrot) % N]) begin
        failures++;
        if (failures < 10) $display("pos %0d got %0d want %0d (rot %0d)", p, vals[p], r[(p+rrot)%N], rrot);
      end
    checks++;
    if (vals[ptr] !== r[0] || int'(rot) != rrot || int'(ptr) != (N - rrot) % N) begin
      failures++;
      if (failures < 10) $display("lead %0d/%0d rot %0d/%0d ptr %0d", vals[ptr], r[0], rot, rrot, ptr);
    end
  endtask

  initial begin
    for (int j = 0; j < N; j++) begin r[j] = W'(1 + j * SP); rs[j] = r[j]; end
    rrot = 0; rrot_s = 0; nsteps = 0; nsteps_s = 0; rrot2 = 0; rrot2_s = 0;
    repeat (2) @(posedge clk);
    rst_n = 1; #1;
    compare();
    for (int c = 0; c < 6000; c++) begin
      int x;
      x = $urandom_range(0, 99);
      step   = (x < 70);
      mark   = (x >= 70 && x < 73);
      rewind = (x >= 73 && x < 75) && (c > 3000);
      #1;
      // the event is visible in the cycle of the rotating step
      checks++;
      if (circle_end !== (step && !rewind && nx(r[0]) == 5'd1)) begin
        failures++; $display("circle_end wrong at cycle %0d", c);
      end
      ld_seen = lead_d;
      @(posedge clk);
      if (mark) begin rs = r; rrot_s = rrot; rrot2_s = rrot2; end
      if (rewind) begin r = rs; rrot = rrot_s; rrot2 = rrot2_s; rewinds++; end
      else if (step) begin
        rrot2 = (rrot2 + 1) % N;
        for (int j = 0; j < N; j++) r[j] = nx(r[j]);
        if (r[0] == 5'd1) begin rrot = (rrot + 1) % N; rotations++; end
      end
      #1;
      step = 0; mark = 0; rewind = 0;
      checks++;
      if (ld_seen !== r[0]) begin
        failures++; if (failures < 10) $display("lead_d %0d want %0d at cycle %0d", ld_seen, r[0], c);
      end
      compare();
    end
    checks++;
    if (rotations < N + 1 || rewinds == 0) begin
      failures++; $display("too few events: rotations %0d rewinds %0d", rotations, rewinds);
    end
    $display("rotations %0d rewinds %0d", rotations, rewinds);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
