// tb_otf_generator -- self-checking test of the on-the-fly perturbation
// source at a reduced size: 11 RNGs of 6 bits (period 63), 8 lanes, so a
// beat can wrap the combination and the array rotates often.
//
// The scale table is loaded with random exponents in [-8, 7] (large ones
// drive the output into saturation). Random beats with random lane counts and
// matrix ends are sent. A reference written from the description (own LFSRs,
// rotation, repetition position, leftover drop, real-valued scaling) predicts
// every lane; the test checks the values, the two-cycle latency, that
// `ready` stays high across array steps and rewinds (the table is read
// ahead) and drops exactly for the cycle after a LUT write, which is also
// issued at random during the run, and that rewinding regenerates the same
// perturbation.
`timescale 1ns/1ps
module tb_otf_generator;
  localparam int L = 8, N = 11, W = 6, PERIOD = 63, SP = PERIOD / N;
  localparam logic [W-1:0] MASK = 6'h30;   // x^6 + x^5 + 1
  logic clk = 0, rst_n = 0;
  logic req = 0, req_last = 0, mark = 0, rewind = 0, lut_we = 0;
  logic [3:0] req_count = 4'd1;
  logic [W-1:0] lut_waddr = '0;
  logic signed [3:0] lut_wdata = '0;
  logic ready, pert_valid, circle_end;
  pezo_pkg::pert_t pert [L];
  logic [3:0] rot, ptr;
  int checks = 0, failures = 0;
  int n_stall = 0, n_sat = 0, n_rot = 0, n_drop = 0, n_rewind = 0;

  otf_generator #(.LANES(L), .N_RNG(N), .RNG_W(W), .EXP_W(4)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    #2_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- reference ----------------
  logic [W-1:0] r [N], rs [N];
  int rrot, rrot_s, rbase;
  int lut [2**W];
  int cyc = 0;
  typedef struct { int due; int v [L]; } exp_t;
  exp_t q [$];

  function automatic logic [W-1:0] nx(input logic [W-1:0] s);
    return s[0] ? ((s >> 1) ^ MASK) : (s >> 1);
  endfunction

  function automatic int ref_scale(input int v, input int k);
    real x;
    x = $floor(real'(v - 2**(W-1)) * (2.0 ** (12 - (W - 1) + k)));
    if (x > 32767.0)  x = 32767.0;
    if (x < -32768.0) x = -32768.0;
    return int'(x);
  endfunction

  always @(posedge clk) cyc <= cyc + 1;

  // output checker
  always @(posedge clk) begin
    #2;
    if (pert_valid) begin
      checks++;
      if (q.size() == 0) begin failures++; $display("unexpected pert_valid"); end
      else begin
        exp_t e;
        e = q.pop_front();
        if (e.due != cyc) begin failures++; $display("latency: due %0d now %0d", e.due, cyc); end
        for (int l = 0; l < L; l++)
          if (int'(pert[l]) != e.v[l]) begin
            failures++;
            if (failures < 10) $display("cyc %0d lane %0d got %0d want %0d", cyc, l, pert[l], e.v[l]);
          end
      end
    end
  end

  logic exp_ready;
  initial begin
    for (int j = 0; j < N; j++) begin r[j] = W'(1 + j * SP); rs[j] = r[j]; end
    rrot = 0; rrot_s = 0; rbase = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    // load the table
    for (int a = 0; a < 2**W; a++) begin
      lut[a] = $urandom_range(0, 15) - 8;
      if ($urandom_range(0, 3) != 0) lut[a] = $urandom_range(0, 4) - 3;
      lut_we = 1; lut_waddr = W'(a); lut_wdata = 4'(lut[a]);
      @(posedge clk); #1;
    end
    lut_we = 0;
    exp_ready = 0;   // one cycle of table read after the last write
    for (int c = 0; c < 20000; c++) begin
      int x, cnt;
      logic lst, ev;
      x = $urandom_range(0, 99);
      req = (x < 80);
      cnt = $urandom_range(1, L);
      req_count = 4'(cnt);
      lst = ($urandom_range(0, 3) == 0);
      req_last = lst;
      mark = (x == 85);
      rewind = (x == 86 || x == 87) && (c > 100);
      lut_we = (x == 88);
      lut_waddr = W'($urandom_range(1, PERIOD));
      lut_wdata = 4'($urandom_range(0, 4) - 3);
      #1;
      checks++;
      if (ready !== exp_ready) begin failures++; $display("ready %0d want %0d at %0d", ready, exp_ready, c); end
      if (req && !ready) n_stall++;
      if (req && ready) begin
        exp_t e;
        e.due = cyc + 2;   // two clock edges after the one that takes the beat
        for (int l = 0; l < L; l++) begin
          if (l < cnt) begin
            int pos;
            pos = (rbase + l) % N;
            e.v[l] = ref_scale(int'(r[(pos + rrot) % N]), lut[r[0]]);
            if (e.v[l] == 32767 || e.v[l] == -32768) n_sat++;
          end else e.v[l] = 0;
        end
        q.push_back(e);
      end
      @(posedge clk);
      ev = 0;
      if (lut_we) begin lut[lut_waddr] = lut_wdata; ev = 1; end
      if (mark) begin rs = r; rrot_s = rrot; end
      if (rewind) begin r = rs; rrot = rrot_s; rbase = 0; n_rewind++; end
      else if (req && exp_ready) begin
        if (lst) begin
          if ((rbase + cnt) % N != 0) n_drop++;
          rbase = 0;
          for (int j = 0; j < N; j++) r[j] = nx(r[j]);
          if (r[0] == 1) begin rrot = (rrot + 1) % N; n_rot++; end
        end else rbase = (rbase + cnt) % N;
      end
      exp_ready = !ev;
      #1;
      req = 0; mark = 0; rewind = 0; lut_we = 0;
    end
    repeat (4) @(posedge clk);
    checks++;
    if (q.size() != 0) begin failures++; $display("%0d beats never came out", q.size()); end
    checks++;
    if (n_stall == 0 || n_sat == 0 || n_rot < 2 || n_drop == 0 || n_rewind == 0) begin
      failures++; $display("mechanism not exercised");
    end
    $display("stalls %0d saturations %0d rotations %0d drops %0d rewinds %0d",
             n_stall, n_sat, n_rot, n_drop, n_rewind);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
