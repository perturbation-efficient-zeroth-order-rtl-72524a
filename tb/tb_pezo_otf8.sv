// tb_pezo_otf8 -- end-to-end test of the engine in the configuration with
// 8-bit RNGs, the RNG width the PeZO authors found sufficient for RoBERTa
// models (31 RNGs, a 256-entry scale table); all other parameters at their
// defaults.
//
// The test is the end-to-end test with the top built with RNG_W = 8: it
// plays the host, the weight memory and the forward engine, computes the
// 8-bit scale table itself (round(log2(E||u_hat|| / ||u||)) for each of the
// 255 combinations, E||u_hat|| = sqrt(2) Gamma(16) / Gamma(15.5)), checks
// every weight beat against a reference and runs pre-generation steps, then
// on-the-fly steps until the RNG array has rotated 32 times, i.e. through
// all 31 positions and back to the start, then pre-generation again. The
// short RNG period (255 steps of the array) makes the rotation frequent. It
// counts pool wraps, carried and dropped leftovers, rotations, rewinds, mode
// switches, lane saturations and beats taken right after an array step, and
// fails if one never happened or if w_in_ready drops inside a pass.
`timescale 1ns/1ps
module tb_pezo_otf8;
  import pezo_pkg::*;
  localparam int L = 8, POOL = 4095, NR = 31, RW = 8, PER = 2**RW - 1, SP = PER / NR;
  localparam logic [RW-1:0] MASK = 8'hB8;   // x^8 + x^6 + x^5 + x^4 + 1
  localparam int NMAT = 10;
  localparam int MSZ [NMAT] = '{16, 4, 16, 37, 9, 64, 3, 31, 62, 8};
  localparam int NW = 250;

  logic clk = 0, rst_n = 0;
  gen_mode_e mode = MODE_PREGEN;
  logic cfg_we = 0;
  cfg_sel_e cfg_sel = CFG_POOL;
  logic [15:0] cfg_addr = '0, cfg_wdata = '0;
  logic step_start = 0, step_busy, step_done, pass_start, pass_active;
  zo_phase_e phase;
  logic [4:0] eps_exp = 5'd8;
  logic signed [23:0] eta = '0;
  logic fwd_req, loss_valid = 0;
  logic signed [31:0] loss = '0;
  logic w_in_valid = 0, w_in_ready, w_in_last = 0, w_in_end = 0;
  logic signed [15:0] w_in [L];
  logic [3:0] w_in_count = 4'd1, w_out_count;
  logic w_out_valid, w_out_last, w_out_end;
  logic signed [15:0] w_out [L];
  logic [11:0] pool_ptr;
  logic pool_wrap;
  logic [4:0] rng_rot, rng_ptr;
  logic rng_circle_end;

  pezo_top #(.RNG_W(RW)) dut (.*);

  int checks = 0, failures = 0;
  int n_wrap = 0, n_carry = 0, n_drop = 0, n_stall = 0, n_rot = 0, n_rewind = 0, n_ahead = 0;
  time t_acc = 0, t_step = 0;
  int n_switch = 0, n_sat = 0, n_steps = 0;

  always #5 clk = ~clk;
  initial begin
    #40_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic fail(input string msg);
    failures++;
    if (failures < 20) $display("FAIL: %s", msg);
  endtask

  // ---------------- reference state ----------------
  logic [11:0]   pool [POOL];
  int            lut  [2**RW];
  logic [RW-1:0] r [NR], rs [NR];
  int rrot, rrot_s, rbase, rptr, rptr_s;
  int wm [NW];          // weight memory (written back from the engine)
  int tgt [NW];         // forward-engine weights of the loss
  int coef_ref;
  int lpos, lneg;

  function automatic logic [RW-1:0] nx(input logic [RW-1:0] s);
    return s[0] ? ((s >> 1) ^ MASK) : (s >> 1);
  endfunction

  function automatic int otf_val(input int v, input int k);
    real x;
    x = $floor(real'(v - 2**(RW-1)) * (2.0 ** (12 - (RW - 1) + k)));
    if (x > 32767.0)  x = 32767.0;
    if (x < -32768.0) x = -32768.0;
    return int'(x);
  endfunction

  function automatic int lane_ref(input int w, input int u, input int c);
    real s;
    s = real'(w) + $floor(real'(c) * real'(u) / 262144.0 + 0.5);
    if (s > 32767.0)  s = 32767.0;
    if (s < -32768.0) s = -32768.0;
    return int'(s);
  endfunction

  function automatic int fwd_loss();
    longint acc;
    acc = 0;
    for (int i = 0; i < NW; i++) acc += longint'(wm[i]) * tgt[i];
    return int'(655360 + 4 * acc);
  endfunction

  // ---------------- scale table, computed here ----------------
  task automatic build_lut();
    real g16, g155, enorm, n2, s;
    logic [RW-1:0] st [NR];
    g16 = 1.0;
    for (int k = 1; k <= 15; k++) g16 *= k;                // Gamma(16) = 15!
    g155 = $sqrt(3.14159265358979);
    for (int k = 0; k <= 14; k++) g155 *= (k + 0.5);       // Gamma(15.5)
    enorm = $sqrt(2.0) * g16 / g155;
    for (int j = 0; j < NR; j++) st[j] = RW'(1 + j * SP);
    for (int a = 0; a < 2**RW; a++) lut[a] = 0;
    for (int t = 0; t < PER; t++) begin
      int k;
      n2 = 0.0;
      for (int j = 0; j < NR; j++) begin
        real u;
        u = real'(int'(st[j]) - 2**(RW-1)) / real'(2**(RW-1));
        n2 += u * u;
      end
      s = enorm / $sqrt(n2);
      k = int'($floor($ln(s) / $ln(2.0) + 0.5));
      if (k > 7) k = 7;
      if (k < -8) k = -8;
      lut[st[0]] = k;
      for (int j = 0; j < NR; j++) st[j] = nx(st[j]);
    end
    $display("E||u_hat|| for d=31: %f", enorm);
  endtask

  // ---------------- expected output beats ----------------
  typedef struct { int idx; int cnt; logic last; logic fin; int v [L]; } beat_t;
  beat_t q [$];

  always @(posedge clk) begin
    #2;
    if (w_out_valid) begin
      checks++;
      if (q.size() == 0) fail("unexpected output beat");
      else begin
        beat_t e;
        e = q.pop_front();
        if (int'(w_out_count) != e.cnt || w_out_last !== e.last || w_out_end !== e.fin)
          fail($sformatf("tags: cnt %0d/%0d last %0d/%0d end %0d/%0d",
                         w_out_count, e.cnt, w_out_last, e.last, w_out_end, e.fin));
        for (int l = 0; l < e.cnt; l++) begin
          checks++;
          if (int'(w_out[l]) != e.v[l])
            fail($sformatf("weight %0d: got %0d want %0d (mode %0d phase %0d)",
                           e.idx + l, w_out[l], e.v[l], mode, phase));
          wm[e.idx + l] = int'(w_out[l]);
        end
      end
    end
  end

  // forward engine: answers fwd_req after a few cycles
  always @(posedge clk) begin
    if (fwd_req) begin
      int l;
      repeat ($urandom_range(1, 5)) @(posedge clk);
      #1;
      l = fwd_loss();
      loss = l; loss_valid = 1;
      @(posedge clk); #1;
      loss_valid = 0;
    end
  end

  // one pass of the weight streamer; reference perturbation advances here
  task automatic stream_pass(input int coef);
    int idx;
    idx = 0;
    for (int m = 0; m < NMAT; m++) begin
      int left;
      left = MSZ[m];
      while (left > 0) begin
        int cnt;
        beat_t e;
        cnt = (left >= L) ? L : left;
        if ($urandom_range(0, 5) == 0) cnt = $urandom_range(1, cnt);
        repeat ($urandom_range(0, 2)) @(posedge clk);
        #1;
        w_in_valid = 1;
        w_in_count = 4'(cnt);
        w_in_last  = (cnt == left);
        w_in_end   = (cnt == left) && (m == NMAT - 1);
        for (int l = 0; l < L; l++) w_in[l] = (l < cnt) ? 16'(wm[idx + l]) : 16'(l);
        #1;
        while (!w_in_ready) begin
          n_stall++;
          @(posedge clk); #2;
        end
        t_acc = $time;
        if (mode == MODE_OTF && t_step != 0 && t_acc - t_step == 10) n_ahead++;
        // accepted at the next edge: predict it
        e.idx = idx; e.cnt = cnt; e.last = w_in_last; e.fin = w_in_end;
        for (int l = 0; l < L; l++) begin
          int u, y;
          if (l < cnt) begin
            if (mode == MODE_PREGEN) u = 16 * int'(signed'(pool[(rptr + l) % POOL]));
            else u = otf_val(int'(r[(((rbase + l) % NR) + rrot) % NR]), lut[r[0]]);
            y = lane_ref(wm[idx + l], u, coef);
            if (y == 32767 || y == -32768) n_sat++;
            e.v[l] = y;
          end else e.v[l] = 0;
        end
        q.push_back(e);
        @(posedge clk); #1;
        w_in_valid = 0; w_in_last = 0; w_in_end = 0;
        if (mode == MODE_PREGEN) begin
          if (rptr + cnt >= POOL) n_wrap++;
          rptr = (rptr + cnt) % POOL;
          if (cnt == left && rptr % L != 0) n_carry++;
        end else begin
          if (cnt == left) begin
            if ((rbase + cnt) % NR != 0) n_drop++;
            t_step = t_acc;
            rbase = 0;
            for (int j = 0; j < NR; j++) r[j] = nx(r[j]);
            if (r[0] == 1) begin rrot = (rrot + 1) % NR; n_rot++; end
          end else rbase = (rbase + cnt) % NR;
        end
        idx += cnt;
        left -= cnt;
      end
    end
  endtask

  task automatic wait_pass_start(input zo_phase_e ph);
    int guard;
    guard = 0;
    while (!pass_start) begin
      @(posedge clk); #1;
      if (++guard > 200) begin fail("pass_start missing"); return; end
    end
    checks++;
    if (phase !== ph) fail($sformatf("phase %0d want %0d", phase, ph));
  endtask

  task automatic do_step(input int e, input int et, input int expect_same);
    int w_before [NW];
    int epsq;
    real eg;
    epsq = 1 << (20 - e);
    eps_exp = 5'(e);
    eta = 24'(et);
    w_before = wm;
    // checkpoint of the reference source
    rs = r; rrot_s = rrot; rptr_s = rptr;
    @(posedge clk); #1;
    step_start = 1;
    @(posedge clk); #1;
    step_start = 0;
    wait_pass_start(PH_POS);
    stream_pass(epsq);
    while (!loss_valid) begin @(posedge clk); #1; end
    lpos = fwd_loss();
    // rewind
    r = rs; rrot = rrot_s; rbase = 0; rptr = rptr_s; n_rewind++;
    @(posedge clk); #1;
    wait_pass_start(PH_NEG);
    stream_pass(-2 * epsq);
    while (!loss_valid) begin @(posedge clk); #1; end
    lneg = fwd_loss();
    eg = $floor(real'(et) * real'(longint'(lpos) - lneg) * (2.0 ** e) / (2.0 ** 17) + 0.5);
    coef_ref = int'(real'(epsq) - eg);
    if (coef_ref > 8388607) coef_ref = 8388607;
    if (coef_ref < -8388608) coef_ref = -8388608;
    r = rs; rrot = rrot_s; rbase = 0; rptr = rptr_s; n_rewind++;
    @(posedge clk); #1;
    wait_pass_start(PH_UPD);
    stream_pass(coef_ref);
    while (!step_done) begin @(posedge clk); #1; end
    n_steps++;
    checks++;
    if (q.size() != 0) fail("beats missing at end of step");
    // eta = 0: +eps, -2*eps, +eps must bring every weight back; exactly when
    // eps*u is a whole number of weight LSBs, else within the rounding (1 LSB)
    if (expect_same != 0) begin
      for (int i = 0; i < NW; i++) begin
        int d;
        d = wm[i] - w_before[i];
        checks++;
        if ((expect_same == 1 && d != 0) || (d > 1 || d < -1))
          fail($sformatf("eta = 0 step moved weight %0d by %0d", i, d));
      end
    end
  endtask

  initial begin
    for (int l = 0; l < L; l++) w_in[l] = '0;
    for (int j = 0; j < NR; j++) r[j] = RW'(1 + j * SP);
    rrot = 0; rbase = 0; rptr = 0;
    for (int i = 0; i < NW; i++) begin
      wm[i]  = int'($urandom_range(0, 16384)) - 8192;
      tgt[i] = int'($urandom_range(0, 6)) - 3;
    end
    build_lut();
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    // host load: pool (pre-scaled Q4.8 numbers) and scale table
    for (int a = 0; a < POOL; a++) begin
      pool[a] = 12'(int'($urandom_range(0, 880)) - 440);
      if (a % 97 == 0) pool[a] = 12'h7FF;     // a few large values drive lanes into saturation
      cfg_we = 1; cfg_sel = CFG_POOL; cfg_addr = 16'(a); cfg_wdata = 16'(pool[a]);
      @(posedge clk); #1;
    end
    for (int a = 0; a < 2**RW; a++) begin
      cfg_we = 1; cfg_sel = CFG_LUT; cfg_addr = 16'(a); cfg_wdata = 16'(lut[a] & 15);
      @(posedge clk); #1;
    end
    cfg_we = 0;
    repeat (3) @(posedge clk); #1;

    // pre-generation
    mode = MODE_PREGEN;
    do_step(6, 0, 1);      // pool numbers are multiples of 2^-8: eps*u exact
    for (int s = 0; s < 20; s++) do_step($urandom_range(6, 10), $urandom_range(0, 2**10), 0);
    checks++;
    if (int'(pool_ptr) != rptr) fail("pool pointer differs");

    // on-the-fly
    mode = MODE_OTF; n_switch++;
    do_step(8, 0, 2);
    // each rotation is seen by all three passes of its step
    while (n_rot < 3 * (NR + 1)) do_step($urandom_range(6, 10), $urandom_range(0, 2**10), 0);
    for (int s = 0; s < 3; s++) do_step($urandom_range(6, 10), $urandom_range(0, 2**10), 0);
    checks++;
    if (int'(rng_rot) != rrot) fail("rotation differs");

    // back to pre-generation; the pool pointer carried on
    mode = MODE_PREGEN; n_switch++;
    do_step(9, 300, 0);

    $display("steps %0d  wraps %0d carries %0d drops %0d stalls %0d read-ahead %0d rotations %0d rewinds %0d switches %0d saturations %0d",
             n_steps, n_wrap, n_carry, n_drop, n_stall, n_ahead, n_rot, n_rewind, n_switch, n_sat);
    if (n_wrap == 0)   fail("pool never wrapped");
    if (n_carry == 0)  fail("leftover never carried");
    if (n_drop == 0)   fail("leftover never dropped");
    if (n_stall != 0)  fail("w_in_ready dropped inside a pass");
    if (n_ahead == 0)  fail("no beat right after an array step");
    if (n_rot == 0)    fail("array never rotated");
    if (n_rewind == 0) fail("never rewound");
    if (n_switch == 0) fail("mode never switched");
    if (n_sat == 0)    fail("lanes never saturated");
    checks += 9;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
