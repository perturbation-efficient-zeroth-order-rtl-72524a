// tb_pezo_roberta_layer -- workload test: ZO steps over the weights of one
// RoBERTa-base encoder layer (hidden size 768, feed-forward size 3072) with
// the engine at its default parameters, in both reuse strategies.
//
// The layer has 16 weight tensors, streamed in this order: query, key, value
// and output projections (768 x 768 each, with a 768 bias after each), the
// first layer norm (768 scale, 768 shift), the feed-forward matrices
// (768 x 3072 with a 3072 bias, 3072 x 768 with a 768 bias) and the second
// layer norm: 7,087,872 weights in all, 885,984 beats of 8 per pass.
//
// The test plays the host, the weight memory and the forward engine, like
// the end-to-end test, but streams every pass at the full rate of one beat
// per cycle. Every output weight is predicted by a reference model (pool
// pointer, LFSR states and repetition position, power-of-two scaling, lane
// rounding and saturation, update coefficient from the two losses). It runs
// two pre-generation steps and two on-the-fly steps; the first step of each
// pair has eta = 0 and must return every weight (exactly for the pool, within
// 1 LSB on the fly). It checks that each pass takes exactly one cycle per
// beat, i.e. 8 perturbation numbers per clock, that the pool pointer ends
// where the reference does and that the pool wrapped, leftovers were carried
// and dropped.
`timescale 1ns/1ps
module tb_pezo_roberta_layer;
  import pezo_pkg::*;
  localparam int L = 8, POOL = 4095, NR = 31, RW = 14, PER = 2**RW - 1, SP = PER / NR;
  localparam logic [RW-1:0] MASK = 14'h3802;
  localparam int H = 768, F = 3072;
  localparam int NMAT = 16;
  localparam int MSZ [NMAT] = '{H*H, H, H*H, H, H*H, H, H*H, H, H, H,
                                H*F, F, F*H, H, H, H};
  localparam int NW = 7087872;

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
  logic [3:0] w_in_count = 4'd8, w_out_count;
  logic w_out_valid, w_out_last, w_out_end;
  logic signed [15:0] w_out [L];
  logic [11:0] pool_ptr;
  logic pool_wrap;
  logic [4:0] rng_rot, rng_ptr;
  logic rng_circle_end;

  pezo_top dut (.*);

  int checks = 0, failures = 0;
  int n_wrap = 0, n_carry = 0, n_drop = 0, n_rewind = 0, n_steps = 0, n_sat = 0;

  always #5 clk = ~clk;
  initial begin
    #2_000_000_000;
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
  shortint wm [NW];       // weight memory (written back from the engine)
  shortint w_before [NW];
  int coef_ref;
  int lpos, lneg;

  function automatic logic [RW-1:0] nx(input logic [RW-1:0] s);
    return s[0] ? ((s >> 1) ^ MASK) : (s >> 1);
  endfunction

  // on-the-fly value: (v - 2^13) * 2^(k-1) in Q4.12, floor, saturated
  function automatic int otf_val(input int v, input int k);
    int sh;
    longint x;
    sh = 12 - (RW - 1) + k;
    x = longint'(v - 2**(RW-1));
    x = (sh >= 0) ? (x <<< sh) : (x >>> (-sh));
    if (x > 32767)  x = 32767;
    if (x < -32768) x = -32768;
    return int'(x);
  endfunction

  // lane: w + round(c*u / 2^18), saturated to 16 bits
  function automatic int lane_ref(input int w, input int u, input int c);
    longint p, s;
    p = longint'(c) * u;
    s = longint'(w) + ((p + 131072) >>> 18);
    if (s > 32767)  s = 32767;
    if (s < -32768) s = -32768;
    return int'(s);
  endfunction

  // forward engine: a fixed linear function of the weights, coefficients
  // -3..3 taken from a hash of the weight index
  function automatic int tgt(input int i);
    int unsigned h;
    h = int'(i) * 32'd2654435761;
    return int'(h >> 29) % 7 - 3;
  endfunction

  function automatic int fwd_loss();
    longint acc;
    acc = 0;
    for (int i = 0; i < NW; i++) acc += longint'(wm[i]) * tgt(i);
    return int'(655360 + (acc >>> 8));
  endfunction

  // ---------------- scale table, computed here ----------------
  // k = round(log2(E||u_hat|| / ||u||)) for every combination of the 31
  // LFSRs, stored at RNG1's value; E||u_hat|| = sqrt(2) Gamma(16)/Gamma(15.5)
  task automatic build_lut();
    real g16, g155, enorm, n2, s;
    logic [RW-1:0] st [NR];
    g16 = 1.0;
    for (int k = 1; k <= 15; k++) g16 *= k;
    g155 = $sqrt(3.14159265358979);
    for (int k = 0; k <= 14; k++) g155 *= (k + 0.5);
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
          fail($sformatf("tags at weight %0d", e.idx));
        for (int l = 0; l < e.cnt; l++) begin
          checks++;
          if (int'(w_out[l]) != e.v[l])
            fail($sformatf("weight %0d: got %0d want %0d (mode %0d phase %0d)",
                           e.idx + l, w_out[l], e.v[l], mode, phase));
          wm[e.idx + l] = shortint'(w_out[l]);
        end
      end
    end
  end

  always @(posedge clk) begin
    if (fwd_req) begin
      int l;
      repeat (3) @(posedge clk);
      #1;
      l = fwd_loss();
      loss = l; loss_valid = 1;
      @(posedge clk); #1;
      loss_valid = 0;
    end
  end

  // one pass at full rate: a beat in every cycle
  task automatic stream_pass(input int coef);
    int idx, nbeats;
    time t0, t1;
    idx = 0; nbeats = 0;
    t0 = 0; t1 = 0;
    for (int m = 0; m < NMAT; m++) begin
      int left;
      left = MSZ[m];
      while (left > 0) begin
        int cnt;
        beat_t e;
        cnt = (left >= L) ? L : left;
        w_in_valid = 1;
        w_in_count = 4'(cnt);
        w_in_last  = (cnt == left);
        w_in_end   = (cnt == left) && (m == NMAT - 1);
        for (int l = 0; l < L; l++) w_in[l] = (l < cnt) ? 16'(wm[idx + l]) : 16'(l);
        #1;
        if (!w_in_ready) fail($sformatf("w_in_ready low at beat %0d", nbeats));
        while (!w_in_ready) begin @(posedge clk); #2; end
        if (nbeats == 0) t0 = $time;
        t1 = $time;
        nbeats++;
        e.idx = idx; e.cnt = cnt; e.last = w_in_last; e.fin = w_in_end;
        for (int l = 0; l < L; l++) begin
          int u, y;
          if (l < cnt) begin
            if (mode == MODE_PREGEN) u = 16 * int'(signed'(pool[(rptr + l) % POOL]));
            else u = otf_val(int'(r[(((rbase + l) % NR) + rrot) % NR]), lut[r[0]]);
            y = lane_ref(int'(wm[idx + l]), u, coef);
            if (y == 32767 || y == -32768) n_sat++;
            e.v[l] = y;
          end else e.v[l] = 0;
        end
        q.push_back(e);
        @(posedge clk); #1;
        if (mode == MODE_PREGEN) begin
          if (rptr + cnt >= POOL) n_wrap++;
          rptr = (rptr + cnt) % POOL;
          if (cnt == left && rptr % L != 0) n_carry++;
        end else begin
          if (cnt == left) begin
            if ((rbase + cnt) % NR != 0) n_drop++;
            rbase = 0;
            for (int j = 0; j < NR; j++) r[j] = nx(r[j]);
            if (r[0] == 1) rrot = (rrot + 1) % NR;
          end else rbase = (rbase + cnt) % NR;
        end
        idx += cnt;
        left -= cnt;
      end
    end
    w_in_valid = 0; w_in_last = 0; w_in_end = 0;
    // rate: one beat of 8 numbers per clock
    checks++;
    if (int'((t1 - t0) / 10) + 1 != nbeats)
      fail($sformatf("pass took %0d cycles for %0d beats", (t1 - t0) / 10 + 1, nbeats));
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
    int epsq;
    longint eg;
    epsq = 1 << (20 - e);
    eps_exp = 5'(e);
    eta = 24'(et);
    w_before = wm;
    rs = r; rrot_s = rrot; rptr_s = rptr;
    @(posedge clk); #1;
    step_start = 1;
    @(posedge clk); #1;
    step_start = 0;
    wait_pass_start(PH_POS);
    stream_pass(epsq);
    while (!loss_valid) begin @(posedge clk); #1; end
    lpos = fwd_loss();
    r = rs; rrot = rrot_s; rbase = 0; rptr = rptr_s; n_rewind++;
    @(posedge clk); #1;
    wait_pass_start(PH_NEG);
    stream_pass(-2 * epsq);
    while (!loss_valid) begin @(posedge clk); #1; end
    lneg = fwd_loss();
    // eps - eta * (L+ - L-) / (2 eps), rounded to the coefficient's LSB
    eg = ((longint'(et) * (longint'(lpos) - lneg) <<< e) + 65536) >>> 17;
    coef_ref = int'((longint'(epsq) - eg > 8388607) ? 8388607 :
                    (longint'(epsq) - eg < -8388608) ? -8388608 : longint'(epsq) - eg);
    r = rs; rrot = rrot_s; rbase = 0; rptr = rptr_s; n_rewind++;
    @(posedge clk); #1;
    wait_pass_start(PH_UPD);
    stream_pass(coef_ref);
    while (!step_done) begin @(posedge clk); #1; end
    n_steps++;
    checks++;
    if (q.size() != 0) fail("beats missing at end of step");
    checks++;
    if (mode == MODE_PREGEN && int'(pool_ptr) != rptr) fail("pool pointer differs");
    if (expect_same != 0) begin
      int moved;
      moved = 0;
      for (int i = 0; i < NW; i++) begin
        int d;
        d = int'(wm[i]) - int'(w_before[i]);
        if ((expect_same == 1 && d != 0) || (d > 1 || d < -1)) moved++;
      end
      checks++;
      if (moved != 0) fail($sformatf("eta = 0 step moved %0d weights", moved));
    end
    $display("step %0d mode %0d: L+ %0d L- %0d coef %0d", n_steps, mode, lpos, lneg, coef_ref);
  endtask

  initial begin
    for (int l = 0; l < L; l++) w_in[l] = '0;
    for (int j = 0; j < NR; j++) r[j] = RW'(1 + j * SP);
    rrot = 0; rbase = 0; rptr = 0;
    for (int i = 0; i < NW; i++) wm[i] = shortint'(int'($urandom_range(0, 16384)) - 8192);
    build_lut();
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int a = 0; a < POOL; a++) begin
      pool[a] = 12'(int'($urandom_range(0, 880)) - 440);
      cfg_we = 1; cfg_sel = CFG_POOL; cfg_addr = 16'(a); cfg_wdata = 16'(pool[a]);
      @(posedge clk); #1;
    end
    for (int a = 0; a < 2**RW; a++) begin
      cfg_we = 1; cfg_sel = CFG_LUT; cfg_addr = 16'(a); cfg_wdata = 16'(lut[a] & 15);
      @(posedge clk); #1;
    end
    cfg_we = 0;
    repeat (3) @(posedge clk); #1;

    mode = MODE_PREGEN;
    do_step(6, 0, 1);
    do_step(8, 64, 0);
    mode = MODE_OTF;
    do_step(8, 0, 2);
    do_step(8, 64, 0);

    $display("steps %0d wraps %0d carries %0d drops %0d rewinds %0d saturations %0d",
             n_steps, n_wrap, n_carry, n_drop, n_rewind, n_sat);
    checks++;
    if (n_wrap == 0 || n_carry == 0 || n_drop == 0 || n_rewind == 0) fail("a mechanism never happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
