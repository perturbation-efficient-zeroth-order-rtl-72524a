// tb_pregen_pool -- self-checking test of the pre-generation pool at its
// default size (4095 numbers of 12 bits in 8 banks).
//
// Loads the pool with random 12-bit values, then sends random beats of 1..8
// numbers for many passes over the pool. A reference pointer predicts each
// lane (pool[(ptr + l) mod 4095], sign-extended and moved from 8 to 12
// fraction bits); the test checks values, the two-cycle latency, that reads
// across the end of the pool wrap to entry 0, and that mark/rewind replay
// the same numbers.
`timescale 1ns/1ps
module tb_pregen_pool;
  localparam int N = 4095, B = 8;
  logic clk = 0, rst_n = 0, req = 0, mark = 0, rewind = 0, we = 0;
  logic [3:0]  req_count = 4'd1;
  logic [11:0] waddr = '0, wdata = '0;
  logic        pert_valid, wrapped;
  pezo_pkg::pert_t pert [B];
  logic [11:0] ptr;
  int checks = 0, failures = 0, n_wrap = 0, n_rewind = 0;

  pregen_pool #(.POOL_N(N), .BANKS(B), .VAL_W(12), .VAL_FRAC(8)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    #5_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [11:0] pool [N];
  int rptr, rptr_s, cyc = 0;
  typedef struct { int due; int v [B]; } exp_t;
  exp_t q [$];

  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) begin
    #2;
    if (pert_valid) begin
      checks++;
      if (q.size() == 0) begin failures++; $display("unexpected pert_valid"); end
      else begin
        exp_t e;
        e = q.pop_front();
        if (e.due != cyc) begin failures++; $display("latency: due %0d now %0d", e.due, cyc); end
        for (int l = 0; l < B; l++)
          if (int'(pert[l]) != e.v[l]) begin
            failures++;
            if (failures < 10) $display("cyc %0d lane %0d got %0d want %0d", cyc, l, pert[l], e.v[l]);
          end
      end
    end
  end

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int a = 0; a < N; a++) begin
      pool[a] = 12'($urandom);
      we = 1; waddr = 12'(a); wdata = pool[a];
      @(posedge clk); #1;
    end
    we = 0;
    rptr = 0; rptr_s = 0;
    for (int c = 0; c < 40000; c++) begin
      int x, cnt;
      x = $urandom_range(0, 99);
      req = (x < 85);
      cnt = $urandom_range(1, B);
      req_count = 4'(cnt);
      mark = (x == 90);
      rewind = (x == 91) && (c > 200);
      #1;
      checks++;
      if (int'(ptr) != rptr) begin failures++; $display("ptr %0d want %0d", ptr, rptr); end
      if (req) begin
        exp_t e;
        e.due = cyc + 2;
        for (int l = 0; l < B; l++)
          e.v[l] = (l < cnt) ? 16 * int'(signed'(pool[(rptr + l) % N])) : 0;
        q.push_back(e);
      end
      @(posedge clk);
      if (mark) rptr_s = rptr;
      if (rewind) begin rptr = rptr_s; n_rewind++; end
      else if (req) begin
        if (rptr + cnt >= N) n_wrap++;
        rptr = (rptr + cnt) % N;
      end
      #1;
      req = 0; mark = 0; rewind = 0;
    end
    repeat (4) @(posedge clk);
    checks++;
    if (q.size() != 0) begin failures++; $display("%0d beats never came out", q.size()); end
    checks++;
    if (n_wrap < 2 || n_rewind == 0) begin failures++; $display("mechanism not exercised"); end
    $display("wraps %0d rewinds %0d", n_wrap, n_rewind);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
