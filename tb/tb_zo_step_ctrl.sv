// tb_zo_step_ctrl -- self-checking test of the zeroth-order step sequencer.
//
// Runs 300 steps with random eps = 2^-e, learning rates, losses and random
// pass and forward-pass durations. Every cycle the outputs are compared with
// the expected sequence: mark alone, pass POS with +eps, forward request,
// rewind alone, pass NEG with -2*eps, forward request, rewind alone, pass UPD
// with eps - eta*(L+ - L-)/(2*eps) (computed here in real arithmetic and
// rounded to nearest), then done. Also checks that nothing moves while the
// sequencer waits.
`timescale 1ns/1ps
module tb_zo_step_ctrl;
  import pezo_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, pass_done = 0, loss_valid = 0;
  logic [4:0] eps_exp = 5'd10;
  logic signed [23:0] eta = '0, coef;
  logic signed [31:0] loss = '0;
  zo_phase_e phase;
  logic pass_active, pass_start, fwd_req, gen_mark, gen_rewind, busy, done;
  logic signed [32:0] dloss;
  int checks = 0, failures = 0;

  zo_step_ctrl #(.COEF_W(24), .COEF_FRAC(20), .LOSS_W(32), .LOSS_FRAC(16)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    #10_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_out(input string what, input zo_phase_e ph, input logic act,
                            input logic ps, input logic fr, input logic mk, input logic rw,
                            input logic dn, input int c);
    checks++;
    if (phase !== ph || pass_active !== act || pass_start !== ps || fwd_req !== fr ||
        gen_mark !== mk || gen_rewind !== rw || done !== dn || (act && int'(coef) != c)) begin
      failures++;
      if (failures < 20)
        $display("%s: phase %0d act %0d ps %0d fr %0d mk %0d rw %0d dn %0d coef %0d (want coef %0d)",
                 what, phase, pass_active, pass_start, fwd_req, gen_mark, gen_rewind, done, coef, c);
    end
  endtask


  task automatic give_loss(input int l, input int wait_cycles);
    expect_out("fwd_req", PH_NONE, 0, 0, 1, 0, 0, 0, 0);
    for (int i = 0; i < wait_cycles; i++) begin
      @(posedge clk); #1;
      expect_out("waiting loss", PH_NONE, 0, 0, 0, 0, 0, 0, 0);
    end
    loss_valid = 1; loss = l;
    @(posedge clk); #1;
    loss_valid = 0;
  endtask

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int s = 0; s < 300; s++) begin
      int e, lp, ln, epsq, cu;
      real eg;
      e = $urandom_range(1, 16);
      eps_exp = 5'(e);
      eta = 24'($urandom_range(1, 2**14));
      lp = int'($urandom_range(0, 2**20)) + 65536;
      ln = lp + int'($urandom_range(0, 2**12)) - 2048;
      epsq = 1 << (20 - e);
      // expected update coefficient
      eg = $floor(real'(eta) * real'(lp - ln) * (2.0 ** e) / (2.0 ** 17) + 0.5);
      cu = int'(real'(epsq) - eg);
      if (cu > 8388607) cu = 8388607;
      if (cu < -8388608) cu = -8388608;
      repeat ($urandom_range(0, 3)) begin
        @(posedge clk); #1;
        expect_out("idle", PH_NONE, 0, 0, 0, 0, 0, 0, 0);
      end
      start = 1; #1;
      checks++; if (busy) begin failures++; $display("busy before start"); end
      @(posedge clk); #1; start = 0;
      // the mark comes alone, then the POS pass opens
      expect_out("mark", PH_NONE, 0, 0, 0, 1, 0, 0, 0);
      @(posedge clk); #1;
      expect_out("pos first", PH_POS, 1, 1, 0, 0, 0, 0, epsq);
      @(posedge clk); #1;
      begin
        int len;
        len = $urandom_range(1, 6);
        for (int i = 0; i < len; i++) begin
          pass_done = (i == len - 1);
          expect_out("pos", PH_POS, 1, 0, 0, 0, 0, 0, epsq);
          @(posedge clk); #1;
          pass_done = 0;
        end
      end
      give_loss(lp, $urandom_range(0, 4));
      // rewind alone, then the NEG pass opens
      expect_out("rewind 1", PH_NONE, 0, 0, 0, 0, 1, 0, 0);
      @(posedge clk); #1;
      expect_out("neg first", PH_NEG, 1, 1, 0, 0, 0, 0, -2 * epsq);
      @(posedge clk); #1;
      run_pass_tail("neg", PH_NEG, -2 * epsq, $urandom_range(1, 6));
      give_loss(ln, $urandom_range(0, 4));
      // rewind alone (the coefficient is ready), then the UPD pass opens
      expect_out("rewind 2", PH_NONE, 0, 0, 0, 0, 1, 0, 0);
      @(posedge clk); #1;
      expect_out("upd first", PH_UPD, 1, 1, 0, 0, 0, 0, cu);
      @(posedge clk); #1;
      run_pass_tail("upd", PH_UPD, cu, $urandom_range(1, 6));
      expect_out("done", PH_NONE, 0, 0, 0, 0, 0, 1, 0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_pass_tail(input string what, input zo_phase_e ph, input int c, input int len);
    for (int i = 0; i < len; i++) begin
      pass_done = (i == len - 1);
      expect_out(what, ph, 1, 0, 0, 0, 0, 0, c);
      @(posedge clk); #1;
      pass_done = 0;
    end
  endtask
endmodule
