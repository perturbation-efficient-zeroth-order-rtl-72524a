// tb_urng_lfsr -- self-checking test of urng_lfsr at its default width (14).
//
// Steps the LFSR through one whole period and checks, against a bit-level
// model written from the tap list (x^14 + x^13 + x^12 + x^2 + 1 in Galois
// form), every state; that each of the 2^14-1 non-zero values appears exactly
// once; that the period ends back at the seed; that the state holds without
// `step`; and that `load` overrides `step`.
`timescale 1ns/1ps
module tb_urng_lfsr;
  localparam int W = 14;
  logic clk = 0, rst_n = 0, step = 0, load = 0;
  logic [W-1:0] load_val = '0, state;
  int checks = 0, failures = 0;

  urng_lfsr #(.W(W), .SEED(16'h0001)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    #2_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // bit-level reference: taps (feedback positions) of the 14-bit polynomial
  function automatic logic [W-1:0] ref_next(input logic [W-1:0] s);
    logic [W-1:0] n;
    logic fb;
    fb = s[0];
    for (int i = 0; i < W - 1; i++) n[i] = s[i+1];
    n[W-1] = fb;
    // bits 12, 11 and 1 receive the feedback in addition (mask 0x3802)
    n[12] = s[13] ^ fb;
    n[11] = s[12] ^ fb;
    n[1]  = s[2]  ^ fb;
    return n;
  endfunction

  bit seen [2**W];
  logic [W-1:0] model;
  initial begin
    for (int i = 0; i < 2**W; i++) seen[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    checks++; if (state !== 14'd1) begin failures++; $display("reset state %h", state); end
    model = 14'd1;
    for (int t = 0; t < 2**W - 1; t++) begin
      checks++;
      if (seen[state]) begin failures++; $display("value %h repeats at step %0d", state, t); end
      seen[state] = 1;
      if (state == 0) begin failures++; $display("zero state"); end
      step = 1; @(posedge clk); #1; step = 0;
      model = ref_next(model);
      checks++;
      if (state !== model) begin
        failures++;
        if (failures < 10) $display("step %0d: got %h want %h", t, state, model);
      end
    end
    checks++; if (state !== 14'd1) begin failures++; $display("period not 2^14-1"); end
    // hold
    repeat (5) @(posedge clk); #1;
    checks++; if (state !== 14'd1) begin failures++; $display("state moved without step"); end
    // load wins over step
    load_val = 14'h2A5C; load = 1; step = 1; @(posedge clk); #1; load = 0; step = 0;
    checks++; if (state !== 14'h2A5C) begin failures++; $display("load failed %h", state); end
    step = 1; @(posedge clk); #1; step = 0;
    checks++; if (state !== ref_next(14'h2A5C)) begin failures++; $display("step after load"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
