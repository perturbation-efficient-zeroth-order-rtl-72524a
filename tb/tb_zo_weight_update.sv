// tb_zo_weight_update -- self-checking test of the weight lanes at the
// default formats (weights Q2.14, perturbation Q4.12, coefficient 24 bits
// with 20 fraction bits).
//
// Random weights, perturbations, lane enables and coefficients (small ones
// like +eps and -2*eps, and large ones that saturate) are applied every
// cycle. The expected result is computed in real arithmetic:
// w + floor(c*u / 2^18 + 1/2), clamped to 16 bits. Checks the values, the
// pass-through of disabled lanes and the one-cycle latency.
`timescale 1ns/1ps
module tb_zo_weight_update;
  localparam int L = 8;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic [L-1:0] in_en = '0;
  logic signed [15:0] w_in [L], w_out [L];
  pezo_pkg::pert_t pert [L];
  logic signed [23:0] coef = '0;
  int checks = 0, failures = 0, n_sat = 0;

  zo_weight_update #(.LANES(L), .W_W(16), .W_FRAC(14), .COEF_W(24), .COEF_FRAC(20)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    #1_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int ref_lane(input int w, input int u, input int c);
    real d, s;
    d = $floor(real'(c) * real'(u) / 262144.0 + 0.5);
    s = real'(w) + d;
    if (s > 32767.0) s = 32767.0;
    if (s < -32768.0) s = -32768.0;
    return int'(s);
  endfunction

  int expv [L];
  logic exp_valid;
  initial begin
    for (int l = 0; l < L; l++) begin w_in[l] = '0; pert[l] = '0; end
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    exp_valid = 0;
    for (int c = 0; c < 5000; c++) begin
      int sel;
      in_valid = ($urandom_range(0, 9) != 0);
      in_en = L'($urandom);
      sel = $urandom_range(0, 3);
      case (sel)
        0: coef = 24'sd1 <<< $urandom_range(4, 14);            // +eps
        1: coef = -(24'sd2 <<< $urandom_range(4, 14));         // -2*eps
        2: coef = 24'($urandom_range(0, 2**16)) - 24'sd32768;  // eps - eta*g
        default: coef = 24'($urandom);                         // anything
      endcase
      for (int l = 0; l < L; l++) begin
        w_in[l] = 16'($urandom);
        pert[l] = 16'($urandom);
        if ($urandom_range(0, 1) == 1) pert[l] = 16'(int'($urandom_range(0, 16384)) - 8192);
      end
      @(posedge clk); #1;
      checks++;
      if (out_valid !== in_valid) begin failures++; $display("out_valid wrong at %0d", c); end
      if (in_valid) begin
        for (int l = 0; l < L; l++) begin
          int e;
          e = in_en[l] ? ref_lane(int'(w_in[l]), int'(pert[l]), int'(coef)) : int'(w_in[l]);
          if (in_en[l] && (e == 32767 || e == -32768)) n_sat++;
          checks++;
          if (int'(w_out[l]) != e) begin
            failures++;
            if (failures < 10) $display("c %0d lane %0d w %0d u %0d coef %0d got %0d want %0d",
                                        c, l, w_in[l], pert[l], coef, w_out[l], e);
          end
        end
      end
    end
    checks++;
    if (n_sat == 0) begin failures++; $display("saturation never happened"); end
    $display("saturations %0d", n_sat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
