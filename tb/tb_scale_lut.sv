// tb_scale_lut -- self-checking test of scale_lut at its default size
// (2^14 entries of 4-bit signed exponents).
//
// Fills the whole table with values from a hash of the address, reads every
// entry back and checks the value and the one-cycle read latency, then
// overwrites a few entries and checks that reads see the new values.
`timescale 1ns/1ps
module tb_scale_lut;
  localparam int AW = 14, EW = 4;
  logic clk = 0, we = 0;
  logic [AW-1:0] waddr = '0, raddr = '0;
  logic signed [EW-1:0] wdata = '0, rdata;
  int checks = 0, failures = 0;

  scale_lut #(.ADDR_W(AW), .EXP_W(EW)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    #5_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic signed [EW-1:0] hv(input int a, input int salt);
    return EW'((a * 7 + (a >> 3) * 13 + salt) % 16);
  endfunction

  initial begin
    @(posedge clk); #1;
    for (int a = 0; a < 2**AW; a++) begin
      we = 1; waddr = AW'(a); wdata = hv(a, 0);
      @(posedge clk); #1;
    end
    we = 0;
    for (int a = 0; a < 2**AW; a++) begin
      raddr = AW'(a);
      @(posedge clk); #1;
      raddr = AW'(a + 1);      // next address must not disturb this data
      checks++;
      if (rdata !== hv(a, 0)) begin
        failures++;
        if (failures < 10) $display("addr %0d got %0d want %0d", a, rdata, hv(a, 0));
      end
    end
    for (int a = 100; a < 110; a++) begin
      we = 1; waddr = AW'(a); wdata = hv(a, 5); @(posedge clk); #1;
    end
    we = 0;
    for (int a = 100; a < 110; a++) begin
      raddr = AW'(a); @(posedge clk); #1;
      checks++;
      if (rdata !== hv(a, 5)) begin failures++; $display("rewrite addr %0d", a); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
