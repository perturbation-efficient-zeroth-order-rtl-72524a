// pool_bank -- one block RAM of the pre-generation pool.
//
// A true dual-port memory of DEPTH words of WIDTH bits with synchronous
// reads. Port A only reads. Port B writes `b_wdata` when `b_we` is high (the
// host load) and otherwise reads. Read data appears the cycle after the
// address. Contents are not reset.
module pool_bank #(
  parameter int DEPTH = 512,
  parameter int WIDTH = 12
) (
  input  logic                     clk,
  input  logic [$clog2(DEPTH)-1:0] a_addr,
  output logic [WIDTH-1:0]         a_rdata,
  input  logic                     b_we,
  input  logic [$clog2(DEPTH)-1:0] b_addr,
  input  logic [WIDTH-1:0]         b_wdata,
  output logic [WIDTH-1:0]         b_rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) a_rdata <= mem[a_addr];

  always_ff @(posedge clk) begin
    if (b_we) mem[b_addr] <= b_wdata;
    b_rdata <= mem[b_addr];
  end
endmodule
