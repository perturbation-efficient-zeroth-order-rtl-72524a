// pregen_pool -- pre-generation perturbation source: a pool of POOL_N
// pre-generated, pre-scaled random numbers read as one endless circular
// stream.
//
// The pool holds POOL_N = 2^12-1 numbers. It is not a power of two, so the
// pool never lines up with the (power-of-two) sizes of weight matrices. The
// perturbation of the whole model is the pool repeated; a single read pointer
// walks it and is never reset between matrices or between steps, so the
// numbers left over at the end of one matrix start the next one, and the
// numbers left over at the end of one step start the next step.
//
// The numbers are interleaved over BANKS block RAMs (number i in bank
// i mod BANKS, row i / BANKS) so that any BANKS consecutive numbers can be
// read in one cycle. At the end of the pool a beat wraps to number 0; the
// wrapped lanes read row 0 through each bank's second port, so every bank
// serves at most one read per port per cycle.
//
// Interface: a beat `req` takes `req_count` (1..BANKS) numbers; the pointer
// advances by req_count modulo POOL_N. `pert` follows two cycles later: lane
// l holds number (pointer + l) mod POOL_N, converted from Q4.8 (VAL_W=12 bits,
// VAL_FRAC fraction bits) to Q4.12; lanes at and above req_count read 0.
// There is no stall. `mark`/`rewind` save and restore the pointer so a
// perturbation can be regenerated. `we`/`waddr`/`wdata` load pool entry
// `waddr` (the host does this before training; no beat may be requested
// in the same cycle).
//
// From the source work: pool size 2^12-1, 12-bit numbers, 8 BRAMs, the
// carry-over of leftovers. This design's choices: the interleaving, the
// second-port read at the wrap, the number format, the checkpoint.
module pregen_pool
  import pezo_pkg::*;
#(
  parameter int POOL_N   = 4095,
  parameter int BANKS    = 8,
  parameter int VAL_W    = 12,
  parameter int VAL_FRAC = 8
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        req,
  input  logic [$clog2(BANKS+1)-1:0]  req_count,
  input  logic                        mark,
  input  logic                        rewind,
  input  logic                        we,
  input  logic [$clog2(POOL_N)-1:0]   waddr,
  input  logic [VAL_W-1:0]            wdata,
  output logic                        pert_valid,
  output pezo_pkg::pert_t             pert [BANKS],
  output logic [$clog2(POOL_N)-1:0]   ptr,
  output logic                        wrapped
);
  localparam int PW    = $clog2(POOL_N);
  localparam int BW    = $clog2(BANKS);
  localparam int DEPTH = (POOL_N + BANKS - 1) / BANKS;
  localparam int AW    = $clog2(DEPTH);

  initial begin
    assert (BANKS == 2**BW) else $error("pregen_pool: BANKS must be a power of two");
    assert (POOL_N >= BANKS) else $error("pregen_pool: POOL_N must be >= BANKS");
    assert (PERT_FRAC >= VAL_FRAC && PERT_W - PERT_FRAC >= VAL_W - VAL_FRAC)
      else $error("pregen_pool: pool format does not fit the perturbation format");
  end

  logic [PW-1:0]    ptr_saved;
  logic [AW-1:0]    a_addr  [BANKS];
  logic [VAL_W-1:0] a_rdata [BANKS];
  logic [VAL_W-1:0] b_rdata [BANKS];
  logic [AW-1:0]    b_addr;
  logic             next_wraps;

  // port A: bank b serves the unwrapped number ptr + ((b - ptr) mod BANKS)
  always_comb begin
    for (int b = 0; b < BANKS; b++) begin
      int i;
      i = int'(ptr) + ((b - int'(ptr)) & (BANKS - 1));
      a_addr[b] = AW'(i >> BW);
    end
  end
  // port B: row 0 for wrapped lanes, or the row being loaded
  assign b_addr = we ? AW'(int'(waddr) >> BW) : '0;

  for (genvar b = 0; b < BANKS; b++) begin : g_bank
    pool_bank #(.DEPTH(DEPTH), .WIDTH(VAL_W)) u_bank (
      .clk,
      .a_addr  (a_addr[b]),
      .a_rdata (a_rdata[b]),
      .b_we    (we && (int'(waddr) % BANKS == b)),
      .b_addr  (b_addr),
      .b_wdata (wdata),
      .b_rdata (b_rdata[b])
    );
  end

  // read pointer, circular over the pool
  assign next_wraps = req && (int'(ptr) + int'(req_count) >= POOL_N);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ptr       <= '0;
      ptr_saved <= '0;
    end else begin
      if (rewind)   ptr <= ptr_saved;
      else if (req) ptr <= next_wraps ? PW'(int'(ptr) + int'(req_count) - POOL_N)
                                      : PW'(int'(ptr) + int'(req_count));
      if (mark)     ptr_saved <= ptr;
    end
  end
  assign wrapped = next_wraps;

  // stage 1 bookkeeping while the banks are read
  logic [PW-1:0]               ptr_s1;
  logic [$clog2(BANKS+1)-1:0]  cnt_s1;
  logic                        valid_s1;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid_s1 <= 1'b0;
      ptr_s1   <= '0;
      cnt_s1   <= '0;
    end else begin
      valid_s1 <= req;
      if (req) begin
        ptr_s1 <= ptr;
        cnt_s1 <= req_count;
      end
    end
  end

  // stage 2: route bank data to lanes and widen to Q4.12
  pert_t lane_val [BANKS];
  always_comb begin
    for (int l = 0; l < BANKS; l++) begin
      int i;
      logic [VAL_W-1:0] v;
      i = int'(ptr_s1) + l;
      if (i < POOL_N) v = a_rdata[i % BANKS];
      else            v = b_rdata[i - POOL_N];
      lane_val[l] = (l < int'(cnt_s1))
                    ? pert_t'(signed'(v)) <<< (PERT_FRAC - VAL_FRAC)
                    : '0;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pert_valid <= 1'b0;
      for (int l = 0; l < BANKS; l++) pert[l] <= '0;
    end else begin
      pert_valid <= valid_s1;
      if (valid_s1) pert <= lane_val;
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   req |-> (req_count != '0 && int'(req_count) <= BANKS && !we));
endmodule
