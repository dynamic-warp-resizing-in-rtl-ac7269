// coalescer - memory access coalescing of one warp's LAT.
//
// Threads of a warp whose addresses fall in the same 64-byte stride (one cache
// block, the memory transaction size) are served by one request, in the manner
// of compute capability 2.0 devices; the coalescing width equals the largest
// warp, 64 threads, so a large warp built by the combiner coalesces across
// all of its sub-warps. That much is the paper's; the order of requests (by
// lowest pending thread) and the one-request-per-cycle sequencing are this
// design's choice.
//
// Interface: pulse start with the addresses and active mask of the warp while
// busy is low. Then, one per accepted cycle (req_valid && req_ready), a block
// address leaves on req_addr (low bits zero). done pulses with the last
// accepted request (or, for an empty mask, one cycle after start); req_count
// holds the number of requests of the warp.
module coalescer #(
  parameter int unsigned THREADS     = 64,
  parameter int unsigned ADDR_W      = 32,
  parameter int unsigned BLOCK_BYTES = 64
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           start,
  input  logic [THREADS-1:0]             active,
  input  logic [THREADS-1:0][ADDR_W-1:0] addr,
  output logic                           busy,
  output logic                           req_valid,
  input  logic                           req_ready,
  output logic [ADDR_W-1:0]              req_addr,
  output logic                           done,
  output logic [$clog2(THREADS+1)-1:0]   req_count
);
  localparam int unsigned OFF_W = $clog2(BLOCK_BYTES);
  localparam int unsigned BLK_W = ADDR_W - OFF_W;

  logic                          busy_q;
  logic [THREADS-1:0]            pend_q;
  logic [THREADS-1:0][BLK_W-1:0] blk_q;
  logic [$clog2(THREADS+1)-1:0]  cnt_q;
  logic                          empty_done_q;

  // lowest pending thread and everyone sharing its block
  logic [BLK_W-1:0]   head_blk;
  logic [THREADS-1:0] same;
  logic               found;
  always_comb begin
    found    = 1'b0;
    head_blk = '0;
    for (int t = 0; t < THREADS; t++)
      if (!found && pend_q[t]) begin
        found    = 1'b1;
        head_blk = blk_q[t];
      end
    for (int t = 0; t < THREADS; t++)
      same[t] = pend_q[t] && blk_q[t] == head_blk;
  end

  logic fire;
  assign req_valid = busy_q && found;
  assign req_addr  = {head_blk, {OFF_W{1'b0}}};
  assign fire      = req_valid && req_ready;
  assign done      = (fire && (pend_q & ~same) == '0) || empty_done_q;
  assign busy      = busy_q;
  assign req_count = cnt_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy_q       <= 1'b0;
      pend_q       <= '0;
      blk_q        <= '0;
      cnt_q        <= '0;
      empty_done_q <= 1'b0;
    end else begin
      empty_done_q <= 1'b0;
      if (start && !busy_q) begin
        for (int t = 0; t < THREADS; t++) blk_q[t] <= addr[t][ADDR_W-1:OFF_W];
        pend_q <= active;
        cnt_q  <= '0;
        busy_q <= (active != '0);
        empty_done_q <= (active == '0);
      end else if (fire) begin
        pend_q <= pend_q & ~same;
        cnt_q  <= cnt_q + 1'b1;
        if ((pend_q & ~same) == '0) busy_q <= 1'b0;
      end
    end
  end

  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy_q);

endmodule
