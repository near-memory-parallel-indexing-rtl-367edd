// index_splitter: splits each wide block of indices into N segments and stores them in N
// parallel index queues of IDX_DEPTH entries.
//
// Segment k is bits [k*SEG_W +: SEG_W] of the block (SEG_W = 512/N) and goes to index
// queue k. A block is accepted only when all N queues have room (the index fetcher's
// reservation makes this the normal case). The element request generator reads the N
// queue heads as one block and pops all queues together with pop_i once it has used every
// index of the block. The splitting and the N queues of depth 256 follow the paper; the
// lock-step pop is this design's choice.
//
// Interface: in (data valid/ready, from the AXI read data of the index reads), seg_o/
// seg_valid_o (heads of all queues, valid when none is empty), pop_i.
// Timing: one block per cycle in and out; a pushed block is visible the next cycle.
module index_splitter
  import isu_pkg::*;
#(
  parameter int unsigned N         = 8,
  parameter int unsigned IDX_DEPTH = 256
) (
  input  logic                  clk_i,
  input  logic                  rst_ni,
  input  wide_t                 data_i,
  input  logic                  valid_i,
  output logic                  ready_o,
  output logic [N-1:0][WIDE_W/N-1:0] seg_o,
  output logic                  seg_valid_o,
  input  logic                  pop_i
);
  localparam int unsigned SEG_W = WIDE_W / N;

  logic [N-1:0] full, empty;
  logic         push;

  assign ready_o     = ~|full;
  assign push        = valid_i && ready_o;
  assign seg_valid_o = ~|empty;

  for (genvar k = 0; k < N; k++) begin : g_q
    sync_fifo #(.WIDTH(SEG_W), .DEPTH(IDX_DEPTH)) i_idx_q (
      .clk_i, .rst_ni,
      .push_i (push),
      .data_i (data_i[k*SEG_W +: SEG_W]),
      .full_o (full[k]),
      .pop_i  (pop_i),
      .data_o (seg_o[k]),
      .empty_o(empty[k]),
      .usage_o()
    );
  end

  initial assert (WIDE_W % N == 0 && N >= 1) else $error("index_splitter: N must divide 512");
endmodule
