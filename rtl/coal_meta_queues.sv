// coal_meta_queues: meta data queues between the request watcher and the response
// splitter.
//
// One deep FIFO (HM_DEPTH entries) keeps the W-bit hitmap of every issued wide read, and
// W shallow FIFOs (OFS_DEPTH entries each) keep the 3-bit element offsets. On a push the
// whole hitmap enters the deep queue while only the slots whose hitmap bit is set push
// their offset. On a pop the head hitmap is removed together with the offsets of its set
// slots. push_ready_o requires room in the hitmap queue and in every offsets queue, so it
// cannot fall while a wide read waits for the AXI handshake.
//
// Interface: push (hitmap, offsets, push_i, push_ready_o); head (hm_o, hm_valid_o,
// offs_o) and pop_i.
// Timing: a pushed entry is at the head the next cycle.
// Queue structure, depths (128 and 2048/W) and push rule follow the paper.
module coal_meta_queues
  import isu_pkg::*;
#(
  parameter int unsigned W         = 256,
  parameter int unsigned HM_DEPTH  = 128,
  parameter int unsigned OFS_DEPTH = 2048 / W
) (
  input  logic              clk_i,
  input  logic              rst_ni,
  input  logic              push_i,
  input  logic [W-1:0]      hitmap_i,
  input  off_t [W-1:0]      offs_i,
  output logic              push_ready_o,
  output logic [W-1:0]      hm_o,
  output logic              hm_valid_o,
  output off_t [W-1:0]      offs_o,
  input  logic              pop_i
);
  logic         hm_full, hm_empty;
  logic [W-1:0] ofs_full;

  assign push_ready_o = !hm_full && !(|ofs_full);
  assign hm_valid_o   = !hm_empty;

  sync_fifo #(.WIDTH(W), .DEPTH(HM_DEPTH)) i_hitmap_q (
    .clk_i, .rst_ni,
    .push_i (push_i), .data_i(hitmap_i), .full_o(hm_full),
    .pop_i  (pop_i),  .data_o(hm_o),     .empty_o(hm_empty), .usage_o()
  );

  for (genvar s = 0; s < W; s++) begin : g_ofs
    sync_fifo #(.WIDTH(OFF_W), .DEPTH(OFS_DEPTH)) i_offs_q (
      .clk_i, .rst_ni,
      .push_i (push_i && hitmap_i[s]), .data_i(offs_i[s]), .full_o(ofs_full[s]),
      .pop_i  (pop_i && hm_o[s]),      .data_o(offs_o[s]), .empty_o(), .usage_o()
    );
  end
endmodule
