// req_coal: the request coalescer.
//
// N parallel narrow 64-bit read requests enter through the upsizer, which spreads them over
// W request queues. The regulator shows the request watcher a window of up to W requests;
// the watcher merges every request of the window that falls into the block held in its
// CSHR and issues one 512-bit read per merged group (a warp), recording which slots were
// merged (hitmap) and where their words lie (offsets) in the meta data queues. Responses
// come back in issue order; the response splitter distributes each block's words to the
// element queues and the downsizer returns them on the N ports in the original order.
//
// Interface: N request ports (addr/valid/ready), AXI4 AR (single 512-bit beats, ID 1) and R,
// N element ports (data/valid/ready). Event outputs (window loads, partial windows, issues,
// watchdog issues, merged requests) serve as performance counters.
// Timing: a request needs at least 2 cycles from entering to being merged; a response is
// split combinationally and leaves the downsizer one cycle after arriving.
// Block structure and sizes follow the paper (Table I depths: 2 for up/downsizer queues,
// 128 for the hitmap queue, 2048/W for the offsets queues).
module req_coal
  import isu_pkg::*;
#(
  parameter int unsigned N           = 8,
  parameter int unsigned W           = 256,
  parameter int unsigned Q_DEPTH     = 2,
  parameter int unsigned HM_DEPTH    = 128,
  parameter int unsigned OFS_DEPTH   = 2048 / W,
  parameter int unsigned REG_TIMEOUT = 16,
  parameter int unsigned WD_TIMEOUT  = 16
) (
  input  logic           clk_i,
  input  logic           rst_ni,
  input  addr_t [N-1:0]  req_addr_i,
  input  logic  [N-1:0]  req_valid_i,
  output logic  [N-1:0]  req_ready_o,
  output ar_t            ar_o,
  output logic           ar_valid_o,
  input  logic           ar_ready_i,
  input  r_t             r_i,
  input  logic           r_valid_i,
  output logic           r_ready_o,
  output elem_t [N-1:0]  elem_o,
  output logic  [N-1:0]  elem_valid_o,
  input  logic  [N-1:0]  elem_ready_i,
  output logic           ev_win_load_o,
  output logic           ev_win_partial_o,
  output logic           ev_issue_o,
  output logic           ev_wd_issue_o,
  output logic [$clog2(W+1)-1:0] ev_merged_o
);
  addr_t [W-1:0] head_addr;
  logic  [W-1:0] head_valid, accept, win_valid, elem_pop;
  logic          any_push;

  coal_upsizer #(.N(N), .W(W), .Q_DEPTH(Q_DEPTH)) i_upsizer (
    .clk_i, .rst_ni,
    .in_addr_i(req_addr_i), .in_valid_i(req_valid_i), .in_ready_o(req_ready_o),
    .head_addr_o(head_addr), .head_valid_o(head_valid), .pop_i(accept), .any_push_o(any_push)
  );

  coal_regulator #(.W(W), .TIMEOUT(REG_TIMEOUT), .ELEM_DEPTH(Q_DEPTH)) i_regulator (
    .clk_i, .rst_ni,
    .head_valid_i(head_valid), .any_push_i(any_push), .accept_i(accept), .elem_pop_i(elem_pop),
    .win_valid_o(win_valid), .win_load_o(ev_win_load_o), .win_partial_o(ev_win_partial_o)
  );

  logic         meta_ready, meta_push;
  logic [W-1:0] meta_hitmap;
  off_t [W-1:0] meta_offs;

  coal_req_watcher #(.W(W), .WD_TIMEOUT(WD_TIMEOUT)) i_watcher (
    .clk_i, .rst_ni,
    .win_valid_i(win_valid), .win_addr_i(head_addr), .accept_o(accept),
    .ar_o, .ar_valid_o, .ar_ready_i,
    .meta_ready_i(meta_ready), .meta_hitmap_o(meta_hitmap), .meta_offs_o(meta_offs),
    .meta_push_o(meta_push), .wd_issue_o(ev_wd_issue_o)
  );
  assign ev_issue_o  = meta_push;
  assign ev_merged_o = ($clog2(W+1))'($countones(accept));

  logic [W-1:0] hm;
  logic         hm_valid, meta_pop;
  off_t [W-1:0] offs;

  coal_meta_queues #(.W(W), .HM_DEPTH(HM_DEPTH), .OFS_DEPTH(OFS_DEPTH)) i_meta (
    .clk_i, .rst_ni,
    .push_i(meta_push), .hitmap_i(meta_hitmap), .offs_i(meta_offs), .push_ready_o(meta_ready),
    .hm_o(hm), .hm_valid_o(hm_valid), .offs_o(offs), .pop_i(meta_pop)
  );

  elem_t [W-1:0] elem;
  logic  [W-1:0] elem_push, elem_ready;

  coal_resp_splitter #(.W(W)) i_splitter (
    .r_data_i(r_i.data), .r_valid_i(r_valid_i), .r_ready_o,
    .hm_i(hm), .hm_valid_i(hm_valid), .offs_i(offs), .meta_pop_o(meta_pop),
    .elem_o(elem), .elem_push_o(elem_push), .elem_ready_i(elem_ready)
  );

  coal_downsizer #(.N(N), .W(W), .Q_DEPTH(Q_DEPTH)) i_downsizer (
    .clk_i, .rst_ni,
    .elem_i(elem), .elem_push_i(elem_push), .elem_ready_o(elem_ready),
    .out_data_o(elem_o), .out_valid_o(elem_valid_o), .out_ready_i(elem_ready_i),
    .elem_pop_o(elem_pop)
  );
endmodule
