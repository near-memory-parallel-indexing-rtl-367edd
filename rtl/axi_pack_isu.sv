// axi_pack_isu: coalescing indirect stream unit of an AXI-Pack adapter (top level).
//
// An upstream AXI-Pack manager asks for an indirect burst: "give me elem[idx[i]] for
// i = 0..num-1", with the index array at idx_base and the element array at elem_base.
// The unit reads the index array with wide 512-bit DRAM reads (index fetcher), splits each
// block over N index queues (index splitter), produces N element addresses per cycle
// (element request generator), merges requests that fall into the same 512-bit block over
// a window of W requests into single wide reads (request coalescer), and packs the returned
// 64-bit elements densely onto the 512-bit upstream read data bus (element packer). Index
// reads and element reads share the DRAM port through a two-way AXI4 read mux (IDs 0/1).
//
// Interface: req (ind_req_t, valid/ready) and packed read data r_o (valid/ready, last on
// the final beat of each burst) toward the manager; AXI4 AR/R toward the DRAM controller;
// per-cycle event outputs for performance counting.
// Timing: bursts are processed in order, one burst's index reads at a time; element data
// of consecutive bursts may overlap in the coalescer.
// Structure and queue sizes follow the paper's adapter (N parallel index queues of depth
// 256, W = 256 window, hitmap queue 128, offsets queues 2048/W); N = 8, the request
// encoding, the command FIFOs between the stages (depth 2) and all handshakes are this
// design's choices.
module axi_pack_isu
  import isu_pkg::*;
#(
  parameter int unsigned N           = 8,
  parameter int unsigned W           = 256,
  parameter int unsigned IDX_DEPTH   = 256,
  parameter int unsigned Q_DEPTH     = 2,
  parameter int unsigned HM_DEPTH    = 128,
  parameter int unsigned OFS_DEPTH   = 2048 / W,
  parameter int unsigned REG_TIMEOUT = 16,
  parameter int unsigned WD_TIMEOUT  = 16
) (
  input  logic      clk_i,
  input  logic      rst_ni,
  // AXI-Pack side
  input  ind_req_t  req_i,
  input  logic      req_valid_i,
  output logic      req_ready_o,
  output pk_r_t     r_o,
  output logic      r_valid_o,
  input  logic      r_ready_i,
  // AXI4 side (DRAM controller)
  output ar_t       ar_o,
  output logic      ar_valid_o,
  input  logic      ar_ready_i,
  input  r_t        r_i,
  input  logic      r_valid_i,
  output logic      r_ready_o,
  // events
  output logic      ev_win_load_o,
  output logic      ev_win_partial_o,
  output logic      ev_issue_o,
  output logic      ev_wd_issue_o,
  output logic [$clog2(W+1)-1:0] ev_merged_o,
  output logic      ev_idx_stall_o
);
  // ---------------- index fetcher ----------------
  ar_t  [1:0] mux_ar;
  logic [1:0] mux_ar_valid, mux_ar_ready;
  r_t   [1:0] mux_r;
  logic [1:0] mux_r_valid, mux_r_ready;

  erg_cmd_t fcmd, ecmd;
  logic     fcmd_valid, fcmd_ready, ecmd_valid, ecmd_full, ecmd_empty;
  logic     beat_pop;

  index_fetcher #(.IDX_DEPTH(IDX_DEPTH)) i_fetcher (
    .clk_i, .rst_ni,
    .req_i, .req_valid_i, .req_ready_o,
    .ar_o(mux_ar[0]), .ar_valid_o(mux_ar_valid[0]), .ar_ready_i(mux_ar_ready[0]),
    .cmd_o(fcmd), .cmd_valid_o(fcmd_valid), .cmd_ready_i(fcmd_ready),
    .beat_pop_i(beat_pop)
  );
  // index fetcher has work but the index queues lack room
  assign ev_idx_stall_o = i_fetcher.busy_q && !mux_ar_valid[0];

  assign fcmd_ready = !ecmd_full;
  logic ecmd_pop;
  sync_fifo #(.WIDTH($bits(erg_cmd_t)), .DEPTH(2)) i_cmd_q (
    .clk_i, .rst_ni,
    .push_i(fcmd_valid && fcmd_ready), .data_i(fcmd), .full_o(ecmd_full),
    .pop_i(ecmd_pop), .data_o(ecmd), .empty_o(ecmd_empty), .usage_o()
  );
  assign ecmd_valid = !ecmd_empty;

  // ---------------- index splitter + index queues ----------------
  logic [N-1:0][WIDE_W/N-1:0] seg;
  logic                       seg_valid;

  index_splitter #(.N(N), .IDX_DEPTH(IDX_DEPTH)) i_splitter (
    .clk_i, .rst_ni,
    .data_i(mux_r[0].data), .valid_i(mux_r_valid[0]), .ready_o(mux_r_ready[0]),
    .seg_o(seg), .seg_valid_o(seg_valid), .pop_i(beat_pop)
  );

  // ---------------- element request generator ----------------
  addr_t [N-1:0]    req_addr;
  logic  [N-1:0]    req_valid, req_ready;
  logic [NUM_W-1:0] pk_num, pk_num_q;
  logic             pk_valid, pk_full, pk_empty, pk_pop, ecmd_ready;

  elem_req_gen #(.N(N)) i_erg (
    .clk_i, .rst_ni,
    .cmd_i(ecmd), .cmd_valid_i(ecmd_valid), .cmd_ready_o(ecmd_ready),
    .seg_i(seg), .seg_valid_i(seg_valid), .beat_pop_o(beat_pop),
    .req_addr_o(req_addr), .req_valid_o(req_valid), .req_ready_i(req_ready),
    .pk_num_o(pk_num), .pk_valid_o(pk_valid), .pk_ready_i(!pk_full)
  );
  assign ecmd_pop = ecmd_valid && ecmd_ready;

  sync_fifo #(.WIDTH(NUM_W), .DEPTH(2)) i_pk_cmd_q (
    .clk_i, .rst_ni,
    .push_i(pk_valid && !pk_full), .data_i(pk_num), .full_o(pk_full),
    .pop_i(pk_pop), .data_o(pk_num_q), .empty_o(pk_empty), .usage_o()
  );

  // ---------------- request coalescer ----------------
  elem_t [N-1:0] elem;
  logic  [N-1:0] elem_valid, elem_ready;

  req_coal #(
    .N(N), .W(W), .Q_DEPTH(Q_DEPTH), .HM_DEPTH(HM_DEPTH), .OFS_DEPTH(OFS_DEPTH),
    .REG_TIMEOUT(REG_TIMEOUT), .WD_TIMEOUT(WD_TIMEOUT)
  ) i_coal (
    .clk_i, .rst_ni,
    .req_addr_i(req_addr), .req_valid_i(req_valid), .req_ready_o(req_ready),
    .ar_o(mux_ar[1]), .ar_valid_o(mux_ar_valid[1]), .ar_ready_i(mux_ar_ready[1]),
    .r_i(mux_r[1]), .r_valid_i(mux_r_valid[1]), .r_ready_o(mux_r_ready[1]),
    .elem_o(elem), .elem_valid_o(elem_valid), .elem_ready_i(elem_ready),
    .ev_win_load_o, .ev_win_partial_o, .ev_issue_o, .ev_wd_issue_o, .ev_merged_o
  );

  // ---------------- element packer ----------------
  logic pk_cmd_ready;
  elem_packer #(.N(N)) i_packer (
    .clk_i, .rst_ni,
    .cmd_num_i(pk_num_q), .cmd_valid_i(!pk_empty), .cmd_ready_o(pk_cmd_ready),
    .elem_i(elem), .elem_valid_i(elem_valid), .elem_ready_o(elem_ready),
    .r_o, .r_valid_o, .r_ready_i
  );
  assign pk_pop = !pk_empty && pk_cmd_ready;

  // ---------------- downstream AXI4 read mux ----------------
  axi_rd_mux i_mux (
    .clk_i, .rst_ni,
    .ar_i(mux_ar), .ar_valid_i(mux_ar_valid), .ar_ready_o(mux_ar_ready),
    .ar_o, .ar_valid_o, .ar_ready_i,
    .r_i, .r_valid_i, .r_ready_o,
    .r_o(mux_r), .r_valid_o(mux_r_valid), .r_ready_i(mux_r_ready)
  );
endmodule
