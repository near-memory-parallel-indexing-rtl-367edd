// index_fetcher: front end of the indirect stream unit.
//
// For each indirect burst it computes the aligned range of 512-bit blocks that hold the
// burst's indices (first block = idx_base>>6, last block = (idx_base + num<<idx_size - 1)>>6)
// and reads them with AXI4 INCR bursts of at most MAX_BURST beats that never cross a
// MAX_BURST-beat boundary. Before a burst is issued, the beats already requested but not yet
// consumed plus the new ones must fit into the IDX_DEPTH-entry index queues: the fetcher keeps
// a reservation counter that grows on every issued beat and shrinks on beat_pop_i, when the
// element request generator releases one block. On acceptance of a burst it also sends a
// command (element base, count, index size, position of the first index in its block) to
// the element request generator.
//
// Interface: req (valid/ready), ar (AXI4 AR, valid/ready), cmd (valid/ready), beat_pop_i.
// Timing: one request is processed at a time; the first AR can leave the cycle after the
// request is accepted, one AR per cycle after that while credit allows.
// The paper states what the fetcher does (find the index stream, read it with wide reads,
// watch the index queues); the counter scheme, burst size and one-burst-at-a-time
// operation are this design's choices.
module index_fetcher
  import isu_pkg::*;
#(
  parameter int unsigned IDX_DEPTH = 256,
  parameter int unsigned MAX_BURST = 16
) (
  input  logic      clk_i,
  input  logic      rst_ni,
  input  ind_req_t  req_i,
  input  logic      req_valid_i,
  output logic      req_ready_o,
  output ar_t       ar_o,
  output logic      ar_valid_o,
  input  logic      ar_ready_i,
  output erg_cmd_t  cmd_o,
  output logic      cmd_valid_o,
  input  logic      cmd_ready_i,
  input  logic      beat_pop_i
);
  localparam int unsigned RW = $clog2(IDX_DEPTH+1) + 1;
  localparam int unsigned BW = $clog2(MAX_BURST);
  localparam int unsigned CNT_W = NUM_W + 1;

  logic             busy_q;
  tag_t             blk_q;        // next block to read
  logic [CNT_W-1:0] beats_q;      // blocks still to read
  logic [RW-1:0]    reserved_q;   // blocks requested and not yet released

  // Decode of the incoming request.
  addr_t        last_byte;  // bits [5:0] are not needed, only the block number
  tag_t         first_blk, last_blk;
  assign last_byte = req_i.idx_base + ((ADDR_W'(req_i.num) << req_i.idx_size) - 1'b1);
  assign first_blk = req_i.idx_base[ADDR_W-1:BLK_LSB];
  assign last_blk  = last_byte[ADDR_W-1:BLK_LSB];

  assign req_ready_o = !busy_q && cmd_ready_i;
  assign cmd_valid_o = !busy_q && req_valid_i;
  always_comb begin
    cmd_o.elem_base = req_i.elem_base;
    cmd_o.num       = req_i.num;
    cmd_o.idx_size  = req_i.idx_size;
    cmd_o.start_pos = POS_W'(req_i.idx_base[BLK_LSB-1:0] >> req_i.idx_size);
  end

  // Burst length: up to the next MAX_BURST boundary, at most the remaining blocks.
  // (and never more than the index queues can hold)
  localparam int unsigned BMAX = (MAX_BURST < IDX_DEPTH) ? MAX_BURST : IDX_DEPTH;
  logic [CNT_W-1:0] to_boundary, lim, blen;
  assign to_boundary = CNT_W'(MAX_BURST) - CNT_W'(blk_q[BW-1:0]);
  assign lim         = (to_boundary < CNT_W'(BMAX)) ? to_boundary : CNT_W'(BMAX);
  assign blen        = (beats_q < lim) ? beats_q : lim;

  assign ar_valid_o = busy_q && ((CNT_W'(reserved_q) + blen) <= CNT_W'(IDX_DEPTH));
  always_comb begin
    ar_o.id   = '0;
    ar_o.addr = {blk_q, {BLK_LSB{1'b0}}};
    ar_o.len  = 8'(blen - 1'b1);
  end

  logic ar_fire;
  assign ar_fire = ar_valid_o && ar_ready_i;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      busy_q     <= 1'b0;
      blk_q      <= '0;
      beats_q    <= '0;
      reserved_q <= '0;
    end else begin
      reserved_q <= reserved_q + (ar_fire ? RW'(blen) : RW'(0)) - RW'(beat_pop_i);
      if (!busy_q) begin
        if (req_valid_i && req_ready_o) begin
          busy_q  <= 1'b1;
          blk_q   <= first_blk;
          beats_q <= CNT_W'(last_blk - first_blk) + 1'b1;
        end
      end else if (ar_fire) begin
        blk_q   <= blk_q + TAG_W'(blen);
        beats_q <= beats_q - blen;
        if (beats_q == blen) busy_q <= 1'b0;
      end
    end
  end

  a_nonzero: assert property (@(posedge clk_i) disable iff (!rst_ni) req_valid_i && req_ready_o |-> req_i.num != '0)
    else $error("index_fetcher: burst of zero elements");
  a_release: assert property (@(posedge clk_i) disable iff (!rst_ni) beat_pop_i |-> reserved_q != '0)
    else $error("index_fetcher: release without reservation");
endmodule
