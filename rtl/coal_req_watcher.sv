// coal_req_watcher: the request watcher with its single coalescer status holding register
// (CSHR).
//
// The CSHR holds a Tag (the 512-bit block address, addr[47:6]), a Status (IDLE: empty,
// VALID: holds a tag and at least one merged request), a W-bit Hitmap (which window slots
// were merged) and a 3-bit element Offset (addr[5:3]) per slot. Every cycle all valid window
// entries are compared with the tag in parallel. Entries with a matching tag whose hitmap
// bit is still clear are hits: they are accepted (accept_o, which removes them from the
// window) and recorded in the hitmap and offsets. An IDLE CSHR takes the tag of the
// lowest-numbered valid entry in the same cycle. If any window entry misses, or if the
// watchdog has seen WD_TIMEOUT cycles with a VALID CSHR and an empty window, the wide read
// of the tag is issued; in the issuing cycle the hitmap (including that cycle's hits) and
// the offsets are pushed to the meta data queues and the CSHR returns to IDLE, so the next
// tag is the lowest-numbered remaining miss. One warp can be merged and issued per cycle.
//
// Interface: window (valid/addr per slot), accept_o, AR (valid/ready, single 512-bit beat,
// ID 1), meta push (hitmap/offsets, push with the AR handshake, meta_ready_i gates issue).
// Timing: hits are accepted in the cycle they are presented.
// The CSHR fields, parallel hit check, miss-triggered issue, next tag from the misses and
// the watchdog follow the paper; the exact Status encoding, the same-cycle issue and the
// treatment of a slot already in the hitmap as a miss are this design's choices.
module coal_req_watcher
  import isu_pkg::*;
#(
  parameter int unsigned W          = 256,
  parameter int unsigned WD_TIMEOUT = 16
) (
  input  logic               clk_i,
  input  logic               rst_ni,
  input  logic  [W-1:0]      win_valid_i,
  input  addr_t [W-1:0]      win_addr_i,
  output logic  [W-1:0]      accept_o,
  output ar_t                ar_o,
  output logic               ar_valid_o,
  input  logic               ar_ready_i,
  input  logic               meta_ready_i,
  output logic  [W-1:0]      meta_hitmap_o,
  output off_t  [W-1:0]      meta_offs_o,
  output logic               meta_push_o,
  output logic               wd_issue_o
);
  typedef enum logic {IDLE = 1'b0, VALID = 1'b1} status_e;
  localparam int unsigned TW = $clog2(WD_TIMEOUT+1);

  // CSHR
  status_e             status_q;
  tag_t                tag_q;
  logic  [W-1:0]       hitmap_q;
  off_t  [W-1:0]       offs_q;
  logic  [TW-1:0]      wd_q;

  logic  any_win;
  tag_t  first_tag, eff_tag;
  logic  [W-1:0] hit, miss;

  assign any_win = |win_valid_i;

  // Tag of the lowest-numbered valid window entry.
  always_comb begin
    first_tag = '0;
    for (int s = W-1; s >= 0; s--)
      if (win_valid_i[s]) first_tag = win_addr_i[s][ADDR_W-1:BLK_LSB];
  end
  assign eff_tag = (status_q == VALID) ? tag_q : first_tag;

  always_comb begin
    for (int s = 0; s < W; s++) begin
      hit[s]  = win_valid_i[s] && !hitmap_q[s] && (win_addr_i[s][ADDR_W-1:BLK_LSB] == eff_tag);
      miss[s] = win_valid_i[s] && !hit[s];
    end
  end
  assign accept_o = hit;

  logic forming, wd_expired, want_issue, issue;
  assign forming    = (status_q == VALID) || any_win;
  assign wd_expired = (status_q == VALID) && (wd_q >= TW'(WD_TIMEOUT));
  assign want_issue = forming && ((|miss) || wd_expired);
  assign ar_valid_o = want_issue && meta_ready_i;
  assign issue      = ar_valid_o && ar_ready_i;
  assign wd_issue_o = issue && !(|miss);

  always_comb begin
    ar_o.id   = ID_W'(1);
    ar_o.addr = {eff_tag, {BLK_LSB{1'b0}}};
    ar_o.len  = '0;
    meta_hitmap_o = hitmap_q | hit;
    for (int s = 0; s < W; s++)
      meta_offs_o[s] = hit[s] ? win_addr_i[s][BLK_LSB-1:ELEM_LSB] : offs_q[s];
  end
  assign meta_push_o = issue;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      status_q <= IDLE;
      tag_q    <= '0;
      hitmap_q <= '0;
      offs_q   <= '0;
      wd_q     <= '0;
    end else begin
      if (issue) begin
        status_q <= IDLE;
        hitmap_q <= '0;
        wd_q     <= '0;
      end else begin
        if (forming) begin
          status_q <= VALID;
          tag_q    <= eff_tag;
        end
        hitmap_q <= meta_hitmap_o;
        offs_q   <= meta_offs_o;
        if (status_q == VALID && !any_win && wd_q < TW'(WD_TIMEOUT)) wd_q <= wd_q + 1'b1;
        else if (any_win)                                           wd_q <= '0;
      end
    end
  end

  a_valid_has_hits: assert property (@(posedge clk_i) disable iff (!rst_ni) status_q == VALID |-> hitmap_q != '0)
    else $error("coal_req_watcher: VALID CSHR without hits");
  a_ar_stable: assert property (@(posedge clk_i) disable iff (!rst_ni) ar_valid_o && !ar_ready_i |=> ar_valid_o && $stable(ar_o))
    else $error("coal_req_watcher: AR changed before handshake");
endmodule
