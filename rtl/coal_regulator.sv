// coal_regulator: forms the request windows the request watcher works on.
//
// The window is a mask over the heads of the W request queues. While the current window
// still has valid entries it is held; entries leave it when the watcher accepts them
// (accept_i, which also pops the request queue). When it is empty, a new window is loaded
// with every slot that has a request waiting and whose element queue has room: at once if
// that is all W slots (a complete window), otherwise after TIMEOUT cycles without a new
// request arriving (a partial window). A slot has room while fewer than ELEM_DEPTH of its
// requests are accepted but not yet delivered by the downsizer (elem_pop_i); this keeps the
// response path from ever blocking on a full element queue.
//
// Interface: head_valid_i, accept_i, elem_pop_i, any_push_i in; win_valid_o out,
// win_load_o/win_partial_o pulse when a (partial) window is loaded.
// Timing: a window is visible the cycle after it is loaded.
// Complete windows and the time limit follow the paper; the per-slot credit and the
// TIMEOUT value are this design's.
module coal_regulator #(
  parameter int unsigned W          = 256,
  parameter int unsigned TIMEOUT    = 16,
  parameter int unsigned ELEM_DEPTH = 2
) (
  input  logic         clk_i,
  input  logic         rst_ni,
  input  logic [W-1:0] head_valid_i,
  input  logic         any_push_i,
  input  logic [W-1:0] accept_i,
  input  logic [W-1:0] elem_pop_i,
  output logic [W-1:0] win_valid_o,
  output logic         win_load_o,
  output logic         win_partial_o
);
  localparam int unsigned CW = $clog2(ELEM_DEPTH+1);
  localparam int unsigned TW = $clog2(TIMEOUT+1);

  logic [W-1:0]         win_q, can_load;
  logic [W-1:0][CW-1:0] inflight_q;
  logic [TW-1:0]        timer_q;

  always_comb
    for (int s = 0; s < W; s++)
      can_load[s] = head_valid_i[s] && (inflight_q[s] < CW'(ELEM_DEPTH));

  logic win_empty, complete, expired;
  assign win_empty     = ~|win_q;
  assign complete      = &can_load;
  assign expired       = (timer_q >= TW'(TIMEOUT)) && |can_load;
  assign win_load_o    = win_empty && (complete || expired);
  assign win_partial_o = win_load_o && !complete;
  assign win_valid_o   = win_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      win_q      <= '0;
      inflight_q <= '0;
      timer_q    <= '0;
    end else begin
      for (int s = 0; s < W; s++)
        inflight_q[s] <= inflight_q[s] + CW'(accept_i[s]) - CW'(elem_pop_i[s]);
      if (win_load_o) win_q <= can_load;
      else            win_q <= win_q & ~accept_i;
      if (win_load_o || any_push_i || !win_empty || !(|can_load)) timer_q <= '0;
      else if (timer_q < TW'(TIMEOUT))                                timer_q <= timer_q + 1'b1;
    end
  end

  a_accept_in_window: assert property (@(posedge clk_i) disable iff (!rst_ni) (accept_i & ~win_q) == '0)
    else $error("coal_regulator: accept outside window");
endmodule
