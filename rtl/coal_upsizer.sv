// coal_upsizer: input stage of the request coalescer.
//
// The N narrow request ports feed W request queues of Q_DEPTH entries, W/N per port.
// Port p sends its i-th request to queue p + N*(i mod W/N), turning round-robin over its
// queues, so queue s holds the requests whose running number j satisfies j mod W = s
// (with j = N*i + p). The heads of all W queues form the candidate window; pop_i removes
// the heads the request watcher has accepted. push_o reports which queues were written
// (the regulator's time limit restarts on any new request).
//
// Interface: N ports (addr/valid/ready), W heads (addr, valid), W pops.
// Timing: one request per port per cycle; a pushed request is a head the next cycle.
// The structure (W/N queues per port, depth 2) follows the paper; the interleaving of the
// queues is this design's choice.
module coal_upsizer
  import isu_pkg::*;
#(
  parameter int unsigned N       = 8,
  parameter int unsigned W       = 256,
  parameter int unsigned Q_DEPTH = 2
) (
  input  logic                clk_i,
  input  logic                rst_ni,
  input  addr_t [N-1:0]       in_addr_i,
  input  logic  [N-1:0]       in_valid_i,
  output logic  [N-1:0]       in_ready_o,
  output addr_t [W-1:0]       head_addr_o,
  output logic  [W-1:0]       head_valid_o,
  input  logic  [W-1:0]       pop_i,
  output logic                any_push_o
);
  localparam int unsigned QPP = W / N;             // queues per port
  localparam int unsigned SW  = (QPP > 1) ? $clog2(QPP) : 1;

  logic [N-1:0][SW-1:0] sel_q;
  logic [W-1:0]         full, empty, push;

  always_comb begin
    push = '0;
    for (int p = 0; p < N; p++) begin
      in_ready_o[p] = !full[p + N*int'(sel_q[p])];
      push[p + N*int'(sel_q[p])] = in_valid_i[p] && in_ready_o[p];
    end
  end
  assign head_valid_o = ~empty;
  assign any_push_o   = |(in_valid_i & in_ready_o);

  for (genvar s = 0; s < W; s++) begin : g_q
    sync_fifo #(.WIDTH(ADDR_W), .DEPTH(Q_DEPTH)) i_req_q (
      .clk_i, .rst_ni,
      .push_i (push[s]),
      .data_i (in_addr_i[s % N]),
      .full_o (full[s]),
      .pop_i  (pop_i[s]),
      .data_o (head_addr_o[s]),
      .empty_o(empty[s]),
      .usage_o()
    );
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) sel_q <= '0;
    else for (int p = 0; p < N; p++)
      if (in_valid_i[p] && in_ready_o[p])
        sel_q[p] <= (QPP > 1) ? SW'((int'(sel_q[p]) + 1) % QPP) : '0;
  end

  initial assert (W % N == 0 && W >= N) else $error("coal_upsizer: W must be a multiple of N");
endmodule
