// coal_downsizer: element queues and output stage of the request coalescer.
//
// It holds the W element queues (Q_DEPTH entries each) written by the response splitter,
// and maps them onto the N output ports as the mirror image of the upsizer: port p reads
// queues p, p+N, p+2N, ... in turn, waiting at each until its element is there. Because the
// upsizer distributed the port's requests in the same order, each port returns its elements
// in request order although wide responses complete out of that order. elem_pop_o tells
// the regulator which element queue was read (credit return).
//
// Interface: per-slot push (elem_i/elem_push_i/elem_ready_o), N ports (data/valid/ready).
// Timing: an element pushed in one cycle can leave the next.
// The structure and depth follow the paper; the round-robin order is this design's choice,
// matching its upsizer.
module coal_downsizer
  import isu_pkg::*;
#(
  parameter int unsigned N       = 8,
  parameter int unsigned W       = 256,
  parameter int unsigned Q_DEPTH = 2
) (
  input  logic                clk_i,
  input  logic                rst_ni,
  input  elem_t [W-1:0]       elem_i,
  input  logic  [W-1:0]       elem_push_i,
  output logic  [W-1:0]       elem_ready_o,
  output elem_t [N-1:0]       out_data_o,
  output logic  [N-1:0]       out_valid_o,
  input  logic  [N-1:0]       out_ready_i,
  output logic  [W-1:0]       elem_pop_o
);
  localparam int unsigned QPP = W / N;
  localparam int unsigned SW  = (QPP > 1) ? $clog2(QPP) : 1;

  logic  [N-1:0][SW-1:0] sel_q;
  logic  [W-1:0]         full, empty;
  elem_t [W-1:0]         head;

  assign elem_ready_o = ~full;

  // valid/data and the pop are computed in separate blocks so that valid never depends on
  // ready, also not in the simulator's view of the logic
  always_comb
    for (int p = 0; p < N; p++) begin
      out_valid_o[p] = !empty[p + N*int'(sel_q[p])];
      out_data_o[p]  = head[p + N*int'(sel_q[p])];
    end

  always_comb begin
    elem_pop_o = '0;
    for (int p = 0; p < N; p++)
      elem_pop_o[p + N*int'(sel_q[p])] = !empty[p + N*int'(sel_q[p])] && out_ready_i[p];
  end

  for (genvar s = 0; s < W; s++) begin : g_q
    sync_fifo #(.WIDTH(ELEM_W), .DEPTH(Q_DEPTH)) i_elem_q (
      .clk_i, .rst_ni,
      .push_i (elem_push_i[s]), .data_i(elem_i[s]), .full_o(full[s]),
      .pop_i  (elem_pop_o[s]),  .data_o(head[s]),   .empty_o(empty[s]), .usage_o()
    );
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) sel_q <= '0;
    else for (int p = 0; p < N; p++)
      if (out_valid_o[p] && out_ready_i[p])
        sel_q[p] <= (QPP > 1) ? SW'((int'(sel_q[p]) + 1) % QPP) : '0;
  end
endmodule
