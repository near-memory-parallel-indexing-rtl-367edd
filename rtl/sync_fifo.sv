// sync_fifo: show-ahead synchronous FIFO used for every queue of the indirect stream unit
// (index queues, upsizer and element queues, hitmap and offsets queues, command queues).
//
// Entries live in a register array addressed by a read and a write pointer; the head is
// always visible on data_o while empty_o is low. Pushing into a full FIFO or popping an
// empty one is an error (asserted). A push and a pop may happen in the same cycle.
// usage_o is the current fill level, which the index fetcher uses to avoid overflow.
// The paper maps the deep index and hitmap queues onto dual-port SRAM macros; here they are
// plain arrays, which a synthesis flow may map onto such macros. Reset empties the FIFO.
module sync_fifo #(
  parameter int unsigned WIDTH = 8,
  parameter int unsigned DEPTH = 2
) (
  input  logic                       clk_i,
  input  logic                       rst_ni,
  input  logic                       push_i,
  input  logic [WIDTH-1:0]           data_i,
  output logic                       full_o,
  input  logic                       pop_i,
  output logic [WIDTH-1:0]           data_o,
  output logic                       empty_o,
  output logic [$clog2(DEPTH+1)-1:0] usage_o
);
  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int unsigned CW = $clog2(DEPTH+1);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [PW-1:0]    rptr_q, wptr_q;
  logic [CW-1:0]    cnt_q;

  assign full_o  = (cnt_q == CW'(DEPTH));
  assign empty_o = (cnt_q == '0);
  assign usage_o = cnt_q;
  assign data_o  = mem[rptr_q];

  function automatic logic [PW-1:0] incr(logic [PW-1:0] p);
    return (p == PW'(DEPTH-1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk_i) begin
    if (push_i) mem[wptr_q] <= data_i;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rptr_q <= '0;
      wptr_q <= '0;
      cnt_q  <= '0;
    end else begin
      if (push_i) wptr_q <= incr(wptr_q);
      if (pop_i)  rptr_q <= incr(rptr_q);
      cnt_q <= cnt_q + CW'(push_i) - CW'(pop_i);
    end
  end

  a_no_overflow:  assert property (@(posedge clk_i) disable iff (!rst_ni) !(push_i && full_o && !pop_i))
    else $error("sync_fifo: push into full FIFO");
  a_no_underflow: assert property (@(posedge clk_i) disable iff (!rst_ni) !(pop_i && empty_o))
    else $error("sync_fifo: pop from empty FIFO");
endmodule
