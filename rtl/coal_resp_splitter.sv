// coal_resp_splitter: response splitter of the request coalescer.
//
// Each wide read response belongs to the oldest entry of the meta data queues. Its hitmap
// names the window slots that asked for an element of this block and the offsets queues
// give each slot's 64-bit word inside the block. All those elements are extracted in
// parallel and pushed into the slots' element queues; the hitmap and offsets are popped
// at the same time. A response is taken only when every named element queue has room
// (with the regulator's credits this always holds; the check keeps the block safe alone).
//
// Interface: r (data valid/ready), meta head (hm_i, hm_valid_i, offs_i) and meta_pop_o,
// element queue side (elem_o, elem_push_o, elem_ready_i per slot).
// Timing: combinational, one response per cycle.
// Follows the paper's description of the return path.
module coal_resp_splitter
  import isu_pkg::*;
#(
  parameter int unsigned W = 256
) (
  input  wide_t          r_data_i,
  input  logic           r_valid_i,
  output logic           r_ready_o,
  input  logic [W-1:0]   hm_i,
  input  logic           hm_valid_i,
  input  off_t [W-1:0]   offs_i,
  output logic           meta_pop_o,
  output elem_t [W-1:0]  elem_o,
  output logic  [W-1:0]  elem_push_o,
  input  logic  [W-1:0]  elem_ready_i
);
  assign r_ready_o  = hm_valid_i && ((hm_i & ~elem_ready_i) == '0);
  assign meta_pop_o = r_valid_i && r_ready_o;

  always_comb
    for (int s = 0; s < W; s++) begin
      elem_o[s]      = r_data_i[int'(offs_i[s])*ELEM_W +: ELEM_W];
      elem_push_o[s] = meta_pop_o && hm_i[s];
    end
endmodule
