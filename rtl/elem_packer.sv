// elem_packer: element packer of the indirect stream unit.
//
// For each burst it receives the element count (cmd) and then consumes the returned 64-bit
// elements group by group: group g carries elements N*g .. N*g+N-1 on lanes 0..N-1 (fewer
// in the last group). A group is taken when all its lanes are valid. Element j is placed
// in 64-bit slot j mod 8 of beat j/8; a beat is sent when its eight slots are filled or
// the burst ends, in which case the remaining slots are zero and last is set. This dense
// packing is what AXI-Pack puts on the 512-bit bus.
//
// Interface: cmd (num, valid/ready), N element lanes (data/valid/ready), packed read
// beat r_o (data, last) with valid/ready.
// Timing: with N = 8 one full beat per cycle; the beat register adds one cycle.
// Packing follows AXI-Pack as the paper describes it; the lane grouping is this design's.
// N must divide 8.
module elem_packer
  import isu_pkg::*;
#(
  parameter int unsigned N = 8
) (
  input  logic              clk_i,
  input  logic              rst_ni,
  input  logic [NUM_W-1:0]  cmd_num_i,
  input  logic              cmd_valid_i,
  output logic              cmd_ready_o,
  input  elem_t [N-1:0]     elem_i,
  input  logic  [N-1:0]     elem_valid_i,
  output logic  [N-1:0]     elem_ready_o,
  output pk_r_t             r_o,
  output logic              r_valid_o,
  input  logic              r_ready_i
);
  localparam int unsigned SLW = $clog2(EPB);

  logic             active_q;
  logic [NUM_W-1:0] rem_q;
  logic [SLW-1:0]   slot_q;
  elem_t [EPB-1:0]  acc_q;
  pk_r_t            out_q;
  logic             out_valid_q;

  logic [NUM_W-1:0] n_grp;
  logic [N-1:0]     need;
  logic             take, last_grp, beat_full;

  assign n_grp = (rem_q < NUM_W'(N)) ? rem_q : NUM_W'(N);
  always_comb
    for (int k = 0; k < N; k++) need[k] = NUM_W'(k) < n_grp;

  assign cmd_ready_o = !active_q;
  assign take        = active_q && ((need & ~elem_valid_i) == '0) && (!out_valid_q || r_ready_i);
  assign elem_ready_o = take ? need : '0;
  assign last_grp    = (rem_q == n_grp);
  assign beat_full   = (32'(slot_q) + N >= EPB);

  elem_t [EPB-1:0] beat;
  always_comb begin
    beat = acc_q;
    for (int k = 0; k < N; k++)
      if (need[k]) beat[int'(slot_q) + k] = elem_i[k];
  end

  assign r_o       = out_q;
  assign r_valid_o = out_valid_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      active_q    <= 1'b0;
      rem_q       <= '0;
      slot_q      <= '0;
      acc_q       <= '0;
      out_q       <= '0;
      out_valid_q <= 1'b0;
    end else begin
      if (out_valid_q && r_ready_i) out_valid_q <= 1'b0;
      if (!active_q) begin
        if (cmd_valid_i) begin
          active_q <= 1'b1;
          rem_q    <= cmd_num_i;
          slot_q   <= '0;
          acc_q    <= '0;
        end
      end else if (take) begin
        rem_q <= rem_q - n_grp;
        if (beat_full || last_grp) begin
          out_q.data  <= beat;
          out_q.last  <= last_grp;
          out_valid_q <= 1'b1;
          acc_q       <= '0;
          slot_q      <= '0;
        end else begin
          acc_q  <= beat;
          slot_q <= slot_q + SLW'(N);
        end
        if (last_grp) active_q <= 1'b0;
      end
    end
  end

  initial assert (EPB % N == 0) else $error("elem_packer: N must divide 8");
endmodule
