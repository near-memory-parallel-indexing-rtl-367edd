// dram_model: behavioural model of a DRAM channel controller with a 512-bit AXI4 read port
// (not synthesizable; testbench only).
//
// Read bursts are accepted into a queue of MAX_OUT entries and answered in order after a
// fixed latency of LAT cycles, one 512-bit beat per cycle, with the contents given by
// tb_mem_pkg::block_at. With STALL set, ar_ready and r_valid are withheld at random (one
// cycle in four) to exercise back-pressure. Beats and bursts are counted for bandwidth
// figures.
module dram_model
  import isu_pkg::*;
#(
  parameter int unsigned LAT     = 20,
  parameter int unsigned MAX_OUT = 64,
  parameter bit          STALL   = 1'b0
) (
  input  logic  clk_i,
  input  logic  rst_ni,
  input  ar_t   ar_i,
  input  logic  ar_valid_i,
  output logic  ar_ready_o,
  output r_t    r_o,
  output logic  r_valid_o,
  input  logic  r_ready_i
);
  typedef struct { ar_t ar; longint t; } pend_t;
  pend_t q[$];
  longint cyc = 0;
  int unsigned beat = 0;
  longint n_beats = 0, n_bursts = 0;
  bit ar_gate = 1'b1, r_gate = 1'b1;

  assign ar_ready_o = (q.size() < MAX_OUT) && ar_gate;

  always_comb begin
    r_valid_o = 1'b0;
    r_o       = '0;
    if (q.size() > 0 && q[0].t <= cyc && r_gate) begin
      r_valid_o = 1'b1;
      r_o.id    = q[0].ar.id;
      r_o.data  = tb_mem_pkg::block_at(q[0].ar.addr + 48'(64 * beat));
      r_o.last  = (beat == int'(q[0].ar.len));
    end
  end

  always_ff @(posedge clk_i) begin
    cyc <= cyc + 1;
    if (!rst_ni) begin
      q.delete();
      beat <= 0;
    end else begin
      if (r_valid_o && r_ready_i) begin
        n_beats <= n_beats + 1;
        if (r_o.last) begin
          void'(q.pop_front());
          beat <= 0;
        end else beat <= beat + 1;
      end
      if (ar_valid_i && ar_ready_o) begin
        q.push_back('{ar: ar_i, t: cyc + LAT});
        n_bursts <= n_bursts + 1;
      end
      ar_gate <= STALL ? (($urandom % 4) != 0) : 1'b1;
      r_gate  <= STALL ? (($urandom % 4) != 0) : 1'b1;
    end
  end
endmodule
