// axi_rd_mux: joins the two read managers of the indirect stream unit, the index fetcher
// (port 0) and the request coalescer (port 1), onto the single AXI4 read port of the DRAM
// controller.
//
// Address requests are arbitrated round-robin; once a request is shown downstream it is
// held until accepted. The port number becomes the AXI ID, and read data is routed back by
// ID. Since AXI4 keeps responses of one ID in order, each manager sees its data in order.
//
// Interface: two AR inputs and R outputs (valid/ready), one AR output and R input.
// Timing: combinational in both directions; the arbiter's pointer is the only state.
// The paper shows both units driving the DRAM port; arbitration and ID use are this
// design's choices.
module axi_rd_mux
  import isu_pkg::*;
(
  input  logic          clk_i,
  input  logic          rst_ni,
  input  ar_t  [1:0]    ar_i,
  input  logic [1:0]    ar_valid_i,
  output logic [1:0]    ar_ready_o,
  output ar_t           ar_o,
  output logic          ar_valid_o,
  input  logic          ar_ready_i,
  input  r_t            r_i,
  input  logic          r_valid_i,
  output logic          r_ready_o,
  output r_t   [1:0]    r_o,
  output logic [1:0]    r_valid_o,
  input  logic [1:0]    r_ready_i
);
  logic prio_q;     // port preferred when both request
  logic lock_q;     // a request is shown and not yet accepted
  logic sel_q, sel;

  always_comb begin
    if (lock_q)                          sel = sel_q;
    else if (ar_valid_i[0] && ar_valid_i[1]) sel = prio_q;
    else                                 sel = ar_valid_i[1];
  end

  always_comb begin
    ar_o       = ar_i[sel];
    ar_o.id    = ID_W'(sel);
    ar_valid_o = ar_valid_i[sel];
    ar_ready_o = '0;
    ar_ready_o[sel] = ar_ready_i;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      prio_q <= 1'b0;
      lock_q <= 1'b0;
      sel_q  <= 1'b0;
    end else begin
      if (ar_valid_o && ar_ready_i) begin
        prio_q <= !sel;
        lock_q <= 1'b0;
      end else if (ar_valid_o) begin
        lock_q <= 1'b1;
        sel_q  <= sel;
      end
    end
  end

  always_comb begin
    r_o       = {r_i, r_i};
    r_valid_o = '0;
    r_valid_o[r_i.id] = r_valid_i;
    r_ready_o = r_ready_i[r_i.id];
  end
endmodule
