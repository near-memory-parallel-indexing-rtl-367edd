// tb_index_splitter: pushes random 512-bit blocks into the splitter (N = 4, IDX_DEPTH = 4)
// and pops them at random; checks that segment k of the head is bits [128k +: 128] of the
// oldest block, that seg_valid and ready follow the fill level, and that no block is lost.
module tb_index_splitter;
  import isu_pkg::*;
  localparam int unsigned N = 4, D = 4;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  wide_t din; logic v, rdy, sv, pop;
  logic [N-1:0][WIDE_W/N-1:0] seg;
  index_splitter #(.N(N), .IDX_DEPTH(D)) dut (.clk_i(clk), .rst_ni(rst_n), .data_i(din), .valid_i(v),
    .ready_o(rdy), .seg_o(seg), .seg_valid_o(sv), .pop_i(pop));
  int checks = 0, failures = 0;
  task automatic chk(bit c, string s);
    checks++; if (!c) begin failures++; if (failures < 10) $display("ERROR %s", s); end
  endtask
  wide_t m[$];
  initial begin
    v = 0; pop = 0; din = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      chk(sv == (m.size() > 0), "seg_valid");
      chk(rdy == (m.size() < D), "ready");
      if (m.size() > 0)
        for (int k = 0; k < N; k++) chk(seg[k] == m[0][k*128 +: 128], "segment content");
      v = (i % 400 < 200) ? ($urandom % 4 != 0) : ($urandom % 4 == 0);
      for (int w = 0; w < 16; w++) din[32*w +: 32] = $urandom;
      pop = (m.size() > 0) && ($urandom % 2 == 0);
      @(posedge clk);
      if (pop) void'(m.pop_front());
      if (v && rdy) m.push_back(din);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
