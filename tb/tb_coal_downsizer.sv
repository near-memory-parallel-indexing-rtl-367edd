// tb_coal_downsizer: N = 2, W = 8, Q_DEPTH = 2. Port p's i-th element belongs in slot
// p + N*(i mod W/N), as the upsizer placed the request. The stimulus fills the slots in a
// random order (any slot with room whose next element exists), i.e. out of request order,
// and the ports are drained with random ready. Each port must return 0,1,2,... of its own
// stream in order, and elem_pop_o must name exactly the slot that was read.
module tb_coal_downsizer;
  import isu_pkg::*;
  localparam int unsigned N = 2, W = 8, QPP = W / N, TOT = 400;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  elem_t [W-1:0] ein; logic [W-1:0] epush, eready, epop;
  elem_t [N-1:0] od; logic [N-1:0] ov, ordy;
  coal_downsizer #(.N(N), .W(W), .Q_DEPTH(2)) dut (.clk_i(clk), .rst_ni(rst_n), .elem_i(ein),
    .elem_push_i(epush), .elem_ready_o(eready), .out_data_o(od), .out_valid_o(ov),
    .out_ready_i(ordy), .elem_pop_o(epop));
  int checks = 0, failures = 0;
  task automatic chk(bit c, string s);
    checks++; if (!c) begin failures++; if (failures < 10) $display("ERROR %s", s); end
  endtask
  int nxt_in[W];   // next element index of the slot's port to push
  int nxt_out[N];
  function automatic elem_t val(int p, int i); return {32'(p), 32'(i)} ^ 64'hA5A5_0000_0000_0000; endfunction
  initial begin
    epush = 0; ein = '0; ordy = 0;
    for (int s = 0; s < W; s++) nxt_in[s] = s / N;
    for (int p = 0; p < N; p++) nxt_out[p] = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int c = 0; c < 20000; c++) begin
      bit done;
      @(negedge clk);
      epush = 0;
      for (int s = 0; s < W; s++)
        if (eready[s] && nxt_in[s] < TOT && $urandom % 3 == 0) begin
          epush[s] = 1; ein[s] = val(s % N, nxt_in[s]); nxt_in[s] += QPP;
        end
      ordy = N'($urandom);
      #0.1;
      begin
        logic [W-1:0] e_pop; e_pop = 0;
        for (int p = 0; p < N; p++) if (ov[p] && ordy[p]) begin
          chk(od[p] == val(p, nxt_out[p]), $sformatf("port %0d element %0d", p, nxt_out[p]));
          e_pop[p + N * (nxt_out[p] % QPP)] = 1;
          nxt_out[p]++;
        end
        chk(epop == e_pop, "elem_pop");
      end
      done = 1;
      for (int p = 0; p < N; p++) if (nxt_out[p] < TOT) done = 0;
      if (done) break;
    end
    for (int p = 0; p < N; p++) chk(nxt_out[p] == TOT, "all elements returned");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish;
  end
endmodule
