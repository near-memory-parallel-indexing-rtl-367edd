// tb_coal_upsizer: N = 2 ports, W = 8 queues. Requests carry their running number per port;
// checks that port p's i-th request lands in queue p + N*(i mod W/N) in order, that a
// port stalls when its next queue is full, and that heads leave on pop.
module tb_coal_upsizer;
  import isu_pkg::*;
  localparam int unsigned N = 2, W = 8;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  addr_t [N-1:0] a; logic [N-1:0] v, r;
  addr_t [W-1:0] ha; logic [W-1:0] hv, pop; logic anyp;
  coal_upsizer #(.N(N), .W(W), .Q_DEPTH(2)) dut (.clk_i(clk), .rst_ni(rst_n), .in_addr_i(a), .in_valid_i(v),
    .in_ready_o(r), .head_addr_o(ha), .head_valid_o(hv), .pop_i(pop), .any_push_o(anyp));
  int checks = 0, failures = 0;
  task automatic chk(bit c, string s);
    checks++; if (!c) begin failures++; if (failures < 10) $display("ERROR %s", s); end
  endtask
  addr_t m[W][$];
  int cnt[N] = '{0, 0};
  int stalls = 0;
  always @(posedge clk) if (rst_n) chk(anyp == |(v & r), "any_push");
  initial begin
    v = 0; a = '0; pop = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      for (int s = 0; s < W; s++) begin
        chk(hv[s] == (m[s].size() > 0), "head valid");
        if (m[s].size() > 0) chk(ha[s] == m[s][0], "head address");
      end
      for (int p = 0; p < N; p++) begin
        int q;
        q = p + N * (cnt[p] % (W / N));
        chk(r[p] == (m[q].size() < 2), "port ready");
        v[p] = ($urandom % 3 != 0);
        a[p] = {16'(p), 32'(cnt[p])};
        if (v[p] && !r[p]) stalls++;
      end
      for (int s = 0; s < W; s++) pop[s] = (m[s].size() > 0) && hv[s] && ($urandom % 3 == 0);
      @(posedge clk);
      for (int s = 0; s < W; s++) if (pop[s]) void'(m[s].pop_front());
      for (int p = 0; p < N; p++) if (v[p] && r[p]) begin
        m[p + N * (cnt[p] % (W / N))].push_back(a[p]);
        cnt[p]++;
      end
    end
    chk(stalls > 0, "a port stalled");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
