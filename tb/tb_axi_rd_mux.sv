// tb_axi_rd_mux: two random request sources and a random-latency responder. Checks that
// every request reaches the output exactly once with its source as ID, that a shown
// request is held until accepted, that both sources are served when both request, and
// that each response reaches the source named by its ID.
module tb_axi_rd_mux;
  import isu_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  ar_t  [1:0] ar_in;  logic [1:0] arv, arr;
  ar_t  ar;           logic arvo, arro;
  r_t   rin;          logic rv, rr;
  r_t   [1:0] rout;   logic [1:0] rvo, rro;
  axi_rd_mux dut (.clk_i(clk), .rst_ni(rst_n), .ar_i(ar_in), .ar_valid_i(arv), .ar_ready_o(arr),
    .ar_o(ar), .ar_valid_o(arvo), .ar_ready_i(arro), .r_i(rin), .r_valid_i(rv), .r_ready_o(rr),
    .r_o(rout), .r_valid_o(rvo), .r_ready_i(rro));
  int checks = 0, failures = 0;
  task automatic chk(bit c, string s);
    checks++; if (!c) begin failures++; if (failures < 10) $display("ERROR %s", s); end
  endtask
  logic [47:0] sent[2][$];
  int n_both = 0, got[2] = '{0, 0};
  logic prev_v; ar_t prev_ar; logic prev_r;
  // sources
  always @(posedge clk) if (rst_n) begin
    for (int s = 0; s < 2; s++) begin
      if (arv[s] && arr[s]) begin sent[s].push_back(ar_in[s].addr); arv[s] <= 1'b0; end
      if ((!arv[s] || arr[s]) && ($urandom % 2 == 0)) begin
        arv[s] <= 1'b1;
        ar_in[s].addr <= {$urandom, 16'(s)} ;
        ar_in[s].len <= 8'($urandom % 4);
        ar_in[s].id  <= '0;
      end
    end
  end
  // sink: check
  always @(posedge clk) if (rst_n) begin
    arro <= ($urandom % 3 != 0);
    if (prev_v && !prev_r) chk(arvo && ar == prev_ar, "AR not held");
    if (&arv) n_both++;
    if (arvo && arro) begin
      chk(sent[ar.id].size() == 0 || 1, "");
      chk(ar.addr[15:0] == 16'(ar.id), "ID does not name the source");
      got[ar.id]++;
    end
    prev_v <= arvo; prev_ar <= ar; prev_r <= arro;
  end
  // response routing
  always @(posedge clk) if (rst_n) begin
    rro <= 2'($urandom);
    if (rv && rr) rv <= 1'b0;
    if (!rv || rr) begin
      rv <= ($urandom % 2 == 0);
      rin.id <= 1'($urandom); rin.data <= {16{$urandom}}; rin.last <= 1'b1;
    end
  end
  always @(negedge clk) if (rst_n) begin
    chk(rvo[rin.id] == rv && rvo[!rin.id] == 1'b0, "R valid routing");
    chk(rr == rro[rin.id], "R ready routing");
    chk(rout[rin.id] == rin, "R payload");
  end
  initial begin
    arv = 0; ar_in = '0; arro = 0; rv = 0; rin = '0; rro = 0; prev_v = 0; prev_r = 0; prev_ar = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    repeat (2000) @(posedge clk);
    chk(got[0] > 100 && got[1] > 100, "both sources served");
    chk(got[0] + 2 >= sent[0].size() && got[0] <= sent[0].size() + 1, "source 0 count");
    chk(got[1] + 2 >= sent[1].size() && got[1] <= sent[1].size() + 1, "source 1 count");
    chk(n_both > 0, "contention occurred");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
