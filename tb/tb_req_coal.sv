// tb_req_coal: request coalescer with N = 4 ports, W = 16 slots and short timeouts, against
// the behavioural DRAM model (random AR/R stalls). Each port sends 600 element addresses
// (64-bit aligned) drawn from a small region in phases of high and low locality, with
// random gaps; outputs are drained with random ready. Every port must get elem_at(addr)
// for its requests, in its own request order. The run must show full and partial window
// loads, issues forced by misses and by the watchdog, and fewer DRAM beats than requests.
module tb_req_coal;
  import isu_pkg::*;
  timeunit 1ns; timeprecision 1ps;
  localparam int unsigned N = 4, W = 16, NR = 600;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  addr_t [N-1:0] ra; logic [N-1:0] rv, rr;
  ar_t ar; logic arv, arr; r_t r; logic rvld, rrdy;
  elem_t [N-1:0] eo; logic [N-1:0] ev, er;
  logic evl, evp, evi, evw; logic [$clog2(W+1)-1:0] evm;
  req_coal #(.N(N), .W(W), .Q_DEPTH(2), .HM_DEPTH(8), .OFS_DEPTH(4), .REG_TIMEOUT(6),
             .WD_TIMEOUT(6)) dut (
    .clk_i(clk), .rst_ni(rst_n), .req_addr_i(ra), .req_valid_i(rv), .req_ready_o(rr),
    .ar_o(ar), .ar_valid_o(arv), .ar_ready_i(arr), .r_i(r), .r_valid_i(rvld), .r_ready_o(rrdy),
    .elem_o(eo), .elem_valid_o(ev), .elem_ready_i(er), .ev_win_load_o(evl),
    .ev_win_partial_o(evp), .ev_issue_o(evi), .ev_wd_issue_o(evw), .ev_merged_o(evm));
  dram_model #(.LAT(12), .MAX_OUT(16), .STALL(1'b1)) i_mem (.clk_i(clk), .rst_ni(rst_n),
    .ar_i(ar), .ar_valid_i(arv), .ar_ready_o(arr), .r_o(r), .r_valid_o(rvld), .r_ready_i(rrdy));
  int checks = 0, failures = 0;
  task automatic chk(bit c, string s);
    checks++; if (!c) begin failures++; if (failures < 10) $display("ERROR %s", s); end
  endtask
  addr_t exp_q[N][$];
  int n_out[N];
  int n_full = 0, n_part = 0, n_miss = 0, n_wd = 0, n_merged = 0;
  always @(posedge clk) if (rst_n) begin
    if (evl && !evp) n_full++;
    if (evp) n_part++;
    if (evi && !evw) n_miss++;
    if (evw) n_wd++;
    n_merged += int'(evm);
  end
  for (genvar p = 0; p < N; p++) begin : g_port
    initial begin
      rv[p] = 0; ra[p] = '0;
      wait (rst_n);
      for (int i = 0; i < NR; i++) begin
        addr_t a;
        // phases: 8 blocks (high locality), 256 blocks (low), and pauses that leave
        // windows partly filled
        if ((i / 100) % 2 == 0) a = 48'h4000 + 48'(($urandom % 64) * 8);
        else                    a = 48'h8000 + 48'(($urandom % 2048) * 8);
        @(negedge clk);
        if (i % 150 == 149) repeat (40) @(negedge clk);
        else while ($urandom % 4 == 0) @(negedge clk);
        rv[p] = 1; ra[p] = a;
        @(posedge clk); while (!rr[p]) @(posedge clk);
        exp_q[p].push_back(a);
        @(negedge clk); rv[p] = 0;
      end
    end
    always @(negedge clk) er[p] = $urandom % 4 != 0;
    always @(posedge clk) if (rst_n && ev[p] && er[p]) begin
      if (exp_q[p].size() == 0) chk(0, "element without request");
      else begin
        addr_t a; a = exp_q[p].pop_front();
        chk(eo[p] == tb_mem_pkg::elem_at(a), $sformatf("port %0d element %0d addr %h", p, n_out[p], a));
      end
      n_out[p]++;
    end
  end
  initial begin
    bit done;
    foreach (n_out[p]) n_out[p] = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    do begin
      repeat (100) @(negedge clk);
      done = 1;
      for (int p = 0; p < N; p++) if (n_out[p] < NR) done = 0;
    end while (!done);
    repeat (50) @(negedge clk);
    for (int p = 0; p < N; p++) chk(n_out[p] == NR, "all elements returned");
    $display("full=%0d partial=%0d miss=%0d wd=%0d merged=%0d beats=%0d requests=%0d",
             n_full, n_part, n_miss, n_wd, n_merged, i_mem.n_beats, N * NR);
    chk(n_full > 0, "full windows");
    chk(n_part > 0, "partial windows");
    chk(n_miss > 0, "issues by miss");
    chk(n_wd > 0, "issues by watchdog");
    chk(n_merged == N * NR, "every request merged once");
    chk(i_mem.n_beats < N * NR, "coalescing reduces DRAM beats");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #2000000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish;
  end
endmodule
