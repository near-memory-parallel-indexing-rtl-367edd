// tb_coal_req_watcher: W = 16, WD_TIMEOUT = 6. The window is the sixteen example requests
// printed in the request watcher figure (9-bit addresses: 3-bit block tag, 3-bit element
// offset, 3 zero bits). Expected: warps are formed for tags 110, 100, 101, 001, 111 in that
// order (the CSHR takes the lowest-numbered remaining request's tag), each warp holds
// exactly the requests of its tag with their offsets, the first four are issued because
// misses remain and the last by the watchdog WD_TIMEOUT cycles after the window empties.
// The AR port stalls at random and must hold its request. A second window then repeats a
// slot of the open warp's block: that request must start a new warp, not re-use the slot.
// Last, 300 random windows over four blocks: every warp must hold exactly the requests
// accepted since the previous issue, all of its block, each slot once, with its offset.
module tb_coal_req_watcher;
  import isu_pkg::*;
  localparam int unsigned W = 16, WD = 6;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic [W-1:0] wv, acc, hm; addr_t [W-1:0] wa; off_t [W-1:0] offs;
  ar_t ar; logic arv, arr, mpush, wdi;
  coal_req_watcher #(.W(W), .WD_TIMEOUT(WD)) dut (.clk_i(clk), .rst_ni(rst_n), .win_valid_i(wv), .win_addr_i(wa),
    .accept_o(acc), .ar_o(ar), .ar_valid_o(arv), .ar_ready_i(arr), .meta_ready_i(1'b1),
    .meta_hitmap_o(hm), .meta_offs_o(offs), .meta_push_o(mpush), .wd_issue_o(wdi));
  int checks = 0, failures = 0;
  task automatic chk(bit c, string s);
    checks++; if (!c) begin failures++; if (failures < 10) $display("ERROR %s", s); end
  endtask
  // figure example, slot 0 first
  logic [8:0] fig [W] = '{9'b110_001_000, 9'b110_011_000, 9'b100_001_000, 9'b101_011_000,
                          9'b001_101_000, 9'b110_101_000, 9'b110_111_000, 9'b110_010_000,
                          9'b111_001_000, 9'b110_101_000, 9'b101_001_000, 9'b110_011_000,
                          9'b110_110_000, 9'b110_001_000, 9'b110_001_000, 9'b110_001_000};
  logic [2:0] exp_tags[$] = '{3'b110, 3'b100, 3'b101, 3'b001, 3'b111};
  int n_issue = 0, n_wd = 0, n_stall = 0;
  longint cyc = 0, t_empty = 0, t_wd = 0;
  logic [W-1:0] seen;
  bit mode3 = 0, mode4 = 0;
  always @(posedge clk) cyc <= cyc + 1;
  always @(posedge clk) if (rst_n) begin
    arr <= ($urandom % 3 != 0);
    if (arv && !arr) n_stall++;
    chk((acc & ~wv) == '0, "accept outside window");
    if (arv && arr && !mode4) begin
      logic [W-1:0] e_hm;
      n_issue++;
      chk(mpush, "meta push with issue");
      chk(ar.len == 0 && ar.addr[5:0] == 0, "single wide beat");
      e_hm = '0;
      for (int s = 0; s < W; s++) if (fig[s][8:6] == ar.addr[8:6] && !seen[s]) e_hm[s] = 1'b1;
      if (exp_tags.size() > 0) begin
        chk(ar.addr[8:6] == exp_tags[0], $sformatf("warp tag %b exp %b", ar.addr[8:6], exp_tags[0]));
        void'(exp_tags.pop_front());
      end
      if (mode3) begin e_hm = 1; if (n_issue == 7) chk(!wdi, "slot reuse issues without watchdog"); end
      chk(hm == e_hm, $sformatf("hitmap of warp %h exp %h tag %b n %0d", hm, e_hm, ar.addr[8:6], n_issue));
      for (int s = 0; s < W; s++) if (hm[s]) chk(offs[s] == fig[s][5:3], "offset");
      seen = seen | hm;
      if (wdi) begin n_wd++; t_wd = cyc; end
    end
    if (acc != 0) wv <= wv & ~acc;
  end
  // random phase: every warp must consist of exactly the requests accepted since the
  // previous issue, all of the issued block, with their own offsets, and no slot twice
  logic [W-1:0] pend_hm = '0;
  addr_t pend_a [W];
  longint n_loaded = 0, n_acc = 0, n_rissue = 0;
  always @(posedge clk) if (rst_n && mode4) begin
    logic [W-1:0] all;
    chk((acc & pend_hm) == 0, "random: slot merged twice into one warp");
    n_acc += $countones(acc);
    all = pend_hm | acc;
    for (int s = 0; s < W; s++) if (acc[s]) pend_a[s] = wa[s];
    if (arv && arr) begin
      n_rissue++;
      chk(hm == all, "random: warp = requests accepted since the last issue");
      chk(all != 0, "random: no empty warp");
      for (int s = 0; s < W; s++) if (all[s]) begin
        chk(pend_a[s][ADDR_W-1:6] == ar.addr[ADDR_W-1:6], "random: request of another block in warp");
        chk(offs[s] == pend_a[s][5:3], "random: offset");
      end
      pend_hm <= '0;
    end else pend_hm <= all;
  end
  always @(posedge clk) if (rst_n && wv != 0 && (wv & ~acc) == 0) t_empty <= cyc + 1;
  initial begin
    wv = 0; wa = '0; seen = 0; arr = 0;
    for (int s = 0; s < W; s++) wa[s] = ADDR_W'(fig[s]);
    repeat (3) @(negedge clk); rst_n = 1;
    @(negedge clk); wv = '1;
    repeat (60) @(negedge clk);
    chk(n_issue == 5, $sformatf("five warps (%0d)", n_issue));
    chk(n_wd == 1, "last warp issued by the watchdog");
    chk(t_wd - t_empty >= WD && t_wd - t_empty <= WD + 3, $sformatf("watchdog delay %0d", t_wd - t_empty));
    chk(seen == '1, "every request merged once");
    // second window: slot 0 and slot 1 hit block 010; slot 0 again holds block 010 later
    seen = 0;
    for (int s = 0; s < W; s++) fig[s] = 9'b010_000_000 | 9'(s % 8) << 3;
    for (int s = 0; s < W; s++) wa[s] = ADDR_W'(fig[s]);
    exp_tags = '{3'b010};
    wv = '1;
    repeat (30) @(negedge clk);
    chk(n_issue == 6 && seen == '1, "one warp for 16 requests of one block");
    wa[0] = ADDR_W'(9'b010_111_000);
    fig[0] = 9'b010_111_000; seen = 0; mode3 = 1;
    wv = 16'h0001;
    @(negedge clk);
    wv = 16'h0001;  // same block, but slot 0 is already taken in the open warp
    repeat (30) @(negedge clk);
    chk(n_issue == 8, $sformatf("reused slot forces a new warp (%0d)", n_issue));
    chk(n_stall > 0, "AR stalled");
    mode4 = 1;
    for (int k = 0; k < 300; k++) begin
      @(negedge clk);
      while (wv != 0) @(negedge clk);
      repeat ($urandom % 3) @(negedge clk);
      for (int s = 0; s < W; s++)
        wa[s] = 48'h1000 + 48'(($urandom % 4) * 64) + 48'(($urandom % 8) * 8);
      wv = W'($urandom) | W'(1 << ($urandom % W));
      n_loaded += $countones(wv);
    end
    repeat (40) @(negedge clk);
    chk(wv == 0 && pend_hm == 0, "random: all requests issued");
    chk(n_acc == n_loaded, $sformatf("random: %0d of %0d requests accepted", n_acc, n_loaded));
    chk(n_rissue > 300, "random: warps issued");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
