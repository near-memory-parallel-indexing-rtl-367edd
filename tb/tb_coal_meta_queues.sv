// tb_coal_meta_queues: W = 8, HM_DEPTH = 4, OFS_DEPTH = 2 (small so both limits are hit).
// Random pushes of random hitmaps/offsets and random pops, driven on the falling edge
// whenever the DUT allows them. A reference model keeps the list of pushed entries; at
// every cycle the head hitmap, the head offsets of its set slots, hm_valid_o and
// push_ready_o (room in the hitmap queue and in every offsets queue) are compared to it.
module tb_coal_meta_queues;
  import isu_pkg::*;
  localparam int unsigned W = 8, HD = 4, OD = 2;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic push, pop, pready, hvalid;
  logic [W-1:0] hin, hout; off_t [W-1:0] oin, oout;
  coal_meta_queues #(.W(W), .HM_DEPTH(HD), .OFS_DEPTH(OD)) dut (.clk_i(clk), .rst_ni(rst_n),
    .push_i(push), .hitmap_i(hin), .offs_i(oin), .push_ready_o(pready), .hm_o(hout),
    .hm_valid_o(hvalid), .offs_o(oout), .pop_i(pop));
  int checks = 0, failures = 0;
  task automatic chk(bit c, string s);
    checks++; if (!c) begin failures++; if (failures < 10) $display("ERROR %s", s); end
  endtask
  typedef struct { logic [W-1:0] hm; off_t [W-1:0] o; } ent_t;
  ent_t q[$];
  int cnt[W];
  int n_full = 0, n_ofull = 0;
  initial begin
    push = 0; pop = 0; hin = 0; oin = 0;
    foreach (cnt[s]) cnt[s] = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int c = 0; c < 20000; c++) begin
      @(negedge clk);
      begin
        bit e_ready;
        e_ready = q.size() < HD;
        for (int s = 0; s < W; s++) if (cnt[s] >= OD) e_ready = 0;
        if (q.size() == HD) n_full++; else if (!e_ready) n_ofull++;
        chk(pready == e_ready, "push_ready");
        chk(hvalid == (q.size() > 0), "hm_valid");
        if (q.size() > 0) begin
          chk(hout == q[0].hm, "head hitmap");
          for (int s = 0; s < W; s++) if (q[0].hm[s]) chk(oout[s] == q[0].o[s], "head offset");
        end
      end
      hin = W'($urandom); oin = (W*OFF_W)'({$urandom, $urandom});
      if (c % 2000 < 1000) hin = hin & W'($urandom);  // sparse phases fill the hitmap queue
      push = pready && ($urandom % 2);
      pop  = hvalid && ($urandom % 3 == 0 || c % 4000 >= 3000);
      @(posedge clk);
      if (pop) begin
        for (int s = 0; s < W; s++) if (q[0].hm[s]) cnt[s]--;
        void'(q.pop_front());
      end
      if (push) begin
        ent_t e; e.hm = hin; e.o = oin; q.push_back(e);
        for (int s = 0; s < W; s++) if (hin[s]) cnt[s]++;
      end
    end
    chk(n_full > 0 && n_ofull > 0, $sformatf("both limits reached (%0d %0d)", n_full, n_ofull));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
