// tb_elem_req_gen: feeds the element request generator (N = 8) with commands and with the
// index blocks an index fetcher would have read (from the memory contents function), and
// accepts the request lanes at random. Checks that lane k carries requests j = k, k+N, ...
// with address elem_base + 8*idx[j], for 8/16/32/64-bit indices and unaligned starts, that
// every index block is popped exactly once, that the element count goes to the packer, and
// that with all lanes ready an aligned burst of 32-bit indices runs at N requests per cycle.
module tb_elem_req_gen;
  import isu_pkg::*;
  import tb_mem_pkg::*;
  localparam int unsigned N = 8;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  erg_cmd_t cmd; logic cv, cr;
  logic [N-1:0][WIDE_W/N-1:0] seg; logic sv, pop;
  addr_t [N-1:0] addr; logic [N-1:0] v, r;
  logic [NUM_W-1:0] pk; logic pv, pr;
  elem_req_gen #(.N(N)) dut (.clk_i(clk), .rst_ni(rst_n), .cmd_i(cmd), .cmd_valid_i(cv), .cmd_ready_o(cr),
    .seg_i(seg), .seg_valid_i(sv), .beat_pop_o(pop), .req_addr_o(addr), .req_valid_o(v), .req_ready_i(r),
    .pk_num_o(pk), .pk_valid_o(pv), .pk_ready_i(pr));
  int checks = 0, failures = 0;
  task automatic chk(bit c, string s);
    checks++; if (!c) begin failures++; if (failures < 10) $display("ERROR %s", s); end
  endtask
  wide_t blk_q[$];
  addr_t exp_lane[N][$];
  int unsigned exp_pk[$];
  bit all_ready = 0;
  longint cyc = 0, n_fire = 0;
  always @(posedge clk) cyc <= cyc + 1;
  always @(negedge clk) begin
    sv  = blk_q.size() > 0;
    seg = sv ? blk_q[0] : '0;
  end
  always @(posedge clk) if (rst_n) begin
    r  <= all_ready ? '1 : N'($urandom);
    pr <= all_ready ? 1'b1 : ($urandom % 2 == 0);
    if (pop) begin chk(blk_q.size() > 0, "pop without block"); if (blk_q.size() > 0) void'(blk_q.pop_front()); end
    for (int k = 0; k < N; k++) if (v[k] && r[k]) begin
      n_fire++;
      chk(exp_lane[k].size() > 0 && addr[k] == exp_lane[k][0], $sformatf("lane %0d address %h exp %h", k, addr[k], exp_lane[k][0]));
      if (exp_lane[k].size() > 0) void'(exp_lane[k].pop_front());
    end
    if (pv && pr) begin
      chk(exp_pk.size() > 0 && pk == exp_pk[0], "packer count");
      if (exp_pk.size() > 0) void'(exp_pk.pop_front());
    end
  end
  task automatic burst(logic [47:0] ib, logic [47:0] eb, int unsigned num, idx_size_e sz);
    logic [47:0] last;
    last = ib + 48'(num << sz) - 1;
    for (logic [47:0] b = {ib[47:6], 6'b0}; b <= last; b += 64) blk_q.push_back(block_at(b));
    for (int unsigned j = 0; j < num; j++) exp_lane[j % N].push_back(eb + 48'(idx_at(ib, j, int'(sz)) << 3));
    exp_pk.push_back(num);
    @(negedge clk);
    cmd.elem_base = eb; cmd.num = num; cmd.idx_size = sz; cmd.start_pos = POS_W'(ib[5:0] >> sz);
    cv = 1;
    while (!(cr && pr)) @(negedge clk);
    @(negedge clk); cv = 0;
    while (blk_q.size() != 0) @(negedge clk);
  endtask
  longint t0, f0;
  initial begin
    cv = 0; cmd = '0; r = 0; pr = 0;
    idx_range = 1 << 16;
    repeat (3) @(negedge clk); rst_n = 1;
    burst(48'h1004, 48'h4000_0000, 100, IDX32);
    burst(48'h2001, 48'h4000_0000, 75, IDX8);
    burst(48'h3012, 48'h4000_0000, 41, IDX16);
    burst(48'h4008, 48'h4000_0000, 30, IDX64);
    burst(48'h5000, 48'h4000_0000, 3, IDX32);
    for (int i = 0; i < 10; i++) begin
      idx_size_e sz;
      sz = idx_size_e'($urandom % 4);
      // index arrays are naturally aligned
      burst((48'h8000 + 48'($urandom % 2048)) & ~((48'd1 << sz) - 1), 48'h5000_0000, 1 + $urandom % 150, sz);
    end
    // rate: aligned 32-bit burst, all lanes ready
    all_ready = 1;
    repeat (3) @(negedge clk);
    t0 = cyc; f0 = n_fire;
    burst(48'h9000, 48'h6000_0000, 256, IDX32);
    repeat (3) @(negedge clk);
    $display("256 requests in %0d cycles", cyc - t0);
    chk(n_fire - f0 == 256, "request count");
    chk(cyc - t0 <= 256 / N + 8, "rate of N requests per cycle");
    for (int k = 0; k < N; k++) chk(exp_lane[k].size() == 0, "missing requests");
    chk(exp_pk.size() == 0, "missing packer counts");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
