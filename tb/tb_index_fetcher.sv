// tb_index_fetcher: sends indirect bursts with various index sizes, start offsets and
// lengths and checks the command to the element request generator and the AR sequence:
// block addresses from the first to the last index block, no burst crossing a 16-block
// boundary, and (with the index queues modelled as IDX_DEPTH = 8 blocks released slowly)
// never more blocks reserved than the queues hold.
module tb_index_fetcher;
  import isu_pkg::*;
  localparam int unsigned DEPTH = 8;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  ind_req_t req; logic rv, rr;
  ar_t ar; logic arv, arr;
  erg_cmd_t cmd; logic cv, cr;
  logic pop;
  index_fetcher #(.IDX_DEPTH(DEPTH), .MAX_BURST(16)) dut (.clk_i(clk), .rst_ni(rst_n),
    .req_i(req), .req_valid_i(rv), .req_ready_o(rr), .ar_o(ar), .ar_valid_o(arv), .ar_ready_i(arr),
    .cmd_o(cmd), .cmd_valid_o(cv), .cmd_ready_i(cr), .beat_pop_i(pop));
  int checks = 0, failures = 0;
  task automatic chk(bit c, string s);
    checks++; if (!c) begin failures++; if (failures < 10) $display("ERROR %s", s); end
  endtask
  logic [41:0] exp_blk[$];
  int held = 0, max_held = 0, n_limit = 0;
  // AR sink and queue model: blocks are released one every 3 cycles
  always @(posedge clk) if (rst_n) begin
    arr <= ($urandom % 3 != 0);
    if (arv && arr) begin
      chk(ar.addr[5:0] == 0, "AR not block aligned");
      chk(int'(ar.addr[9:6]) + int'(ar.len) < 16, "burst crosses 16-block boundary");
      for (int b = 0; b <= int'(ar.len); b++) begin
        chk(exp_blk.size() > 0 && ar.addr[47:6] + 42'(b) == exp_blk[0], "block address");
        if (exp_blk.size() > 0) void'(exp_blk.pop_front());
      end
    end
  end
  int nxt_held;
  always @(posedge clk) if (rst_n) begin
    pop <= 1'b0;
    nxt_held = held + ((arv && arr) ? int'(ar.len) + 1 : 0);
    if (held > 0 && ($urandom % 3 == 0)) begin pop <= 1'b1; nxt_held--; end
    if (dut.busy_q && !arv) n_limit++;
    held <= nxt_held;
    chk(nxt_held <= DEPTH, "more blocks requested than the queues hold");
  end
  task automatic send(logic [47:0] ib, int unsigned num, idx_size_e sz);
    logic [47:0] last;
    @(negedge clk);
    req.idx_base = ib; req.elem_base = 48'h1234_5678_0000 + ib; req.num = num; req.idx_size = sz;
    last = ib + 48'(num << sz) - 1;
    @(negedge clk);
    for (logic [41:0] b = ib[47:6]; b <= last[47:6]; b++) exp_blk.push_back(b);
    @(negedge clk);
    rv = 1'b1;
    while (!rr) @(negedge clk);
    @(negedge clk);
    rv = 1'b0;
  endtask
  always @(posedge clk) if (rst_n && cv && cr) begin
    chk(cmd.elem_base == req.elem_base && cmd.num == req.num && cmd.idx_size == req.idx_size, "cmd fields");
    chk(int'(cmd.start_pos) == int'(req.idx_base[5:0]) >> int'(req.idx_size), "cmd start_pos");
  end
  initial begin
    rv = 0; req = '0; cr = 1; arr = 0; pop = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    send(48'h1004, 100, IDX32);
    send(48'h23f0, 5, IDX32);
    send(48'h3001, 300, IDX8);
    send(48'h4022, 77, IDX16);
    send(48'h5038, 90, IDX64);
    send(48'h6000, 1, IDX32);
    for (int i = 0; i < 20; i++) send(48'h10000 + 48'($urandom % 4096), 1 + $urandom % 200, idx_size_e'($urandom % 4));
    while (exp_blk.size() != 0) @(posedge clk);
    chk(n_limit > 0, "queue limit was reached");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #200000; failures++; $display("ERROR timeout, %0d blocks outstanding, busy=%0d held=%0d res=%0d", exp_blk.size(), dut.busy_q, held, dut.reserved_q);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
