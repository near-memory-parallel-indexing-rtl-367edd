// tb_axi_pack_isu: end-to-end test of the coalescing indirect stream unit at its default
// parameters (N = 8, W = 256), connected to a behavioural DRAM channel model.
//
// A series of indirect bursts is issued: 8/16/32/64-bit indices, index arrays that start
// in the middle of a 512-bit block, short bursts and a burst longer than the index queues
// can hold, index ranges with much block reuse and with little. Each packed beat returned
// upstream is compared with elem[idx[j]] computed from the memory contents function. The
// DRAM model and the upstream consumer stall at random. The test counts how often each
// mechanism of the design occurred (complete and partial windows, miss-triggered and
// watchdog-triggered wide reads, multi-request warps, index-queue back-pressure, downstream
// and upstream stalls) and fails if one never did. It also reports the coalesce rate
// (elements delivered per element-sized word read).
module tb_axi_pack_isu;
  import isu_pkg::*;
  import tb_mem_pkg::*;

  localparam int unsigned N = 8;
  localparam int unsigned W = 256;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  ind_req_t req;
  logic     req_valid, req_ready;
  pk_r_t    r;
  logic     r_valid, r_ready;
  ar_t      ar;
  logic     ar_valid, ar_ready;
  r_t       dr;
  logic     dr_valid, dr_ready;
  logic     ev_win_load, ev_win_partial, ev_issue, ev_wd_issue, ev_idx_stall;
  logic [$clog2(W+1)-1:0] ev_merged;

  axi_pack_isu dut (
    .clk_i(clk), .rst_ni(rst_n),
    .req_i(req), .req_valid_i(req_valid), .req_ready_o(req_ready),
    .r_o(r), .r_valid_o(r_valid), .r_ready_i(r_ready),
    .ar_o(ar), .ar_valid_o(ar_valid), .ar_ready_i(ar_ready),
    .r_i(dr), .r_valid_i(dr_valid), .r_ready_o(dr_ready),
    .ev_win_load_o(ev_win_load), .ev_win_partial_o(ev_win_partial), .ev_issue_o(ev_issue),
    .ev_wd_issue_o(ev_wd_issue), .ev_merged_o(ev_merged), .ev_idx_stall_o(ev_idx_stall)
  );

  dram_model #(.LAT(40), .MAX_OUT(64), .STALL(1'b1)) i_dram (
    .clk_i(clk), .rst_ni(rst_n),
    .ar_i(ar), .ar_valid_i(ar_valid), .ar_ready_o(ar_ready),
    .r_o(dr), .r_valid_o(dr_valid), .r_ready_i(dr_ready)
  );

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // expected packed beats
  pk_r_t exp_q[$];
  longint n_elems = 0;

  task automatic expect_burst(ind_req_t q);
    pk_r_t b;
    b = '0;
    for (int unsigned j = 0; j < q.num; j++) begin
      logic [63:0] idx;
      idx = idx_at(q.idx_base, j, int'(q.idx_size));
      b.data[64*(j%8) +: 64] = elem_at(q.elem_base + 48'(idx << 3));
      if (j % 8 == 7 || j == q.num - 1) begin
        b.last = (j == q.num - 1);
        exp_q.push_back(b);
        b = '0;
      end
    end
    n_elems += q.num;
  endtask

  // event counters
  longint c_full_win = 0, c_part_win = 0, c_miss_issue = 0, c_wd_issue = 0;
  longint c_multi = 0, c_idx_stall = 0, c_dram_stall = 0, c_up_stall = 0, c_merged = 0;
  int unsigned warp_size = 0;
  always @(posedge clk) if (rst_n) begin
    if (ev_win_load && !ev_win_partial) c_full_win++;
    if (ev_win_partial) c_part_win++;
    c_merged += ev_merged;
    warp_size += ev_merged;
    if (ev_issue) begin
      if (ev_wd_issue) c_wd_issue++; else c_miss_issue++;
      if (warp_size > 1) c_multi++;
      warp_size = 0;
    end
    if (ev_idx_stall) c_idx_stall++;
    if (ar_valid && !ar_ready) c_dram_stall++;
    if (r_valid && !r_ready) c_up_stall++;
  end

  // upstream consumer with random back-pressure; checks every beat
  always @(posedge clk) r_ready <= rst_n && (($urandom % 5) != 0);
  always @(posedge clk) if (rst_n && r_valid && r_ready) begin
    pk_r_t e;
    checks++;
    if (exp_q.size() == 0) begin
      failures++; $display("ERROR unexpected beat at cycle %0d", cyc);
    end else begin
      e = exp_q.pop_front();
      if (r !== e) begin
        failures++;
        if (failures < 10) $display("ERROR beat mismatch at cycle %0d last %b/%b", cyc, r.last, e.last);
      end
    end
  end

  task automatic send(logic [47:0] ib, logic [47:0] eb, int unsigned num, idx_size_e sz);
    ind_req_t q;
    q.idx_base = ib; q.elem_base = eb; q.num = num; q.idx_size = sz;
    expect_burst(q);
    @(negedge clk);
    req = q; req_valid = 1'b1;
    while (!req_ready) @(negedge clk);
    @(negedge clk);
    req_valid = 1'b0;
  endtask

  task automatic drain();
    while (exp_q.size() != 0) @(posedge clk);
    repeat (50) @(posedge clk);
  endtask

  longint t0, t1, n0, b0;
  initial begin
    req_valid = 0; req = '0;
    repeat (5) @(negedge clk);
    rst_n = 1;
    repeat (5) @(posedge clk);

    // 1: small index range (strong reuse), 32-bit indices, unaligned start
    idx_range = 256;
    send(48'h0000_1004, 48'h4000_0000, 700, IDX32);
    send(48'h0000_2000, 48'h4000_0000, 13, IDX32);
    send(48'h0000_3010, 48'h4000_1000, 37, IDX16);
    send(48'h0000_4003, 48'h4000_2000, 150, IDX8);
    send(48'h0000_5008, 48'h4000_3000, 64, IDX64);
    send(48'h0000_6040, 48'h4000_3000, 1, IDX32);
    drain();

    // 2: long burst: more index blocks than the index queues hold
    idx_range = 2048;
    t0 = cyc; n0 = n_elems; b0 = i_dram.n_beats;
    send(48'h0001_0000, 48'h5000_0000, 5000, IDX32);
    drain();
    t1 = cyc;
    $display("long burst: %0d elements in %0d cycles, %0d DRAM beats", n_elems - n0, t1 - t0,
             i_dram.n_beats - b0);

    // 3: little reuse
    idx_range = 1 << 20;
    send(48'h0002_0000, 48'h6000_0000, 600, IDX32);
    drain();

    $display("windows full=%0d partial=%0d  issues miss=%0d watchdog=%0d multi=%0d  merged=%0d",
             c_full_win, c_part_win, c_miss_issue, c_wd_issue, c_multi, c_merged);
    $display("idx stalls=%0d dram stalls=%0d upstream stalls=%0d  coalesce rate=%0.3f",
             c_idx_stall, c_dram_stall, c_up_stall,
             real'(n_elems) / real'((c_miss_issue + c_wd_issue) * 8));
    checks++; if (c_merged != n_elems) begin failures++; $display("ERROR merged %0d != %0d", c_merged, n_elems); end
    checks++; if (c_full_win == 0)   begin failures++; $display("ERROR no complete window"); end
    checks++; if (c_part_win == 0)   begin failures++; $display("ERROR no partial window"); end
    checks++; if (c_miss_issue == 0) begin failures++; $display("ERROR no miss-triggered issue"); end
    checks++; if (c_wd_issue == 0)   begin failures++; $display("ERROR no watchdog issue"); end
    checks++; if (c_multi == 0)      begin failures++; $display("ERROR no coalesced warp"); end
    checks++; if (c_idx_stall == 0)  begin failures++; $display("ERROR index queues never full"); end
    checks++; if (c_dram_stall == 0) begin failures++; $display("ERROR no DRAM stall"); end
    checks++; if (c_up_stall == 0)   begin failures++; $display("ERROR no upstream stall"); end
    checks++; if (exp_q.size() != 0) begin failures++; $display("ERROR %0d beats missing", exp_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #400000;
    failures++;
    $display("ERROR watchdog timeout, %0d beats outstanding", exp_q.size());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
