// tb_spmv_workload: runs the gather of a sparse matrix-vector product through the indirect
// stream unit at its default parameters (N = 8, W = 256), as the evaluated SpMV workloads
// do: one indirect burst per slice of 32 rows, 32-bit column indices, 64-bit elements of x.
//
// Two matrices whose index patterns are generated in tb_mem_pkg:
//   - the HPCG matrix: 27-point stencil on a 12 x 12 x 12 mesh (1728 rows, 27 entries per
//     row with boundary entries clamped, 46656 gathers);
//   - a banded random matrix: 1024 rows of 16 entries spread over a band of 2048 columns
//     (16384 gathers), a pattern with much less reuse.
// The DRAM model answers after 40 cycles without stalls; the requester never stalls. Every
// packed beat is compared with x[col] from the memory contents function. The test reports
// cycles, elements per cycle, wide element reads and the coalesce rate (gathered elements per
// element-sized word read from DRAM), and checks that coalescing pays off: at least 4 useful
// elements per wide read for the stencil and more than 1 for the banded matrix.
module tb_spmv_workload;
  import isu_pkg::*;
  import tb_mem_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  ind_req_t req; logic req_valid, req_ready;
  pk_r_t r; logic r_valid, r_ready;
  ar_t ar; logic ar_valid, ar_ready;
  r_t dr; logic dr_valid, dr_ready;
  logic ev_win_load, ev_win_partial, ev_issue, ev_wd_issue, ev_idx_stall;
  logic [$clog2(256+1)-1:0] ev_merged;

  axi_pack_isu dut (
    .clk_i(clk), .rst_ni(rst_n),
    .req_i(req), .req_valid_i(req_valid), .req_ready_o(req_ready),
    .r_o(r), .r_valid_o(r_valid), .r_ready_i(r_ready),
    .ar_o(ar), .ar_valid_o(ar_valid), .ar_ready_i(ar_ready),
    .r_i(dr), .r_valid_i(dr_valid), .r_ready_o(dr_ready),
    .ev_win_load_o(ev_win_load), .ev_win_partial_o(ev_win_partial), .ev_issue_o(ev_issue),
    .ev_wd_issue_o(ev_wd_issue), .ev_merged_o(ev_merged), .ev_idx_stall_o(ev_idx_stall)
  );
  dram_model #(.LAT(40), .MAX_OUT(64), .STALL(1'b0)) i_dram (
    .clk_i(clk), .rst_ni(rst_n),
    .ar_i(ar), .ar_valid_i(ar_valid), .ar_ready_o(ar_ready),
    .r_o(dr), .r_valid_o(dr_valid), .r_ready_i(dr_ready)
  );

  int checks = 0, failures = 0;
  longint cyc = 0, n_issue = 0;
  always @(posedge clk) cyc <= cyc + 1;
  always @(posedge clk) if (rst_n && ev_issue) n_issue++;
  assign r_ready = 1'b1;

  pk_r_t exp_q[$];
  always @(posedge clk) if (rst_n && r_valid && r_ready) begin
    pk_r_t e;
    checks++;
    if (exp_q.size() == 0) begin failures++; $display("ERROR unexpected beat"); end
    else begin
      e = exp_q.pop_front();
      if (r !== e) begin failures++; if (failures < 10) $display("ERROR beat mismatch at cycle %0d", cyc); end
    end
  end

  localparam logic [47:0] X_BASE = 48'h4000_0000;

  task automatic send(logic [47:0] ib, int unsigned num);
    ind_req_t q; pk_r_t b;
    q.idx_base = ib; q.elem_base = X_BASE; q.num = num; q.idx_size = IDX32;
    b = '0;
    for (int unsigned j = 0; j < num; j++) begin
      logic [63:0] idx;
      idx = idx_at(ib, j, 2);
      b.data[64*(j%8) +: 64] = elem_at(X_BASE + 48'(idx << 3));
      if (j % 8 == 7 || j == num - 1) begin b.last = (j == num - 1); exp_q.push_back(b); b = '0; end
    end
    @(negedge clk); req = q; req_valid = 1'b1;
    while (!req_ready) @(negedge clk);
    @(negedge clk); req_valid = 1'b0;
  endtask

  // runs one matrix: nnz gathers in slices of slice entries; returns elements per wide read
  task automatic run(string name, int unsigned nnz, int unsigned slice, output real rate);
    longint t0, i0, b0;
    t0 = cyc; i0 = n_issue; b0 = i_dram.n_beats;
    for (int unsigned s = 0; s < nnz; s += slice)
      send(48'(4 * s), (nnz - s < slice) ? nnz - s : slice);
    while (exp_q.size() != 0) @(posedge clk);
    rate = real'(nnz) / real'(n_issue - i0);
    $display("%s: %0d gathers in %0d cycles (%0.2f elements/cycle), %0d wide element reads, %0d index beats, coalesce rate %0.3f",
             name, nnz, cyc - t0, real'(nnz) / real'(cyc - t0), n_issue - i0,
             (i_dram.n_beats - b0) - (n_issue - i0), rate / 8.0);
  endtask

  initial begin
    real rate;
    req_valid = 0; req = '0;
    repeat (5) @(negedge clk); rst_n = 1;
    idx_mode = 1; grid = 12;
    run("HPCG 27-point stencil 12^3", 27 * 12 * 12 * 12, 27 * 32, rate);
    checks++; if (rate < 4.0) begin failures++; $display("ERROR stencil: %0.2f elements per wide read", rate); end
    idx_mode = 2; band = 2048;
    run("banded random 1024x16, band 2048", 1024 * 16, 16 * 32, rate);
    checks++; if (rate <= 1.0) begin failures++; $display("ERROR banded: %0.2f elements per wide read", rate); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
