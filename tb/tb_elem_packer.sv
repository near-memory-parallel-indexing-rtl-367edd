// tb_elem_packer: N = 4. A series of bursts with random element counts (1..40, plus the
// exact-multiple cases 8 and 16) is sent; lane k of group g carries element N*g+k, and
// each lane is valid at random so groups complete at different times. Output beats are
// drained with random ready. Each beat must hold elements 8b..8b+7 of the burst in its
// 64-bit slots, zeros after the burst's last element, and last set on the final beat only.
module tb_elem_packer;
  import isu_pkg::*;
  timeunit 1ns; timeprecision 1ps;
  localparam int unsigned N = 4, NB = 300;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic [NUM_W-1:0] cnum; logic cv, cr;
  elem_t [N-1:0] ed; logic [N-1:0] ev, er;
  pk_r_t r; logic rv, rr;
  elem_packer #(.N(N)) dut (.clk_i(clk), .rst_ni(rst_n), .cmd_num_i(cnum), .cmd_valid_i(cv),
    .cmd_ready_o(cr), .elem_i(ed), .elem_valid_i(ev), .elem_ready_o(er), .r_o(r),
    .r_valid_o(rv), .r_ready_i(rr));
  int checks = 0, failures = 0;
  task automatic chk(bit c, string s);
    checks++; if (!c) begin failures++; if (failures < 10) $display("ERROR %s", s); end
  endtask
  int nums[NB];
  function automatic elem_t val(int b, int j); return {32'(b), 32'(j)}; endfunction
  // command driver
  initial begin
    cv = 0; cnum = 0;
    for (int b = 0; b < NB; b++) nums[b] = (b % 7 == 3) ? 8 : (b % 7 == 5) ? 16 : 1 + $urandom % 40;
    wait (rst_n);
    for (int b = 0; b < NB; b++) begin
      @(negedge clk); cv = 1; cnum = NUM_W'(nums[b]);
      @(posedge clk); while (!cr) @(posedge clk);
      @(negedge clk); cv = 0;
    end
  end
  // lane drivers: lane k walks through elements k, k+N, ... of each burst
  for (genvar k = 0; k < N; k++) begin : g_lane
    initial begin
      ev[k] = 0; ed[k] = '0;
      wait (rst_n);
      for (int b = 0; b < NB; b++)
        for (int j = k; j < nums[b]; j += N) begin
          @(negedge clk);
          while ($urandom % 3 == 0) begin ev[k] = 0; @(negedge clk); end
          ev[k] = 1; ed[k] = val(b, j);
          @(posedge clk); while (!er[k]) @(posedge clk);
          @(negedge clk); ev[k] = 0;
          #0;
        end
    end
  end
  initial begin
    int b = 0, beat = 0;
    rr = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    while (b < NB) begin
      @(negedge clk); rr = $urandom % 4 != 0;
      @(posedge clk);
      if (rv && rr) begin
        bit e_last; e_last = (beat + 1) * 8 >= nums[b];
        chk(r.last == e_last, $sformatf("last burst %0d beat %0d", b, beat));
        for (int s = 0; s < 8; s++) begin
          int j; j = beat * 8 + s;
          chk(r.data[s*64 +: 64] == ((j < nums[b]) ? val(b, j) : 64'd0),
              $sformatf("burst %0d elem %0d", b, j));
        end
        if (e_last) begin b++; beat = 0; end else beat++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #200000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish;
  end
endmodule
