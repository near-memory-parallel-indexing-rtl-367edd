// tb_coal_resp_splitter: W = 16. The block is combinational, so random inputs (response
// data, valid, hitmap, offsets, element queue readiness) are applied and the outputs are
// compared with the rule: a response is taken when a hitmap is present and every slot of
// the hitmap has room; then each such slot receives 64-bit word offs[s] of the block and
// the hitmap/offsets are popped. One case of each kind (blocked, taken) must be seen.
module tb_coal_resp_splitter;
  import isu_pkg::*;
  localparam int unsigned W = 16;
  wide_t data; logic rv, rr, hv, mpop;
  logic [W-1:0] hm, eready, epush; off_t [W-1:0] offs; elem_t [W-1:0] eo;
  coal_resp_splitter #(.W(W)) dut (.r_data_i(data), .r_valid_i(rv), .r_ready_o(rr), .hm_i(hm),
    .hm_valid_i(hv), .offs_i(offs), .meta_pop_o(mpop), .elem_o(eo), .elem_push_o(epush),
    .elem_ready_i(eready));
  int checks = 0, failures = 0, n_take = 0, n_block = 0;
  task automatic chk(bit c, string s);
    checks++; if (!c) begin failures++; if (failures < 10) $display("ERROR %s", s); end
  endtask
  initial begin
    for (int t = 0; t < 5000; t++) begin
      bit e_rr;
      for (int k = 0; k < 16; k++) data[k*32 +: 32] = $urandom;
      rv = $urandom % 4 != 0; hv = $urandom % 4 != 0;
      hm = W'($urandom) & W'($urandom);
      offs = (W*OFF_W)'({$urandom, $urandom});
      eready = ~(W'($urandom) & W'($urandom) & W'($urandom));
      if (t % 2 == 0) eready = '1;
      #1;
      e_rr = hv && ((hm & ~eready) == 0);
      chk(rr == e_rr, "r_ready");
      chk(mpop == (rv && e_rr), "meta pop");
      if (rv && e_rr) n_take++; else if (rv && hv) n_block++;
      for (int s = 0; s < W; s++) begin
        chk(epush[s] == (rv && e_rr && hm[s]), "element push");
        if (epush[s]) chk(eo[s] == data[int'(offs[s])*64 +: 64], "element word");
      end
    end
    chk(n_take > 100 && n_block > 100, "both cases seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish;
  end
endmodule
