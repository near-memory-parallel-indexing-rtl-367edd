// tb_coal_regulator: W = 4, TIMEOUT = 5, ELEM_DEPTH = 2. Directed cases: a complete window
// loads at once; an incomplete one loads only after TIMEOUT cycles without new requests
// (and the timer restarts when one arrives); accepted entries leave the window and the
// next window waits until it is empty; a slot with two undelivered elements is kept out of
// windows until the downsizer reads one. A random phase then compares window contents and
// load/partial pulses with a model of these rules for 5000 cycles.
module tb_coal_regulator;
  timeunit 1ns; timeprecision 1ps;
  localparam int unsigned W = 4, TO = 5;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic [W-1:0] hv, acc, epop, win; logic anyp, load, part;
  coal_regulator #(.W(W), .TIMEOUT(TO), .ELEM_DEPTH(2)) dut (.clk_i(clk), .rst_ni(rst_n),
    .head_valid_i(hv), .any_push_i(anyp), .accept_i(acc), .elem_pop_i(epop),
    .win_valid_o(win), .win_load_o(load), .win_partial_o(part));
  int checks = 0, failures = 0;
  task automatic chk(bit c, string s);
    checks++; if (!c) begin failures++; if (failures < 10) $display("ERROR %s", s); end
  endtask
  task automatic step(); @(posedge clk); @(negedge clk); acc = 0; epop = 0; anyp = 0; endtask
  int t;
  initial begin
    hv = 0; acc = 0; epop = 0; anyp = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    // complete window
    hv = 4'b1111; anyp = 1;
    #0.1 chk(load && !part, "complete window loads immediately");
    step();
    chk(win == 4'b1111, "window = all slots");
    acc = 4'b0101; step();
    chk(win == 4'b1010, "accepted entries invalidated");
    chk(!load, "no new window while entries remain");
    acc = 4'b1010; hv = 4'b0000; step();
    chk(win == 4'b0000, "window empty");
    // slots 0..3 now have one element in flight each. Partial window of slot 1 only.
    hv = 4'b0010;
    t = 0;
    while (!load && t < 20) begin
      if (t == 2) anyp = 1;   // a new request restarts the limit
      step(); t++;
    end
    chk(t == TO + 3, $sformatf("partial window after time limit (%0d cycles)", t));
    chk(part, "flagged partial");
    step();
    chk(win == 4'b0010, "partial window content");
    acc = 4'b0010; hv = 4'b0000; step();
    // slot 1 now has 2 elements in flight: it may not join a window
    hv = 4'b1111;
    #0.1 chk(!load, "slot without credit blocks a complete window");
    t = 0;
    while (!load && t < 20) begin step(); t++; end
    step();
    chk(win == 4'b1101, "slot without credit left out");
    acc = 4'b1101; epop = 4'b0010; hv = 4'b0000; step();
    epop = 4'b1101; step();
    hv = 4'b1111;
    #0.1 chk(load && !part, "credit returned: complete window");
    step();
    chk(win == 4'b1111, "full window again");
    // random phase against a reference model of the window rules
    @(negedge clk); rst_n = 0; hv = 0; acc = 0; epop = 0; anyp = 0;
    @(negedge clk); rst_n = 1;
    begin
      logic [W-1:0] win_m, can, hv_q;
      int infl[W], tmr, n_load, n_part;
      bit e_load, e_part;
      win_m = 0; hv_q = 0; tmr = 0; n_load = 0; n_part = 0;
      foreach (infl[s]) infl[s] = 0;
      for (int c = 0; c < 5000; c++) begin
        @(negedge clk);
        hv = ($urandom % 8 == 0) ? W'($urandom) : (($urandom % 2) ? '1 : W'($urandom) | W'($urandom));
        anyp = ($urandom % 4 == 0);
        if (c % 500 >= 350) begin  // quiet phases: no new requests, incomplete heads
          anyp = 0;
          if (c % 50 == 0) hv = W'($urandom) & ~W'(1 << ($urandom % W));
          else             hv = hv_q;
        end
        hv_q = hv;
        acc = win_m & win & W'($urandom);
        epop = 0;
        for (int s = 0; s < W; s++) if (infl[s] > 0 && $urandom % 2) epop[s] = 1'b1;
        for (int s = 0; s < W; s++) can[s] = hv[s] && infl[s] < 2;
        e_load = (win_m == 0) && (&can || (tmr >= TO && |can));
        e_part = e_load && !(&can);
        #0.1;
        chk(win == win_m, "random: window");
        chk(load == e_load && part == e_part, "random: load/partial");
        if (e_load) n_load++;
        if (e_part) n_part++;
        for (int s = 0; s < W; s++) infl[s] += int'(acc[s]) - int'(epop[s]);
        if (e_load || anyp || win_m != 0 || can == 0) tmr = 0; else if (tmr < TO) tmr++;
        win_m = e_load ? can : (win_m & ~acc);
      end
      chk(n_load > 50 && n_part > 10, $sformatf("random: loads %0d partial %0d", n_load, n_part));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
