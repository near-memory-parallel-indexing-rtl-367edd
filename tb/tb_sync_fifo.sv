// tb_sync_fifo: random push/pop traffic against a queue model; checks head data, empty,
// full and usage every cycle (DEPTH = 5, a depth that is not a power of two).
module tb_sync_fifo;
  localparam int unsigned WIDTH = 16, DEPTH = 5;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic push, pop, full, empty;
  logic [WIDTH-1:0] din, dout;
  logic [$clog2(DEPTH+1)-1:0] usage;
  sync_fifo #(.WIDTH(WIDTH), .DEPTH(DEPTH)) dut (
    .clk_i(clk), .rst_ni(rst_n), .push_i(push), .data_i(din), .full_o(full),
    .pop_i(pop), .data_o(dout), .empty_o(empty), .usage_o(usage));
  int checks = 0, failures = 0;
  logic [WIDTH-1:0] m[$];
  task automatic chk(bit c, string s);
    checks++; if (!c) begin failures++; if (failures < 10) $display("ERROR %s", s); end
  endtask
  initial begin
    push = 0; pop = 0; din = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      chk(empty == (m.size() == 0), "empty");
      chk(full == (m.size() == DEPTH), "full");
      chk(int'(usage) == m.size(), "usage");
      if (m.size() > 0) chk(dout == m[0], "head data");
      push = (i % 600 < 300) ? ($urandom % 4 != 0) : ($urandom % 4 == 0);
      pop  = (m.size() > 0) && ($urandom % 2 == 0);
      if (full && !pop) push = 0;
      din = 16'($urandom);
      @(posedge clk);
      if (pop) void'(m.pop_front());
      if (push) m.push_back(din);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
