// tb_noc_fifo: random push/pop against a queue model for a 4-deep FIFO and a
// 1-deep FIFO (the single-register case); checks head, empty, full and count.
module tb_noc_fifo;
  localparam int unsigned W = 20;

  logic clk = 0, rst_n = 0;
  logic push, pop;
  logic [W-1:0] din;
  logic [W-1:0] dout4, dout1;
  logic empty4, full4, empty1, full1;
  logic [2:0] count4;
  logic [0:0] count1;
  logic push4, pop4, push1, pop1;
  int checks = 0, failures = 0;

  noc_fifo #(.DEPTH(4), .W(W)) dut4 (.clk, .rst_n, .push(push4), .din, .pop(pop4),
    .dout(dout4), .empty(empty4), .full(full4), .count(count4));
  noc_fifo #(.DEPTH(1), .W(W)) dut1 (.clk, .rst_n, .push(push1), .din, .pop(pop1),
    .dout(dout1), .empty(empty1), .full(full1), .count(count1));

  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  logic [W-1:0] q4[$], q1[$];
  int fulls = 0;
  initial begin
    push4 = 0; pop4 = 0; push1 = 0; pop1 = 0; din = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 4000; t++) begin
      @(negedge clk);
      check(empty4 == (q4.size() == 0) && full4 == (q4.size() == 4) && count4 == 3'(q4.size()), "flags 4");
      check(empty1 == (q1.size() == 0) && full1 == (q1.size() == 1), "flags 1");
      if (q4.size() > 0) check(dout4 == q4[0], "head 4");
      if (q1.size() > 0) check(dout1 == q1[0], "head 1");
      if (full4) fulls++;
      din   = W'($urandom);
      push4 = !full4 && ($urandom_range(0, 99) < ((t / 500) % 2 ? 70 : 35));
      pop4  = !empty4 && ($urandom_range(0, 99) < 50);
      push1 = !full1 && $urandom_range(0, 1);
      pop1  = !empty1 && $urandom_range(0, 1);
      @(posedge clk);
      if (pop4) void'(q4.pop_front());
      if (push4) q4.push_back(din);
      if (pop1) void'(q1.pop_front());
      if (push1) q1.push_back(din);
    end
    check(fulls > 10, "full state reached");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
