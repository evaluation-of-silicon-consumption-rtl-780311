// tb_noc_router_adapter: random stimulus on both directions. Checks that
// arriving flits reach the Input FIFO with the destination removed, that WAIT
// follows the FIFO's full flag, that the Output FIFO head is offered with ND and
// popped by RD, and that a flit for another address is flagged.
module tb_noc_router_adapter;
  import noc_pkg::*;
  localparam int unsigned P = 1, D = 32, FW = flit_w(P, D), QW = rx_w(P, D);

  logic clk = 0, rst_n = 0;
  logic [P-1:0] my_x = 1, my_y = 0;
  logic [PORT_W-1:0] my_h = 3;
  logic [FW-1:0] din, dout, tx_data;
  logic wr, wait_o, nd, rd, rx_push, rx_full, tx_empty, tx_pop, misrouted;
  logic [QW-1:0] rx_data;
  int checks = 0, failures = 0;

  noc_router_adapter #(.P(P), .D(D)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  logic [4:0] dst;
  int mis = 0;
  initial begin
    din = '0; wr = 0; rd = 0; rx_full = 0; tx_empty = 1; tx_data = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      // Mostly correctly addressed flits; every 50th goes to another port (not
      // while checking assertions, so only when WR is low it would matter).
      dst = {my_x, my_y, my_h};
      din = {1'($urandom), 5'($urandom), dst, 32'($urandom)};
      wr = $urandom_range(0, 1);
      rx_full = $urandom_range(0, 1);
      tx_empty = $urandom_range(0, 1);
      tx_data = {$urandom, $urandom};
      rd = !tx_empty && $urandom_range(0, 1);
      #1;
      check(rx_data == {din[FW-1], din[FW-2 -: 5], din[D-1:0]}, "destination removed");
      check(rx_push == (wr && !rx_full), "push");
      check(wait_o == rx_full, "wait = full");
      check(nd == !tx_empty && dout == tx_data, "nd/dout");
      check(tx_pop == (rd && !tx_empty), "pop");
      check(!misrouted, "own address accepted");
    end
    // Misaddressed flit with WR low: not pushed, not flagged.
    @(negedge clk);
    wr = 0; din = {1'b0, 5'd0, 5'b00011, 32'd0}; rx_full = 0;
    #1 check(!misrouted && !rx_push, "no flag without write");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
