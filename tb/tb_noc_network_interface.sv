// tb_noc_network_interface: one NI (B_SIZE=4) between a model core and a model
// router channel.
//  * Transmit: core words appear on DOUT as flits with this NI's origin, in
//    order; ND rises the cycle after the core write; core_full is seen when the
//    router does not read.
//  * Receive: flits written on DIN appear to the core without destination, in
//    order; WAIT rises when the Input FIFO is full.
module tb_noc_network_interface;
  import noc_pkg::*;
  localparam int unsigned P = 1, D = 32, FW = flit_w(P, D), AW = addr_w(P);

  logic clk = 0, rst_n = 0;
  logic [P-1:0] my_x = 1, my_y = 1;
  logic [PORT_W-1:0] my_h = 6;
  logic core_wr, core_c, core_full, core_rd, core_empty, core_rx_c;
  logic [AW-1:0] core_dst, core_rx_ori;
  logic [D-1:0] core_data, core_rx_data;
  logic [FW-1:0] din, dout;
  logic wr, wait_o, nd, rd, misrouted;
  int checks = 0, failures = 0;

  noc_network_interface #(.P(P), .D(D), .B_SIZE(4)) dut (.*);

  always #5 clk = ~clk;
  int cycle = 0;
  always @(posedge clk) cycle++;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s at cycle %0d", what, cycle); end
  endtask

  logic [FW-1:0] txq[$];
  logic [1+AW+D-1:0] rxq[$];
  int tx_n = 0, rx_n = 0, fulls = 0, waits = 0;

  // Scoreboards, sampled on the rising edge.
  always @(posedge clk) if (rst_n) begin
    if (rd && nd) begin
      check(txq.size() > 0 && dout == txq[0], "transmitted flit");
      if (txq.size() > 0) void'(txq.pop_front());
      tx_n++;
    end
    if (core_rd && !core_empty) begin
      check(rxq.size() > 0 && {core_rx_c, core_rx_ori, core_rx_data} == rxq[0], "received word");
      if (rxq.size() > 0) void'(rxq.pop_front());
      rx_n++;
    end
    if (core_wr && core_full) fulls++;
    if (wr && wait_o) waits++;
  end

  initial begin
    logic [4:0] src;
    core_wr = 0; core_c = 0; core_dst = '0; core_data = '0; core_rd = 0;
    din = '0; wr = 0; rd = 0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    // ND one cycle after a core write.
    core_wr = 1; core_c = 1; core_dst = 5'b01010; core_data = 32'hCAFE0001;
    txq.push_back({1'b1, 1'b1, 1'b1, 3'd6, 5'b01010, 32'hCAFE0001});
    @(negedge clk);
    core_wr = 0;
    check(nd, "ND the cycle after the core write");
    rd = 1;
    @(negedge clk);
    rd = 0;
    for (int t = 0; t < 4000; t++) begin
      // core transmit side
      core_wr = ($urandom_range(0, 99) < 60);
      core_c = $urandom_range(0, 1); core_dst = AW'($urandom); core_data = $urandom;
      if (core_wr && !core_full) txq.push_back({core_c, 1'b1, 1'b1, 3'd6, core_dst, core_data});
      rd = nd && ($urandom_range(0, 99) < ((t / 400) % 2 ? 20 : 80));
      // network receive side: flits addressed to this NI
      src = 5'($urandom);
      if (!wr || !wait_o) begin
        wr = ($urandom_range(0, 99) < 60);
        din = {1'($urandom), src, 1'b1, 1'b1, 3'd6, 32'($urandom)};
      end
      #1;
      if (wr && !wait_o) rxq.push_back({din[FW-1], din[FW-2 -: AW], din[D-1:0]});
      core_rd = ($urandom_range(0, 99) < ((t / 400) % 2 ? 80 : 20));
      @(negedge clk);
    end
    core_wr = 0; wr = 0; rd = 1; core_rd = 1;
    repeat (20) @(negedge clk);
    check(txq.size() == 0 && rxq.size() == 0, "all words delivered");
    check(fulls > 0, "Output FIFO full seen by the core");
    check(waits > 0, "WAIT raised by a full Input FIFO");
    check(!misrouted, "no misrouted flit");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
