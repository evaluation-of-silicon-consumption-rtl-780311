// tb_noc_core_adapter: random core writes and Input FIFO words. Checks the
// flit built for the network (C | origin | destination | data, origin from the
// NI's own address), the full/empty handshake and the fields shown to the core.
module tb_noc_core_adapter;
  import noc_pkg::*;
  localparam int unsigned P = 2, D = 16, FW = flit_w(P, D), QW = rx_w(P, D), AW = addr_w(P);

  logic [P-1:0] my_x = 2, my_y = 1;
  logic [PORT_W-1:0] my_h = 5;
  logic core_wr, core_c, core_full, core_rd, core_empty, core_rx_c;
  logic [AW-1:0] core_dst, core_rx_ori;
  logic [D-1:0] core_data, core_rx_data;
  logic tx_push, tx_full, rx_empty, rx_pop;
  logic [FW-1:0] tx_flit;
  logic [QW-1:0] rx_word;
  int checks = 0, failures = 0;

  noc_core_adapter #(.P(P), .D(D)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    for (int t = 0; t < 2000; t++) begin
      core_wr = $urandom_range(0, 1); core_c = $urandom_range(0, 1);
      core_dst = AW'($urandom); core_data = D'($urandom);
      tx_full = $urandom_range(0, 1);
      core_rd = $urandom_range(0, 1); rx_empty = $urandom_range(0, 1);
      rx_word = QW'({$urandom, $urandom});
      #1;
      // flit = C(1) | ori x(2) y(2) h(3) | dst(7) | data(16)
      check(tx_flit == {core_c, 2'd2, 2'd1, 3'd5, core_dst, core_data}, "flit assembly");
      check(tx_push == (core_wr && !tx_full) && core_full == tx_full, "tx handshake");
      check(core_rx_c == rx_word[QW-1] && core_rx_ori == rx_word[QW-2 -: AW]
            && core_rx_data == rx_word[D-1:0], "rx fields");
      check(rx_pop == (core_rd && !rx_empty) && core_empty == rx_empty, "rx handshake");
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
