// tb_noc_output_interface: random loads (only when free) and reads against a
// model: ND rises the cycle after a load, drops the cycle after a read, and the
// output is free only while ND is low.
module tb_noc_output_interface;
  import noc_pkg::*;
  localparam int unsigned P = 1, D = 32, FW = flit_w(P, D);

  logic clk = 0, rst_n = 0;
  logic load, free_o, nd, rd;
  logic [FW-1:0] din, dout;
  int checks = 0, failures = 0;

  noc_output_interface #(.P(P), .D(D)) dut (.*);

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

  logic m_nd;
  logic [FW-1:0] m_d;
  int loads = 0;
  initial begin
    load = 0; rd = 0; din = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    m_nd = 0; m_d = '0;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      check(nd == m_nd, "nd");
      check(free_o == !m_nd, "free");
      if (m_nd) check(dout == m_d, "dout");
      din  = {$urandom, $urandom};
      load = !m_nd && $urandom_range(0, 1);
      rd   = m_nd && $urandom_range(0, 1);
      @(posedge clk);
      if (load) begin m_nd = 1; m_d = din; loads++; end
      else if (rd) m_nd = 0;
    end
    check(loads > 300, "enough loads");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
