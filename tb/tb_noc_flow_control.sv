// tb_noc_flow_control: destination fields taken from random flits, release only
// for a granted valid flit, and the waiting-cycle counter against a model.
module tb_noc_flow_control;
  import noc_pkg::*;
  localparam int unsigned P = 2, D = 16, FW = flit_w(P, D);

  logic clk = 0, rst_n = 0;
  logic valid_i, req_o, grant_i, release_o;
  logic [FW-1:0] flit_i;
  logic [P-1:0] dst_x_o, dst_y_o;
  logic [PORT_W-1:0] dst_h_o;
  logic [15:0] wait_cycles;
  int checks = 0, failures = 0;

  noc_flow_control #(.P(P), .D(D)) dut (.*);

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

  int m_wait;
  initial begin
    valid_i = 0; grant_i = 0; flit_i = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    m_wait = 0;
    for (int cyc = 0; cyc < 2000; cyc++) begin
      @(negedge clk);
      valid_i = ($urandom_range(0, 3) != 0);
      grant_i = valid_i && ($urandom_range(0, 2) == 0);
      flit_i  = {$urandom, $urandom};
      #1;
      // Layout: C | ori(2P+3) | dst(2P+3) | data(D); dst = {x, y, h}.
      check(dst_h_o == flit_i[D +: 3], "h_dst");
      check(dst_y_o == flit_i[D+3 +: P], "y_dst");
      check(dst_x_o == flit_i[D+3+P +: P], "x_dst");
      check(req_o == valid_i, "req");
      check(release_o == (valid_i && grant_i), "release");
      check(wait_cycles == 16'(m_wait), "wait counter");
      @(posedge clk);
      m_wait = (!valid_i || grant_i) ? 0 : m_wait + 1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
