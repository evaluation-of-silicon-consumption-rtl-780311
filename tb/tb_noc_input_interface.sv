// tb_noc_input_interface: random writes and releases against a cycle model of
// a one-flit register with the WR/WAIT handshake (write taken only when WAIT is
// low; WAIT low in the cycle of a release).
module tb_noc_input_interface;
  import noc_pkg::*;
  localparam int unsigned P = 1, D = 32, FW = flit_w(P, D);

  logic clk = 0, rst_n = 0;
  logic [FW-1:0] din, flit_o;
  logic wr, wait_o, release_i, valid_o;
  int checks = 0, failures = 0;

  noc_input_interface #(.P(P), .D(D)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  logic          m_valid;
  logic [FW-1:0] m_flit;
  int taken = 0, blocked = 0;

  initial begin
    wr = 0; release_i = 0; din = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    m_valid = 0; m_flit = '0;
    for (int cyc = 0; cyc < 2000; cyc++) begin
      @(negedge clk);
      check(valid_o == m_valid, "valid");
      if (m_valid) check(flit_o == m_flit, "flit");
      din       = {$urandom, $urandom};
      wr        = ($urandom_range(0, 2) != 0);
      release_i = m_valid && ($urandom_range(0, 1) == 1);
      #1;
      check(wait_o == (m_valid && !release_i), "wait");
      @(posedge clk);
      if (wr && !(m_valid && !release_i)) begin
        m_valid = 1; m_flit = din; taken++;
      end else begin
        if (wr) blocked++;
        if (release_i) m_valid = 0;
      end
    end
    check(taken > 100 && blocked > 100, "both accepted and blocked writes seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
