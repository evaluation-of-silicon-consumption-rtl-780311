// tb_noc_allocator: random sets of arbiter commands (distinct inputs), checking
// crossbar selects, output loads and the per-input grant/target view.
module tb_noc_allocator;
  import noc_pkg::*;

  logic clk = 0, rst_n = 0;
  logic [NPORTS-1:0] cmd_valid, out_load, in_grant;
  logic [PORT_W-1:0] cmd_in [NPORTS], xbar_sel [NPORTS], in_to_out [NPORTS];
  int checks = 0, failures = 0;

  noc_allocator dut (.*);

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

  int perm[8];
  initial begin
    cmd_valid = '0;
    foreach (cmd_in[i]) cmd_in[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      foreach (perm[i]) perm[i] = i;
      perm.shuffle();
      cmd_valid = 8'($urandom);
      foreach (cmd_in[o]) cmd_in[o] = 3'(perm[o]);
      #1;
      for (int o = 0; o < 8; o++) begin
        check(out_load[o] == cmd_valid[o], "load");
        if (cmd_valid[o]) check(xbar_sel[o] == 3'(perm[o]), "select");
      end
      for (int i = 0; i < 8; i++) begin
        bit g; int to;
        g = 0; to = 0;
        for (int o = 0; o < 8; o++) if (cmd_valid[o] && perm[o] == i) begin g = 1; to = o; end
        check(in_grant[i] == g, "input grant");
        if (g) check(in_to_out[i] == 3'(to), "input target");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
