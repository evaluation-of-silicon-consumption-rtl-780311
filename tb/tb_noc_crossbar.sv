// tb_noc_crossbar: random flits and random selects; every output must carry
// the flit of its selected input in the same cycle.
module tb_noc_crossbar;
  import noc_pkg::*;
  localparam int unsigned P = 1, D = 32, FW = flit_w(P, D);

  logic [FW-1:0] in_flit [NPORTS], out_flit [NPORTS];
  logic [PORT_W-1:0] sel [NPORTS];
  int checks = 0, failures = 0;

  noc_crossbar #(.P(P), .D(D)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 1000; t++) begin
      foreach (in_flit[i]) in_flit[i] = {$urandom, $urandom};
      foreach (sel[o]) sel[o] = 3'($urandom);
      #1;
      foreach (out_flit[o]) begin
        checks++;
        if (out_flit[o] != in_flit[sel[o]]) begin
          failures++;
          $display("FAIL output %0d", o);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
