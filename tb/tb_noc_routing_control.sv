// tb_noc_routing_control: every destination from every router position of a
// 4x4 mesh (P=2) against the XY rule: X first (east if larger), then Y (north if
// larger), then the local port.
module tb_noc_routing_control;
  import noc_pkg::*;
  localparam int unsigned P = 2;

  logic req_i;
  logic [P-1:0] dst_x, dst_y, my_x, my_y;
  logic [PORT_W-1:0] dst_h, out_port;
  logic [NPORTS-1:0] out_req;
  int checks = 0, failures = 0;

  noc_routing_control #(.P(P)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    int exp;
    for (int mx = 0; mx < 4; mx++) for (int my = 0; my < 4; my++)
    for (int dx = 0; dx < 4; dx++) for (int dy = 0; dy < 4; dy++)
    for (int h = 0; h < 8; h++) begin
      my_x = P'(mx); my_y = P'(my); dst_x = P'(dx); dst_y = P'(dy); dst_h = 3'(h);
      req_i = 1;
      #1;
      if (dx > mx)      exp = 2;   // EE
      else if (dx < mx) exp = 6;   // WW
      else if (dy > my) exp = 0;   // NN
      else if (dy < my) exp = 4;   // SS
      else              exp = h;
      check(out_req == (8'b1 << exp), $sformatf("route (%0d,%0d)->(%0d,%0d,%0d)", mx, my, dx, dy, h));
      req_i = 0;
      #1;
      check(out_req == '0, "no request without flit");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
