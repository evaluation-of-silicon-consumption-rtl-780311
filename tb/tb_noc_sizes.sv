// tb_noc_sizes: the router built at every size of the published cost tables -
// data words of 16, 32, 64, 128 and 256 bits, and 1 to 4 bits per coordinate
// (meshes of 2x2 to 16x16). Each of the 20 routers sits at (1,1) and forwards
// 60 random flits, one at a time from a random input: each must appear unchanged
// on its XY output exactly two cycles after it was written.
module tb_noc_sizes;
  import noc_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  localparam int NCFG = 20;
  bit done [NCFG];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  for (genvar di = 0; di < 5; di++) begin : g_d
    for (genvar pi = 1; pi <= 4; pi++) begin : g_p
      localparam int unsigned D = 16 << di;
      localparam int unsigned P = pi;
      localparam int unsigned FW = flit_w(P, D);
      logic [FW-1:0] din [NPORTS], dout [NPORTS];
      logic [NPORTS-1:0] wr, wait_o, nd, rd;
      logic [15:0] wc [NPORTS];
      logic [P-1:0] x_id = 1, y_id = 1;
      assign rd = nd;
      noc_router #(.P(P), .D(D)) dut (
        .clk, .rst_n, .x_id, .y_id, .din, .wr, .wait_o, .dout, .nd, .rd, .wait_cycles(wc));

      initial begin
        int ip, dx, dy, dh, op;
        logic [FW-1:0] f;
        logic [287:0] rnd;
        wr = '0;
        foreach (din[i]) din[i] = '0;
        wait (rst_n);
        for (int k = 0; k < 60; k++) begin
          @(negedge clk);
          ip = $urandom_range(0, 7);
          dx = $urandom_range(0, (1 << P) - 1);
          dy = $urandom_range(0, (1 << P) - 1);
          dh = $urandom_range(0, 7);
          for (int w = 0; w < 9; w++) rnd[w*32 +: 32] = $urandom;
          f = rnd[FW-1:0];
          f[D +: 2*P+3] = {P'(dx), P'(dy), 3'(dh)};
          op = (dx > 1) ? 2 : (dx < 1) ? 6 : (dy > 1) ? 0 : (dy < 1) ? 4 : dh;
          din[ip] = f; wr[ip] = 1;
          @(negedge clk);
          wr[ip] = 0;
          check_one(nd == '0, "nothing out after one cycle");
          @(negedge clk);
          check_one(nd == (8'b1 << op) && dout[op] == f,
                    $sformatf("D=%0d P=%0d: flit from %0d on output %0d after two cycles", D, P, ip, op));
        end
        done[di * 4 + pi - 1] = 1;
      end
    end
  end

  function automatic void check_one(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endfunction

  initial begin
    foreach (done[i]) done[i] = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int i = 0; i < NCFG; i++) wait (done[i]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
