// tb_noc_router: one router at (1,1) of a 4x4 mesh (P=2), so all four mesh
// directions and all local ports are reachable.
//  1. Latency: a lone flit written in cycle t is offered on the XY output with
//     ND in cycle t+2.
//  2. Interleaving: three local inputs stream flits to one output that is read
//     at once; the output must take them in turn (one flit every two cycles on
//     the output, so each flow gets one flit every 2N = 6 cycles).
//  3. Mesh burst: a mesh input (WW) and a local input compete for one output;
//     WW must send MESH_BURST+1 flits in a row, the local input one.
//  4. Random traffic on all inputs with random readers: every flit leaves on
//     the XY output, unchanged, in order per input.
module tb_noc_router;
  import noc_pkg::*;
  localparam int unsigned P = 2, D = 16, FW = flit_w(P, D);
  localparam int unsigned MB = 1;

  logic clk = 0, rst_n = 0;
  logic [P-1:0] x_id = 1, y_id = 1;
  logic [FW-1:0] din [NPORTS], dout [NPORTS];
  logic [NPORTS-1:0] wr, wait_o, nd, rd;
  logic [15:0] wait_cycles [NPORTS];
  int checks = 0, failures = 0;

  noc_router #(.P(P), .D(D), .MESH_BURST(MB)) dut (.*);

  // A five-channel router (NN, NE, EE, SS, WW) at the same position.
  localparam logic [7:0] EN5 = 8'b0101_0111;
  logic [FW-1:0] din5 [NPORTS], dout5 [NPORTS];
  logic [NPORTS-1:0] wr5, wait5, nd5, rd5;
  logic [15:0] wc5 [NPORTS];
  noc_router #(.P(P), .D(D), .MESH_BURST(MB), .PORT_EN(EN5)) dut5 (
    .clk, .rst_n, .x_id, .y_id, .din(din5), .wr(wr5), .wait_o(wait5),
    .dout(dout5), .nd(nd5), .rd(rd5), .wait_cycles(wc5));
  assign rd5 = nd5;

  always #5 clk = ~clk;
  int cycle = 0;
  always @(posedge clk) cycle++;

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s at cycle %0d", what, cycle); end
  endtask

  // Flit: C | ori(x,y,h) | dst(x,y,h) | data.  data = {input port(3), seq(13)}.
  function automatic logic [FW-1:0] mk(int in_p, int seq, int dx, int dy, int dh);
    return {1'b0, 2'd0, 2'd0, 3'(in_p), 2'(dx), 2'(dy), 3'(dh), 3'(in_p), 13'(seq)};
  endfunction
  function automatic int xy(int dx, int dy, int dh);
    if (dx > 1) return 2;
    if (dx < 1) return 6;
    if (dy > 1) return 0;
    if (dy < 1) return 4;
    return dh;
  endfunction

  // Readers: rd when nd and ready.
  logic [NPORTS-1:0] ready;
  assign rd = nd & ready;

  // Expected flits per (input, output) pair, in order, and a log of reads.
  logic [FW-1:0] expq [NPORTS][NPORTS][$];   // [input][output]
  int got [NPORTS];
  int order_log[$];
  int cyc_log[$];

  // Scoreboard on reads.
  always @(posedge clk) if (rst_n) begin
    for (int o = 0; o < NPORTS; o++) if (rd[o]) begin
      int ip;
      ip = int'(dout[o][D-1 -: 3]);
      order_log.push_back(o * 16 + ip);
      cyc_log.push_back(cycle);
      checks++;
      if (expq[ip][o].size() == 0) begin
        failures++; $display("FAIL unexpected flit on output %0d from input %0d", o, ip);
      end else begin
        logic [FW-1:0] e;
        e = expq[ip][o].pop_front();
        if (e != dout[o]) begin
          failures++;
          $display("FAIL input %0d output %0d: expected flit %h, got %h", ip, o, e, dout[o]);
        end
      end
      got[o]++;
    end
  end

  // Drive one flit on input p, starting at a falling edge: WR is held until a
  // rising edge where WAIT was low; returns at the next falling edge.
  task automatic send(int p, logic [FW-1:0] f, int out);
    din[p] = f; wr[p] = 1;
    expq[p][out].push_back(f);
    forever begin
      #1;
      if (!wait_o[p]) break;
      @(negedge clk);
    end
    @(negedge clk);
    wr[p] = 0;
  endtask

  int t0, tnd;
  int seqn [NPORTS];
  int run, maxrun_ww, maxrun_ne, last;

  initial begin
    wr = '0; ready = '0; wr5 = '0;
    foreach (din[i]) din[i] = '0;
    foreach (din5[i]) din5[i] = '0;
    foreach (seqn[i]) seqn[i] = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    // 1. latency: NE input -> destination (3,1) -> EE output.
    @(negedge clk);
    din[1] = mk(1, 0, 3, 1, 0); wr[1] = 1; expq[1][2].push_back(din[1]);
    t0 = cycle;
    @(negedge clk); wr[1] = 0;
    while (!nd[2]) @(negedge clk);
    tnd = cycle;
    check(tnd - t0 == 2, $sformatf("router latency %0d cycles, expected 2", tnd - t0));
    ready[2] = 1;
    @(negedge clk); ready[2] = 0;
    repeat (2) @(negedge clk);

    // 2. interleaving: NE, SE, SW each send 6 flits to local port NW (dst 1,1,7).
    order_log.delete(); cyc_log.delete();
    ready[7] = 1;
    @(negedge clk);
    fork
      for (int k = 0; k < 6; k++) send(1, mk(1, 100 + k, 1, 1, 7), 7);
      for (int k = 0; k < 6; k++) send(3, mk(3, 100 + k, 1, 1, 7), 7);
      for (int k = 0; k < 6; k++) send(5, mk(5, 100 + k, 1, 1, 7), 7);
    join
    repeat (20) @(negedge clk);
    check(order_log.size() == 18, $sformatf("18 interleaved flits delivered, got %0d", order_log.size()));
    for (int k = 1; k < order_log.size(); k++)
      check(order_log[k] != order_log[k-1], "consecutive flits from different inputs (interleaved)");
    // The shared output moves one flit every two cycles, so each of the three
    // flows gets a flit every 2N = 6 cycles (header bound of the paper's Eq. 6).
    for (int k = 1; k < cyc_log.size(); k++)
      check(cyc_log[k] - cyc_log[k-1] == 2, $sformatf("output rate: %0d cycles between flits", cyc_log[k] - cyc_log[k-1]));
    for (int k = 3; k < cyc_log.size(); k++)
      check(cyc_log[k] - cyc_log[k-3] == 6, "each flow served every 6 cycles");
    ready = '0;

    // 3. mesh burst: WW and NE both stream to local port SW (dst 1,1,5).
    order_log.delete();
    ready[5] = 1;
    @(negedge clk);
    fork
      for (int k = 0; k < 8; k++) send(6, mk(6, 200 + k, 1, 1, 5), 5);
      for (int k = 0; k < 8; k++) send(1, mk(1, 200 + k, 1, 1, 5), 5);
    join
    repeat (20) @(negedge clk);
    run = 0; last = -1; maxrun_ww = 0; maxrun_ne = 0;
    foreach (order_log[k]) begin
      if (order_log[k] == last) run++; else run = 1;
      last = order_log[k];
      if (last % 16 == 6 && run > maxrun_ww) maxrun_ww = run;
      if (last % 16 == 1 && run > maxrun_ne && k < 12) maxrun_ne = run;
    end
    check(maxrun_ww == MB + 1, $sformatf("WW burst of %0d flits, expected %0d", maxrun_ww, MB + 1));
    check(maxrun_ne == 1, "local input sends one flit per turn while WW waits");
    ready = '0;

    // 5. five-channel router: missing channels hold WAIT high and never raise
    // ND; the built ones forward with the same two-cycle latency.
    @(negedge clk);
    for (int i = 0; i < 8; i++) check(wait5[i] == !EN5[i], $sformatf("5-channel router: WAIT of port %0d", i));
    din5[6] = mk(6, 7, 1, 1, 1); wr5[6] = 1;    // from WW to local NE
    din5[1] = mk(1, 8, 1, 3, 0); wr5[1] = 1;    // from NE northwards
    t0 = cycle;
    @(negedge clk); wr5 = '0;
    @(negedge clk);
    check(cycle - t0 == 2 && nd5[1] && dout5[1] == mk(6, 7, 1, 1, 1), "5-channel router: WW to NE in 2 cycles");
    check(nd5[0] && dout5[0] == mk(1, 8, 1, 3, 0), "5-channel router: NE to NN in 2 cycles");
    check((nd5 & ~EN5) == '0, "5-channel router: no ND on missing channels");

    // 4. random traffic.
    fork
      begin
        for (int c = 0; c < 6000; c++) begin
          @(negedge clk);
          ready = 8'($urandom);
        end
      end
      for (int p = 0; p < 8; p++) begin
        automatic int pp = p;
        fork
          for (int k = 0; k < 150; k++) begin
            int dx, dy, dh;
            dx = $urandom_range(0, 3); dy = $urandom_range(0, 3); dh = $urandom_range(0, 7);
            repeat ($urandom_range(0, 3)) @(negedge clk);
            send(pp, mk(pp, k, dx, dy, dh), xy(dx, dy, dh));
          end
        join_none
      end
    join
    ready = '1;
    repeat (20) @(negedge clk);
    for (int p = 0; p < 8; p++) for (int o = 0; o < 8; o++)
      check(expq[p][o].size() == 0, $sformatf("all flits of input %0d to output %0d delivered", p, o));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
