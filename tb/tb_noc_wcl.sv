// tb_noc_wcl: the latency workload of the design's analysis, scaled for
// simulation, on a 4x4 mesh (P=2).
//
// The packet under analysis (100 flits) goes from core SW of router (0,0) to
// core SE of router (3,0): an XY path through four routers. Two other packets
// from cores NW and WW of router (0,0) go to the same destination core, so all
// three compete at every router of the path. The competing packets have 0, 100,
// 400 and 1600 flits in four runs (the analysis sweeps 0 to 64k flits).
// Latency is counted from the cycle the header is written by the sending core to
// the cycle the tail is read by the destination core, which reads every cycle.
// Checks:
//  * without competition the packet takes about two cycles per flit plus the
//    path: between 2f and 2f + 2H + 2B + 8 cycles;
//  * with two competitors at least as long, the latency roughly triples and is
//    the same whatever their length (within 10 cycles);
//  * every run stays within the bound sum_i 2*N_i + 2*k*(f-1) + 2*B with H=4
//    routers, N_i=3, k=3 packets sharing the destination, f=100, B=4.
module tb_noc_wcl;
  import noc_pkg::*;
  localparam int unsigned P = 2, D = 32, K = 4, NR = 16, AW = 2 * P + 3, B = 4;
  localparam int F = 100, H = 4;

  logic clk = 0, rst_n = 0;
  logic         core_wr      [NR][NPORTS];
  logic         core_c       [NR][NPORTS];
  logic [AW-1:0] core_dst    [NR][NPORTS];
  logic [D-1:0] core_data    [NR][NPORTS];
  logic         core_full    [NR][NPORTS];
  logic         core_rd      [NR][NPORTS];
  logic         core_empty   [NR][NPORTS];
  logic         core_rx_c    [NR][NPORTS];
  logic [AW-1:0] core_rx_ori [NR][NPORTS];
  logic [D-1:0] core_rx_data [NR][NPORTS];
  logic         misrouted;
  int checks = 0, failures = 0;

  noc_top #(.P(P), .D(D), .B_SIZE(B)) dut (.*);

  always #5 clk = ~clk;
  int cycle = 0;
  always @(posedge clk) cycle++;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s at cycle %0d", what, cycle); end
  endtask

  // Destination: router 3 = (3,0), port SE. Sources on router 0: SW (analysed), NW, WW.
  localparam int DR = 3, DP = 3;
  localparam logic [AW-1:0] DST = {2'd3, 2'd0, 3'd3};

  task automatic send_packet(int p, int len, int tag);
    for (int f = 0; f < len; f++) begin
      core_c[0][p]    = (f == 0) || (f == len - 1);
      core_dst[0][p]  = DST;
      core_data[0][p] = {8'(tag), 24'(f)};
      core_wr[0][p]   = 1;
      #1;
      while (core_full[0][p]) begin @(negedge clk); #1; end
      @(negedge clk);
    end
    core_wr[0][p] = 0;
  endtask

  int t_start, t_end, got_tail;
  int lat[4];
  int others[4] = '{0, 100, 400, 1600};

  // Destination reads every cycle; remember when the analysed packet's tail arrives.
  always @(posedge clk) if (rst_n) begin
    if (core_rd[DR][DP] && !core_empty[DR][DP] && core_rx_data[DR][DP][31:24] == 8'hA5 &&
        core_rx_data[DR][DP][23:0] == 24'(F - 1)) begin
      t_end = cycle;
      got_tail = 1;
    end
  end

  int bound;
  initial begin
    for (int r = 0; r < NR; r++) for (int p = 0; p < NPORTS; p++) begin
      core_wr[r][p] = 0; core_c[r][p] = 0; core_dst[r][p] = '0; core_data[r][p] = '0;
      core_rd[r][p] = 0;
    end
    bound = 2 * 3 * H + 2 * 3 * (F - 1) + 2 * B;
    foreach (others[run]) begin
      rst_n = 0;
      repeat (3) @(posedge clk);
      @(negedge clk) rst_n = 1;
      core_rd[DR][DP] = 1;
      got_tail = 0;
      t_start = cycle;
      fork
        send_packet(5, F, 8'hA5);                       // SW: analysed packet
        if (others[run] > 0) send_packet(7, others[run], 8'h01);  // NW
        if (others[run] > 0) send_packet(6, others[run], 8'h02);  // WW
      join
      while (!got_tail) @(negedge clk);
      lat[run] = t_end - t_start;
      // let the competitors drain before the next run
      repeat (2 * 2 * others[run] + 50) @(negedge clk);
      check(core_empty[DR][DP], "destination drained");
      $display("competitors of %0d flits: analysed packet latency %0d cycles (bound %0d)",
               others[run], lat[run], bound);
      check(lat[run] <= bound, "latency within the worst-case bound");
    end
    check(lat[0] >= 2 * F && lat[0] <= 2 * F + 2 * H + 2 * B + 8, "uncontended latency near 2 cycles per flit");
    check(lat[1] > 2 * lat[0] && lat[1] <= 3 * lat[0] + 20, "three flows: latency grows about three times");
    check(lat[2] - lat[1] <= 10 && lat[1] - lat[2] <= 10 && lat[3] - lat[1] <= 10 && lat[1] - lat[3] <= 10,
          "latency independent of the competitors' length");
    check(!misrouted, "no misrouted flit");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
