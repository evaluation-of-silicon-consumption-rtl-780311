// tb_noc_mesh3: end-to-end test of the network the paper compares its 2x2 mesh
// with: a 3x3 mesh of five-channel routers (channels NN, NE, EE, SS, WW built),
// addressed with P=2 bit coordinates (K=3 routers per side), 32-bit data,
// and NI buffers of one word (B_SIZE=1, a single register each way).
// Ports that do not lead to a neighbour host a core: three per corner router,
// two per edge router and one on the centre router, 21 in all (the paper's
// drawing uses 20 of them).
//
// Traffic and checks are those of the full-size test: every core sends packets
// of 2..8 words to random cores while the readers alternate between slow and
// fast phases; each word must reach the addressed core only, with its origin
// and data intact and in order per pair of cores; no flit may be misrouted.
// Counted mechanisms (a failure if one never happens): router input held off
// by WAIT, router output held by a full NI Input FIFO, core held off by a full
// Output FIFO, interleaved packets on one output, mesh-input bursts, and
// routes in all four XY directions and to the same router. It also checks that
// the channels left out (SE, SW, NW) never carry a flit.
module tb_noc_mesh3;
  import noc_pkg::*;
  localparam int unsigned P = 2, D = 32, K = 3, NR = 9, AW = 7, FW = flit_w(P, D);
  localparam logic [NPORTS-1:0] PEN = 8'b0101_0111;
  localparam int NPKT = 30;

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

  noc_top #(.P(P), .K(K), .B_SIZE(1), .PORT_EN(PEN)) dut (.*);

  always #5 clk = ~clk;
  int cycle = 0;
  always @(posedge clk) cycle++;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s at cycle %0d", what, cycle); end
  endtask

  // Which (router, port) pairs hold a core: ports without a neighbour router.
  function automatic bit is_core(int r, int p);
    int x = r % K, y = r / K;
    if (!PEN[p]) return 0;
    if (p == 0 && y < K - 1) return 0;
    if (p == 4 && y > 0)     return 0;
    if (p == 2 && x < K - 1) return 0;
    if (p == 6 && x > 0)     return 0;
    return 1;
  endfunction

  int cores[$];   // r*8+p of each core
  logic [1+AW+D-1:0] expq [NR*NPORTS][NR*NPORTS][$];   // [src][dst]
  int sent = 0, recvd = 0;
  int n_east = 0, n_west = 0, n_north = 0, n_south = 0, n_local = 0;
  int n_in_stall = 0, n_ni_full = 0, n_core_full = 0, n_interleave = 0, n_burst = 0;

  function automatic logic [AW-1:0] addr_of(int id);
    int r = id / 8, p = id % 8;
    return {2'(r % K), 2'(r / K), 3'(p)};
  endfunction

  // Receivers: pop and compare.
  int rd_pct;
  bit senders_done = 0;
  always @(posedge clk) if (rst_n) begin
    for (int r = 0; r < NR; r++) for (int p = 0; p < NPORTS; p++) begin
      if (core_rd[r][p] && !core_empty[r][p]) begin
        int src, dst;
        dst = r * 8 + p;
        src = int'(core_rx_ori[r][p][6:5]) + K * int'(core_rx_ori[r][p][4:3]);
        src = src * 8 + int'(core_rx_ori[r][p][2:0]);
        checks++;
        if (expq[src][dst].size() == 0) begin
          failures++;
          $display("FAIL core %0d got unexpected word %h from %0d", dst, core_rx_data[r][p], src);
        end else if (expq[src][dst][0] != {core_rx_c[r][p], core_rx_ori[r][p], core_rx_data[r][p]}) begin
          failures++;
          $display("FAIL core %0d from %0d: expected %h got %h", dst, src, expq[src][dst][0],
                   {core_rx_c[r][p], core_rx_ori[r][p], core_rx_data[r][p]});
          void'(expq[src][dst].pop_front());
        end else begin
          void'(expq[src][dst].pop_front());
        end
        recvd++;
      end
    end
  end

  // Mechanism monitors.
  logic [AW-1:0] last_ori [NR][NPORTS];
  logic          last_tail [NR][NPORTS];
  always @(posedge clk) if (rst_n) begin
    for (int r = 0; r < NR; r++) for (int p = 0; p < NPORTS; p++) begin
      if (dut.r_wr[r][p] && dut.r_wait[r][p]) n_in_stall++;
      if (!PEN[p]) begin
        checks++;
        if (dut.r_wr[r][p] || dut.r_nd[r][p]) begin
          failures++;
          $display("FAIL left-out channel %0d of router %0d carries a flit", p, r);
        end
      end
      if (is_core(r, p) && dut.r_nd[r][p] && !dut.r_rd[r][p]) n_ni_full++;
      if (is_core(r, p) && core_wr[r][p] && core_full[r][p]) n_core_full++;
      if (dut.r_rd[r][p]) begin
        // flit layout: C | ori(7) | dst(7) | data
        if (!last_tail[r][p] && dut.r_dout[r][p][FW-2 -: AW] != last_ori[r][p]) n_interleave++;
        last_ori[r][p]  = dut.r_dout[r][p][FW-2 -: AW];
        // a C=1 flit that is not the first of its packet is a tail
        last_tail[r][p] = dut.r_dout[r][p][FW-1] && dut.r_dout[r][p][D-1 -: 8] == 8'hFF;
      end
    end
  end

  for (genvar r = 0; r < NR; r++) begin : g_mr
    for (genvar o = 0; o < NPORTS; o++) begin : g_mo
      if (PEN[o]) begin : g_en
      always @(posedge clk) if (rst_n) begin
        if (dut.g_r[r].u_router.g_out[o].g_on.u_arb.grant_valid &&
            !is_core(r, int'(dut.g_r[r].u_router.g_out[o].g_on.u_arb.grant_idx)) &&
            dut.g_r[r].u_router.g_out[o].g_on.u_arb.cnt_q[dut.g_r[r].u_router.g_out[o].g_on.u_arb.grant_idx] != 0)
          n_burst++;
      end
      end
    end
  end

  // Sender of one core: NPKT packets of 2..8 flits to random cores.
  // Data word: {source core (8), packet number (8), phase (8), flit number or FF for tail (8)}.
  task automatic sender(int id);
    int r = id / 8, p = id % 8;
    for (int k = 0; k < NPKT; k++) begin
      int dst, len, dr;
      dst = cores[$urandom_range(0, cores.size() - 1)];
      len = $urandom_range(2, 8);
      dr = dst / 8;
      if (dr % K > r % K) n_east++;
      else if (dr % K < r % K) n_west++;
      else if (dr / K > r / K) n_north++;
      else if (dr / K < r / K) n_south++;
      else n_local++;
      for (int f = 0; f < len; f++) begin
        logic [D-1:0] dw;
        dw = {8'(id), 8'(k), 8'($urandom), (f == len - 1) ? 8'hFF : 8'(f)};
        core_c[r][p]    = (f == 0) || (f == len - 1);
        core_dst[r][p]  = addr_of(dst);
        core_data[r][p] = dw;
        core_wr[r][p]   = 1;
        #1;
        while (core_full[r][p]) begin
          @(negedge clk);
          #1;
        end
        expq[id][dst].push_back({core_c[r][p], addr_of(id), dw});
        sent++;
        @(negedge clk);
        core_wr[r][p] = 0;
        repeat ($urandom_range(0, 2)) @(negedge clk);
      end
    end
  endtask

  initial begin
    for (int r = 0; r < NR; r++) for (int p = 0; p < NPORTS; p++) begin
      core_wr[r][p] = 0; core_c[r][p] = 0; core_dst[r][p] = '0; core_data[r][p] = '0;
      core_rd[r][p] = 0; last_ori[r][p] = '0; last_tail[r][p] = 1;
      if (is_core(r, p)) cores.push_back(r * 8 + p);
    end
    check(cores.size() == 21, "21 cores in the 3x3 mesh");
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    fork
      begin
        foreach (cores[i]) begin
          automatic int id = cores[i];
          fork sender(id); join_none
        end
        wait fork;
        senders_done = 1;
      end
      begin
        // Readers: slow and fast phases.
        while (1) begin
          @(negedge clk);
          rd_pct = ((cycle / 500) % 2) ? 90 : 15;
          for (int r = 0; r < NR; r++) for (int p = 0; p < NPORTS; p++)
            core_rd[r][p] = is_core(r, p) && ($urandom_range(0, 99) < rd_pct);
          if (senders_done && recvd == sent) break;
        end
      end
    join
    // Drain.
    for (int r = 0; r < NR; r++) for (int p = 0; p < NPORTS; p++) core_rd[r][p] = is_core(r, p);
    repeat (200) @(negedge clk);
    check(recvd == sent, $sformatf("received %0d of %0d words", recvd, sent));
    foreach (cores[i]) foreach (cores[j])
      check(expq[cores[i]][cores[j]].size() == 0, "nothing left undelivered");
    check(!misrouted, "no misrouted flit");
    $display("words %0d, cycles %0d", sent, cycle);
    $display("routes: east %0d west %0d north %0d south %0d local %0d", n_east, n_west, n_north, n_south, n_local);
    $display("router input stalls %0d, NI input full %0d, core output full %0d, interleavings %0d, mesh bursts %0d",
             n_in_stall, n_ni_full, n_core_full, n_interleave, n_burst);
    check(n_east > 0 && n_west > 0 && n_north > 0 && n_south > 0 && n_local > 0, "all XY directions used");
    check(n_in_stall > 0, "router input stall happened");
    check(n_ni_full > 0, "full NI Input FIFO held a router output");
    check(n_core_full > 0, "full Output FIFO held a core");
    check(n_interleave > 0, "flits of different packets interleaved");
    check(n_burst > 0, "mesh input burst happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
