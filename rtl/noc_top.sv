// noc_top: the complete Network-on-Chip - a K x K mesh (K = 2^P by default) of
// eight-channel routers with a network interface on every channel that does not
// lead to a neighbouring router.
//
// Router r sits at x = r mod K, y = r div K (router 0 in the south-west
// corner, X growing east, Y growing north). Its NN, EE, SS and WW channels are
// tied to the facing channel of the neighbouring router where there is one; all
// other channels, including mesh channels on the edge of the mesh, hold a
// network interface and so a core. Each router is told which of its ports
// lead to other routers (MESH_MASK), so only those get the mesh-input priority. With the default P=1 this is the 2x2 mesh of
// four routers and 24 cores (six per router).
//
// Links: an output channel drives the facing input channel with WR = ND and
// DIN = DOUT, and is read (RD) in any cycle where ND is high and the receiver's
// WAIT is low. The same rule ties routers to network interfaces.
//
// PORT_EN leaves channels out of every router (the routers can be built with
// five to eight channels); a left-out port has no core (core_full stays high).
// K below 2^P builds meshes whose side is not a power of two: P=2, K=3 and
// PORT_EN = 8'b0101_0111 give the 3x3 mesh of five-channel routers (21 core
// ports) that the paper compares the eight-channel 2x2 mesh with.
// Core ports are arrays indexed [router][port]. Entries at ports that lead to a
// neighbouring router have no core: their inputs are ignored and their outputs
// are zero. The address a core writes into core_dst is {X, Y, H} of the target
// core. The mesh and the eight-channel routers follow the paper; the link rule
// and the array indexing are this design's.
module noc_top
  import noc_pkg::*;
#(
  parameter int unsigned P          = 1,
  parameter int unsigned D          = 32,
  parameter int unsigned B_SIZE     = 4,
  parameter int unsigned MESH_BURST = 1,
  // channels built in every router (ports linked to a neighbour are always built)
  parameter logic [NPORTS-1:0] PORT_EN = 8'hFF,
  // routers per side of the mesh; at most 2^P, since X and Y are P bits wide
  parameter int unsigned K          = 1 << P,
  localparam int unsigned NR        = K * K,
  localparam int unsigned AW        = 2 * P + 3
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         core_wr      [NR][NPORTS],
  input  logic         core_c       [NR][NPORTS],
  input  logic [AW-1:0] core_dst    [NR][NPORTS],
  input  logic [D-1:0] core_data    [NR][NPORTS],
  output logic         core_full    [NR][NPORTS],
  input  logic         core_rd      [NR][NPORTS],
  output logic         core_empty   [NR][NPORTS],
  output logic         core_rx_c    [NR][NPORTS],
  output logic [AW-1:0] core_rx_ori [NR][NPORTS],
  output logic [D-1:0] core_rx_data [NR][NPORTS],
  output logic         misrouted
);

  localparam int unsigned FW = flit_w(P, D);

  // Router channel signals.
  logic [FW-1:0]     r_din  [NR][NPORTS];
  logic [NPORTS-1:0] r_wr   [NR];
  logic [NPORTS-1:0] r_wait [NR];
  logic [FW-1:0]     r_dout [NR][NPORTS];
  logic [NPORTS-1:0] r_nd   [NR];
  logic [NPORTS-1:0] r_rd   [NR];
  logic [NPORTS-1:0] ni_mis [NR];
  logic [15:0]       r_wait_cycles [NR][NPORTS];  // observed by testbenches

  function automatic int neighbour(int r, int p);
    int x, y;
    x = r % K;
    y = r / K;
    if (p == int'(PORT_NN)) return (y < K - 1) ? r + K : -1;
    if (p == int'(PORT_SS)) return (y > 0)     ? r - K : -1;
    if (p == int'(PORT_EE)) return (x < K - 1) ? r + 1 : -1;
    if (p == int'(PORT_WW)) return (x > 0)     ? r - 1 : -1;
    return -1;
  endfunction

  function automatic logic [NPORTS-1:0] mesh_mask(int r);
    logic [NPORTS-1:0] m = '0;
    for (int p = 0; p < NPORTS; p++) m[p] = (neighbour(r, p) >= 0);
    return m;
  endfunction

  function automatic int opposite(int p);
    return (p + 4) % 8;
  endfunction

  for (genvar r = 0; r < NR; r++) begin : g_r
    noc_router #(.P(P), .D(D), .MESH_BURST(MESH_BURST), .MESH_MASK(mesh_mask(r)),
                 .PORT_EN(PORT_EN | mesh_mask(r))) u_router (
      .clk, .rst_n,
      .x_id(P'(r % K)), .y_id(P'(r / K)),
      .din(r_din[r]), .wr(r_wr[r]), .wait_o(r_wait[r]),
      .dout(r_dout[r]), .nd(r_nd[r]), .rd(r_rd[r]), .wait_cycles(r_wait_cycles[r])
    );

    for (genvar p = 0; p < NPORTS; p++) begin : g_p
      localparam int NB = neighbour(r, p);
      if (NB >= 0) begin : g_link
        localparam int OP = opposite(p);
        // This input is fed by the neighbour's facing output.
        assign r_din[r][p] = r_dout[NB][OP];
        assign r_wr[r][p]  = r_nd[NB][OP];
        // This output is read when the neighbour's input can take it.
        assign r_rd[r][p]  = r_nd[r][p] && !r_wait[NB][OP];
        assign ni_mis[r][p]       = 1'b0;
        assign core_full[r][p]    = 1'b0;
        assign core_empty[r][p]   = 1'b1;
        assign core_rx_c[r][p]    = 1'b0;
        assign core_rx_ori[r][p]  = '0;
        assign core_rx_data[r][p] = '0;
      end else if (!PORT_EN[p]) begin : g_none
        // Channel not built: no core here.
        assign r_din[r][p]        = '0;
        assign r_wr[r][p]         = 1'b0;
        assign r_rd[r][p]         = 1'b0;
        assign ni_mis[r][p]       = 1'b0;
        assign core_full[r][p]    = 1'b1;
        assign core_empty[r][p]   = 1'b1;
        assign core_rx_c[r][p]    = 1'b0;
        assign core_rx_ori[r][p]  = '0;
        assign core_rx_data[r][p] = '0;
      end else begin : g_ni
        logic [FW-1:0] ni_dout;
        logic          ni_nd, ni_wait;
        noc_network_interface #(.P(P), .D(D), .B_SIZE(B_SIZE)) u_ni (
          .clk, .rst_n,
          .my_x(P'(r % K)), .my_y(P'(r / K)), .my_h(PORT_W'(p)),
          .core_wr(core_wr[r][p]), .core_c(core_c[r][p]), .core_dst(core_dst[r][p]),
          .core_data(core_data[r][p]), .core_full(core_full[r][p]),
          .core_rd(core_rd[r][p]), .core_empty(core_empty[r][p]),
          .core_rx_c(core_rx_c[r][p]), .core_rx_ori(core_rx_ori[r][p]),
          .core_rx_data(core_rx_data[r][p]),
          .din(r_dout[r][p]), .wr(r_nd[r][p]), .wait_o(ni_wait),
          .dout(ni_dout), .nd(ni_nd), .rd(ni_nd && !r_wait[r][p]),
          .misrouted(ni_mis[r][p])
        );
        assign r_din[r][p] = ni_dout;
        assign r_wr[r][p]  = ni_nd;
        assign r_rd[r][p]  = r_nd[r][p] && !ni_wait;
      end
    end
  end

  if (K < 1 || K > (1 << P)) begin : g_bad_k
    $error("noc_top: K must lie between 1 and 2^P");
  end

  always_comb begin
    misrouted = 1'b0;
    for (int r = 0; r < NR; r++) misrouted |= |ni_mis[r];
  end

endmodule
