// noc_router: eight-channel connectionless router.
//
// Each of the eight channels (NN, NE, EE, SE, SS, SW, WW, NW) has an input
// interface, a flow controller and a routing controller on its input side, and
// an arbiter and an output interface on its output side. An allocator and an
// 8x8 crossbar connect them. There is no packet state: every flit carries its own
// destination and is routed on its own (XY routing), and flits of different
// packets that share an output are interleaved by the arbiter.
//
// Timing (no contention): a flit written on an input with WR in cycle t sits in
// the input register in cycle t+1, is routed, arbitrated and switched in that
// cycle, and is offered with ND on the output in cycle t+2 - two clock cycles.
// An output moves at most one flit every two cycles (it is free again the cycle
// after its read). Everything is on the rising clock edge.
//
// PORT_EN chooses which of the eight channels are built (five to eight in the
// published design); a missing channel holds WAIT high and ND low, and its
// ports are ignored. Channel ports (index = port code): din/wr/wait_o form the input channel,
// dout/nd/rd the output channel, as in the paper's physical channel. x_id/y_id
// give the router's mesh coordinates; MESH_MASK marks the ports that lead to
// other routers (their inputs get the arbiter's burst privilege); wait_cycles reports, per input, how long
// the flit held there has waited for its output (0 in its first cycle). Block structure and two-cycle latency follow
// the paper; the paper updates the arbiter on the falling edge, this design does
// not use the falling edge.
module noc_router
  import noc_pkg::*;
#(
  parameter int unsigned P          = 1,
  parameter int unsigned D          = 32,
  parameter int unsigned MESH_BURST = 1,
  // ports linked to neighbouring routers (default: NN, EE, SS, WW)
  parameter logic [NPORTS-1:0] MESH_MASK = 8'b0101_0101,
  // channels that exist; the router can be built with five to eight
  parameter logic [NPORTS-1:0] PORT_EN   = 8'hFF
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [P-1:0]           x_id,
  input  logic [P-1:0]           y_id,
  // input channels
  input  logic [flit_w(P,D)-1:0] din    [NPORTS],
  input  logic [NPORTS-1:0]      wr,
  output logic [NPORTS-1:0]      wait_o,
  // output channels
  output logic [flit_w(P,D)-1:0] dout   [NPORTS],
  output logic [NPORTS-1:0]      nd,
  input  logic [NPORTS-1:0]      rd,
  // per input: cycles the flit in the input register has waited for its grant
  output logic [15:0]            wait_cycles [NPORTS]
);

  localparam int unsigned FW = flit_w(P, D);

  logic [FW-1:0]     in_flit  [NPORTS];
  logic [NPORTS-1:0] in_valid;
  logic [NPORTS-1:0] in_release;
  logic [NPORTS-1:0] fc_req;
  logic [P-1:0]      fc_x     [NPORTS];
  logic [P-1:0]      fc_y     [NPORTS];
  logic [PORT_W-1:0] fc_h     [NPORTS];
  logic [NPORTS-1:0] rt_req   [NPORTS];   // [input][output]
  logic [PORT_W-1:0] rt_port  [NPORTS];
  logic [NPORTS-1:0] arb_req  [NPORTS];   // [output][input]
  logic [NPORTS-1:0] arb_valid;
  logic [PORT_W-1:0] arb_idx  [NPORTS];
  logic [NPORTS-1:0] out_free;
  logic [PORT_W-1:0] xbar_sel [NPORTS];
  logic [NPORTS-1:0] out_load;
  logic [NPORTS-1:0] in_grant;
  logic [PORT_W-1:0] in_to_out[NPORTS];
  logic [FW-1:0]     xbar_out [NPORTS];

  for (genvar i = 0; i < NPORTS; i++) begin : g_in
    if (PORT_EN[i]) begin : g_on
      noc_input_interface #(.P(P), .D(D)) u_in (
        .clk, .rst_n,
        .din(din[i]), .wr(wr[i]), .wait_o(wait_o[i]),
        .release_i(in_release[i]), .valid_o(in_valid[i]), .flit_o(in_flit[i])
      );
      noc_flow_control #(.P(P), .D(D)) u_fc (
        .clk, .rst_n,
        .valid_i(in_valid[i]), .flit_i(in_flit[i]),
        .req_o(fc_req[i]), .dst_x_o(fc_x[i]), .dst_y_o(fc_y[i]), .dst_h_o(fc_h[i]),
        .grant_i(in_grant[i]), .release_o(in_release[i]), .wait_cycles(wait_cycles[i])
      );
      noc_routing_control #(.P(P)) u_rt (
        .req_i(fc_req[i]), .dst_x(fc_x[i]), .dst_y(fc_y[i]), .dst_h(fc_h[i]),
        .my_x(x_id), .my_y(y_id), .out_req(rt_req[i]), .out_port(rt_port[i])
      );
    end else begin : g_off
      // Channel not built: never accepts a flit.
      assign wait_o[i]      = 1'b1;
      assign in_valid[i]    = 1'b0;
      assign in_flit[i]     = '0;
      assign in_release[i]  = 1'b0;
      assign fc_req[i]      = 1'b0;
      assign fc_x[i]        = '0;
      assign fc_y[i]        = '0;
      assign fc_h[i]        = '0;
      assign rt_req[i]      = '0;
      assign rt_port[i]     = '0;
      assign wait_cycles[i] = '0;
    end
  end

  always_comb begin
    for (int o = 0; o < NPORTS; o++)
      for (int i = 0; i < NPORTS; i++)
        arb_req[o][i] = rt_req[i][o];
  end

  for (genvar o = 0; o < NPORTS; o++) begin : g_out
    if (PORT_EN[o]) begin : g_on
      noc_arbiter_control #(.MESH_BURST(MESH_BURST), .MESH_MASK(MESH_MASK)) u_arb (
        .clk, .rst_n, .req(arb_req[o]), .out_free(out_free[o]),
        .grant_valid(arb_valid[o]), .grant_idx(arb_idx[o])
      );
      noc_output_interface #(.P(P), .D(D)) u_out (
        .clk, .rst_n, .load(out_load[o]), .din(xbar_out[o]), .free_o(out_free[o]),
        .nd(nd[o]), .dout(dout[o]), .rd(rd[o])
      );
    end else begin : g_off
      // Channel not built: never offers a flit; no flit may be routed here.
      assign arb_valid[o] = 1'b0;
      assign arb_idx[o]   = '0;
      assign out_free[o]  = 1'b0;
      assign nd[o]        = 1'b0;
      assign dout[o]      = '0;
      a_no_route_to_missing_port : assert property (@(posedge clk) disable iff (!rst_n)
        arb_req[o] == '0);
    end
  end

  noc_allocator u_alloc (
    .clk, .rst_n,
    .cmd_valid(arb_valid), .cmd_in(arb_idx),
    .xbar_sel, .out_load, .in_grant, .in_to_out
  );

  noc_crossbar #(.P(P), .D(D)) u_xbar (
    .in_flit(in_flit), .sel(xbar_sel), .out_flit(xbar_out)
  );

  // A granted input must be routed to the output that granted it.
  for (genvar i = 0; i < NPORTS; i++) begin : g_chk
    a_grant_matches_route : assert property (@(posedge clk) disable iff (!rst_n)
      in_grant[i] |-> (in_to_out[i] == rt_port[i]));
  end

endmodule
