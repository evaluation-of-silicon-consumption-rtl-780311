// noc_network_interface: network interface between one core and one router
// channel.
//
// Core adapter -> Output FIFO -> router adapter -> router (transmit), and
// router -> router adapter -> Input FIFO -> core adapter -> core (receive). Both
// FIFOs hold B_SIZE words; the transmit FIFO stores whole flits, the receive FIFO
// stores flits without their destination address. The FIFOs' empty/full flags
// are the end-to-end flow control: WAIT towards the router is the Input FIFO's
// full flag, and core_full / core_empty are shown to the core.
//
// Timing: a word written by the core in cycle t is offered to the router (ND)
// from cycle t+1; a flit written by the router in cycle t is visible to the core
// from cycle t+1. The structure is the paper's; B_SIZE=4 is this design's
// default. Reset: synchronous, active low.
module noc_network_interface
  import noc_pkg::*;
#(
  parameter int unsigned P      = 1,
  parameter int unsigned D      = 32,
  parameter int unsigned B_SIZE = 4
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [P-1:0]           my_x,
  input  logic [P-1:0]           my_y,
  input  logic [PORT_W-1:0]      my_h,
  // core side
  input  logic                   core_wr,
  input  logic                   core_c,
  input  logic [addr_w(P)-1:0]   core_dst,
  input  logic [D-1:0]           core_data,
  output logic                   core_full,
  input  logic                   core_rd,
  output logic                   core_empty,
  output logic                   core_rx_c,
  output logic [addr_w(P)-1:0]   core_rx_ori,
  output logic [D-1:0]           core_rx_data,
  // network side: input channel (from the router) and output channel (to it)
  input  logic [flit_w(P,D)-1:0] din,
  input  logic                   wr,
  output logic                   wait_o,
  output logic [flit_w(P,D)-1:0] dout,
  output logic                   nd,
  input  logic                   rd,
  output logic                   misrouted
);

  localparam int unsigned FW = flit_w(P, D);
  localparam int unsigned QW = rx_w(P, D);

  logic          tx_push, tx_pop, tx_full, tx_empty;
  logic [FW-1:0] tx_in, tx_out;
  logic          rx_push, rx_pop, rx_full, rx_empty;
  logic [QW-1:0] rx_in, rx_out;
  logic [$clog2(B_SIZE+1)-1:0] tx_count, rx_count;  // fill levels, observed by testbenches

  noc_core_adapter #(.P(P), .D(D)) u_core (
    .my_x, .my_y, .my_h,
    .core_wr, .core_c, .core_dst, .core_data, .core_full,
    .core_rd, .core_empty, .core_rx_c, .core_rx_ori, .core_rx_data,
    .tx_push, .tx_flit(tx_in), .tx_full,
    .rx_word(rx_out), .rx_empty, .rx_pop
  );

  noc_fifo #(.DEPTH(B_SIZE), .W(FW)) u_out_fifo (
    .clk, .rst_n, .push(tx_push), .din(tx_in), .pop(tx_pop), .dout(tx_out),
    .empty(tx_empty), .full(tx_full), .count(tx_count)
  );

  noc_fifo #(.DEPTH(B_SIZE), .W(QW)) u_in_fifo (
    .clk, .rst_n, .push(rx_push), .din(rx_in), .pop(rx_pop), .dout(rx_out),
    .empty(rx_empty), .full(rx_full), .count(rx_count)
  );

  noc_router_adapter #(.P(P), .D(D)) u_radp (
    .clk, .rst_n, .my_x, .my_y, .my_h,
    .din, .wr, .wait_o, .dout, .nd, .rd,
    .rx_push, .rx_data(rx_in), .rx_full,
    .tx_data(tx_out), .tx_empty, .tx_pop, .misrouted
  );

endmodule
