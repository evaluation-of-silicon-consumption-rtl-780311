// noc_router_adapter: network side of a network interface.
//
// Transmit: the head of the Output FIFO is presented to the router as the NI's
// output channel: ND is high while the FIFO is not empty, DOUT is the head flit,
// and a read strobe RD pops it.
// Receive: a flit arriving on the NI's input channel (DIN with WR) is written into
// the Input FIFO with its destination address removed, i.e. as C, origin address
// and data (q = 1 + 2P+3 + D bits). WAIT is the Input FIFO's full flag, so a full
// buffer back-pressures the network (end-to-end flow control).
// A flit whose destination is not this NI's own address is flagged (misrouted),
// and an assertion fails; a correct network never raises it.
//
// Combinational apart from the FIFOs it drives. Removal of the destination
// fields and the FIFO empty/full flow control follow the paper; the misroute
// check is this design's addition.
module noc_router_adapter
  import noc_pkg::*;
#(
  parameter int unsigned P = 1,
  parameter int unsigned D = 32
) (
  input  logic                   clk,    // used by the assertion only
  input  logic                   rst_n,
  input  logic [P-1:0]           my_x,
  input  logic [P-1:0]           my_y,
  input  logic [PORT_W-1:0]      my_h,
  // input channel from the router
  input  logic [flit_w(P,D)-1:0] din,
  input  logic                   wr,
  output logic                   wait_o,
  // output channel to the router
  output logic [flit_w(P,D)-1:0] dout,
  output logic                   nd,
  input  logic                   rd,
  // Input FIFO write side
  output logic                   rx_push,
  output logic [rx_w(P,D)-1:0]   rx_data,
  input  logic                   rx_full,
  // Output FIFO read side
  input  logic [flit_w(P,D)-1:0] tx_data,
  input  logic                   tx_empty,
  output logic                   tx_pop,
  output logic                   misrouted
);

  `include "noc_flit.svh"
  `NOC_FLIT_TYPES

  flit_t    f;
  rx_word_t w;

  always_comb begin
    f         = flit_t'(din);
    w.c       = f.c;
    w.ori     = f.ori;
    w.data    = f.data;
    rx_data   = w;
    wait_o    = rx_full;
    rx_push   = wr && !rx_full;
    misrouted = rx_push && (f.dst != addr_t'{x: my_x, y: my_y, h: my_h});
    nd        = !tx_empty;
    dout      = tx_data;
    tx_pop    = rd && !tx_empty;
  end

  a_not_misrouted : assert property (@(posedge clk) disable iff (!rst_n) !misrouted);

endmodule
