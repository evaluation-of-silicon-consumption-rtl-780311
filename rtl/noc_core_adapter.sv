// noc_core_adapter: core side of a network interface.
//
// Transmit: the core offers a word with core_wr: a control bit (1 for a header
// or tail flit, 0 for payload), the destination address (router X, Y and port
// H) and the data word. The adapter appends this NI's own address as the origin,
// builds the flit C | origin | destination | data and pushes it into the Output
// FIFO. core_full (the FIFO's full flag) tells the core to hold off; a write
// while full is not taken.
// Receive: the head of the Input FIFO is shown to the core as control bit,
// origin address and data; core_empty says nothing is there and core_rd pops it.
//
// Combinational. Flit assembly and the empty/full handshake follow the paper;
// the core-side signal names are this design's.
module noc_core_adapter
  import noc_pkg::*;
#(
  parameter int unsigned P = 1,
  parameter int unsigned D = 32
) (
  input  logic [P-1:0]           my_x,
  input  logic [P-1:0]           my_y,
  input  logic [PORT_W-1:0]      my_h,
  // core transmit side
  input  logic                   core_wr,
  input  logic                   core_c,
  input  logic [addr_w(P)-1:0]   core_dst,
  input  logic [D-1:0]           core_data,
  output logic                   core_full,
  // core receive side
  input  logic                   core_rd,
  output logic                   core_empty,
  output logic                   core_rx_c,
  output logic [addr_w(P)-1:0]   core_rx_ori,
  output logic [D-1:0]           core_rx_data,
  // Output FIFO write side
  output logic                   tx_push,
  output logic [flit_w(P,D)-1:0] tx_flit,
  input  logic                   tx_full,
  // Input FIFO read side
  input  logic [rx_w(P,D)-1:0]   rx_word,
  input  logic                   rx_empty,
  output logic                   rx_pop
);

  `include "noc_flit.svh"
  `NOC_FLIT_TYPES

  flit_t    f;
  rx_word_t w;

  always_comb begin
    f.c          = core_c;
    f.ori        = addr_t'{x: my_x, y: my_y, h: my_h};
    f.dst        = addr_t'(core_dst);
    f.data       = core_data;
    tx_flit      = f;
    tx_push      = core_wr && !tx_full;
    core_full    = tx_full;

    w            = rx_word_t'(rx_word);
    core_rx_c    = w.c;
    core_rx_ori  = w.ori;
    core_rx_data = w.data;
    core_empty   = rx_empty;
    rx_pop       = core_rd && !rx_empty;
  end

endmodule
