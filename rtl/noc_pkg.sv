// noc_pkg: types and constants shared by the connectionless NoC.
//
// A flit is one word of a physical channel. From the most significant bit down
// it holds: the control bit C (1 = header or tail flit, 0 = payload), the origin
// address (X_ORI, Y_ORI, H_ORI), the destination address (X_DST, Y_DST, H_DST)
// and the data word. X and Y are P bits each, H is a 3-bit router port, so a
// flit is 1 + 2*(2P+3) + D bits wide (43 bits for P=1, D=32). Field order and
// widths follow the published packet format; putting C at the MSB is this
// design's choice.
//
// Port codes: the eight router channels carry compass names. Their 3-bit code
// (clockwise from north) is this design's choice; the field is 3 bits wide as
// published.
package noc_pkg;

  // Eight channels per router.
  localparam int unsigned NPORTS = 8;
  localparam int unsigned PORT_W = 3;

  typedef enum logic [PORT_W-1:0] {
    PORT_NN = 3'd0,
    PORT_NE = 3'd1,
    PORT_EE = 3'd2,
    PORT_SE = 3'd3,
    PORT_SS = 3'd4,
    PORT_SW = 3'd5,
    PORT_WW = 3'd6,
    PORT_NW = 3'd7
  } port_e;

  // Address width of one endpoint: 2P + 3.
  function automatic int unsigned addr_w(int unsigned p);
    return 2 * p + PORT_W;
  endfunction

  // Flit width: 1 + 2(2P+3) + D.
  function automatic int unsigned flit_w(int unsigned p, int unsigned d);
    return 1 + 2 * addr_w(p) + d;
  endfunction

  // Width of a word in the NI's Input FIFO: destination removed, C + origin + data.
  function automatic int unsigned rx_w(int unsigned p, int unsigned d);
    return 1 + addr_w(p) + d;
  endfunction

endpackage
