// noc_flit.svh: flit and address types, declared inside a module that has
// the int unsigned parameters P (bits per X/Y coordinate) and D (data width).
// Layout from MSB: C, X_ORI, Y_ORI, H_ORI, X_DST, Y_DST, H_DST, DATA.
`ifndef NOC_FLIT_SVH
`define NOC_FLIT_SVH
`define NOC_FLIT_TYPES \
  typedef struct packed { \
    logic [P-1:0]              x; \
    logic [P-1:0]              y; \
    logic [noc_pkg::PORT_W-1:0] h; \
  } addr_t; \
  typedef struct packed { \
    logic         c; \
    addr_t        ori; \
    addr_t        dst; \
    logic [D-1:0] data; \
  } flit_t; \
  typedef struct packed { \
    logic         c; \
    addr_t        ori; \
    logic [D-1:0] data; \
  } rx_word_t;
`endif
