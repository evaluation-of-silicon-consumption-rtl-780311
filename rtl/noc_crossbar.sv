// noc_crossbar: 8x8 flit crossbar switch.
//
// Eight 8:1 multiplexers, one per output; output o carries the flit of input
// sel[o]. No clock: the switching happens within the cycle. Because each output
// has its own multiplexer, every output sees exactly one input, while the
// allocator guarantees that an input feeds at most one loaded output. This
// structure is the paper's.
module noc_crossbar
  import noc_pkg::*;
#(
  parameter int unsigned P = 1,
  parameter int unsigned D = 32
) (
  input  logic [flit_w(P,D)-1:0] in_flit  [NPORTS],
  input  logic [PORT_W-1:0]      sel      [NPORTS],
  output logic [flit_w(P,D)-1:0] out_flit [NPORTS]
);

  always_comb begin
    for (int o = 0; o < NPORTS; o++) out_flit[o] = in_flit[sel[o]];
  end

endmodule
