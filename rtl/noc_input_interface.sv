// noc_input_interface: the input side of one router channel.
//
// A single flit register. A flit offered on DIN with the WR strobe is taken when
// WAIT is low; the register then holds it (valid=1) while the routing and
// arbitration logic decide where it goes. When the arbiter of the requested
// output grants it (release_i), the register is emptied at the next clock edge.
// WAIT is high while the register holds a flit that has not been granted; in the
// cycle of the grant it is already low, so a new flit may be written in the same
// cycle that the old one leaves (one flit per cycle per input at best).
//
// Timing: WR with WAIT=0 in cycle t puts the flit in the register from cycle t+1.
// The single register and the WAIT/WR handshake follow the paper; dropping WAIT in
// the grant cycle (rather than one cycle later) is this design's choice.
// Reset: synchronous, active low, empties the register.
module noc_input_interface
  import noc_pkg::*;
#(
  parameter int unsigned P = 1,
  parameter int unsigned D = 32
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // channel side (Fig. 2 input channel)
  input  logic [flit_w(P,D)-1:0] din,
  input  logic                   wr,
  output logic                   wait_o,
  // router side
  input  logic                   release_i,
  output logic                   valid_o,
  output logic [flit_w(P,D)-1:0] flit_o
);

  logic                   valid_q;
  logic [flit_w(P,D)-1:0] flit_q;

  assign wait_o  = valid_q && !release_i;
  assign valid_o = valid_q;
  assign flit_o  = flit_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      valid_q <= 1'b0;
      flit_q  <= '0;
    end else if (wr && !wait_o) begin
      valid_q <= 1'b1;
      flit_q  <= din;
    end else if (release_i) begin
      valid_q <= 1'b0;
    end
  end

  // A grant can only release a flit that is present.
  a_release_valid : assert property (@(posedge clk) disable iff (!rst_n) release_i |-> valid_q);

endmodule
