// noc_flow_control: flow controller of one router input.
//
// It watches the input register. While the register holds a flit it extracts the
// destination fields (X_DST, Y_DST, H_DST) and presents them, with a request
// strobe, to the routing controller. When the arbiter of the chosen output grants
// the flit, it tells the input interface to release the register. It also counts
// how many cycles the present flit has waited for its grant (wait_cycles), which
// is zero in the cycle a flit first asks.
//
// All outputs except wait_cycles are combinational. The role (destination to the
// routing controller, grant back to the input interface) follows the paper; the
// paper gives no inner detail, and the wait counter is this design's addition.
// Reset: synchronous, active low, clears the counter.
module noc_flow_control
  import noc_pkg::*;
#(
  parameter int unsigned P = 1,
  parameter int unsigned D = 32,
  parameter int unsigned CNT_W = 16
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // from the input interface
  input  logic                   valid_i,
  input  logic [flit_w(P,D)-1:0] flit_i,
  // to the routing controller
  output logic                   req_o,
  output logic [P-1:0]           dst_x_o,
  output logic [P-1:0]           dst_y_o,
  output logic [PORT_W-1:0]      dst_h_o,
  // grant from the allocator, release to the input interface
  input  logic                   grant_i,
  output logic                   release_o,
  output logic [CNT_W-1:0]       wait_cycles
);

  `include "noc_flit.svh"
  `NOC_FLIT_TYPES

  flit_t f;
  assign f = flit_t'(flit_i);

  assign req_o     = valid_i;
  assign dst_x_o   = f.dst.x;
  assign dst_y_o   = f.dst.y;
  assign dst_h_o   = f.dst.h;
  assign release_o = valid_i && grant_i;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wait_cycles <= '0;
    end else if (!valid_i || grant_i) begin
      wait_cycles <= '0;
    end else if (wait_cycles != '1) begin
      wait_cycles <= wait_cycles + 1'b1;
    end
  end

  a_grant_needs_req : assert property (@(posedge clk) disable iff (!rst_n) grant_i |-> valid_i);

endmodule
