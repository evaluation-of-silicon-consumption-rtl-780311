// noc_routing_control: XY routing for one router input.
//
// Given the destination router (X_DST, Y_DST) and port H_DST of a waiting flit
// and this router's own coordinates, it requests exactly one output channel:
// East (EE) or West (WW) while the X coordinates differ, otherwise North (NN) or
// South (SS) while the Y coordinates differ, otherwise the local channel named
// by H_DST. X grows towards East and Y towards North. The request is a one-hot
// vector over the eight outputs, all zero when no flit is waiting.
//
// Purely combinational. The algorithm is the paper's XY routing; the one-hot
// request encoding is this design's choice.
module noc_routing_control
  import noc_pkg::*;
#(
  parameter int unsigned P = 1
) (
  input  logic              req_i,
  input  logic [P-1:0]      dst_x,
  input  logic [P-1:0]      dst_y,
  input  logic [PORT_W-1:0] dst_h,
  input  logic [P-1:0]      my_x,
  input  logic [P-1:0]      my_y,
  output logic [NPORTS-1:0] out_req,
  output logic [PORT_W-1:0] out_port
);

  always_comb begin
    if (dst_x != my_x) begin
      out_port = (dst_x > my_x) ? PORT_EE : PORT_WW;
    end else if (dst_y != my_y) begin
      out_port = (dst_y > my_y) ? PORT_NN : PORT_SS;
    end else begin
      out_port = dst_h;
    end
    out_req = '0;
    if (req_i) out_req[out_port] = 1'b1;
  end

endmodule
