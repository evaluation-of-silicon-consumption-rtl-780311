// noc_output_interface: the output side of one router channel.
//
// A single flit register fed by the crossbar. A load (granted by the arbiter)
// stores the flit and raises ND ("new data") from the next cycle. The reader
// takes the flit from DOUT and pulses RD while ND is high; ND drops at the next
// edge. The output is free for a new grant only while ND is low, i.e. from the
// cycle after the read, so one output moves at most one flit every two cycles.
//
// Interface: load/din from the allocator and crossbar, free_o to the arbiter,
// nd/dout/rd on the channel (Fig. 2 output channel). The register, ND and RD are
// the paper's; reporting "free" only after the read completed is this design's
// reading of the text. Reset: synchronous, active low, clears ND.
module noc_output_interface
  import noc_pkg::*;
#(
  parameter int unsigned P = 1,
  parameter int unsigned D = 32
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   load,
  input  logic [flit_w(P,D)-1:0] din,
  output logic                   free_o,
  output logic                   nd,
  output logic [flit_w(P,D)-1:0] dout,
  input  logic                   rd
);

  logic nd_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      nd_q <= 1'b0;
      dout <= '0;
    end else if (load) begin
      nd_q <= 1'b1;
      dout <= din;
    end else if (rd) begin
      nd_q <= 1'b0;
    end
  end

  assign nd     = nd_q;
  assign free_o = !nd_q;

  a_load_when_free : assert property (@(posedge clk) disable iff (!rst_n) load |-> !nd_q);
  a_rd_when_nd     : assert property (@(posedge clk) disable iff (!rst_n) rd |-> nd_q);

endmodule
