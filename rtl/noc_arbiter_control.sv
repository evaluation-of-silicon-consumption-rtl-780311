// noc_arbiter_control: arbiter of one router output channel.
//
// Every input that wants this output raises its bit in req. The arbiter keeps
// the eight inputs in a priority list (entry 0 highest). When the output is free
// it grants the first requesting input in the list; grant_valid/grant_idx go to
// the allocator in the same cycle. After a grant the list is updated at the clock
// edge:
//  * a local (core) input moves to the tail, so it sends again only when no other
//    input is waiting;
//  * a router-to-router input (NN, EE, SS, WW, as far as MESH_MASK marks them as
//    linked to a neighbouring router) keeps its place while its burst counter is
//    above zero, and the counter is decremented; when the counter is zero it is
//    reloaded with MESH_BURST and the input moves to the tail.
// A mesh input therefore sends up to MESH_BURST+1 flits in a row. On the edge of
// the mesh a straight port that holds a core is cleared in MESH_MASK and is
// arbitrated like any other core port.
//
// Reset (synchronous, active low) loads the initial order NN, SS, EE, WW, NE, SE,
// SW, NW and all counters with MESH_BURST.
//
// The scheme (priority drop after a grant, counters for mesh inputs, initial
// high priority for mesh inputs, waiting for a free output) is the paper's; the
// list encoding, the initial order among equals and MESH_BURST are this design's.
module noc_arbiter_control
  import noc_pkg::*;
#(
  parameter int unsigned     MESH_BURST = 1,
  // inputs that come from neighbouring routers (default NN, EE, SS, WW)
  parameter logic [NPORTS-1:0] MESH_MASK  = 8'b0101_0101
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [NPORTS-1:0] req,
  input  logic              out_free,
  output logic              grant_valid,
  output logic [PORT_W-1:0] grant_idx
);

  localparam int unsigned CW = (MESH_BURST < 1) ? 1 : $clog2(MESH_BURST + 1);

  localparam logic [NPORTS*PORT_W-1:0] INIT_ORDER = {
    PORT_NW, PORT_SW, PORT_SE, PORT_NE, PORT_WW, PORT_EE, PORT_SS, PORT_NN
  };

  logic [PORT_W-1:0] order_q [NPORTS];
  logic [PORT_W-1:0] order_d [NPORTS];
  logic [CW-1:0]     cnt_q   [NPORTS];
  logic [CW-1:0]     cnt_d   [NPORTS];
  logic [PORT_W-1:0] pos;
  logic              found;

  // Highest-priority requester.
  always_comb begin
    found     = 1'b0;
    pos       = '0;
    grant_idx = '0;
    for (int i = 0; i < NPORTS; i++) begin
      if (!found && req[order_q[i]]) begin
        found     = 1'b1;
        pos       = PORT_W'(i);
        grant_idx = order_q[i];
      end
    end
    grant_valid = found && out_free;
  end

  // Priority and counter update for the granted input.
  always_comb begin
    order_d = order_q;
    cnt_d   = cnt_q;
    if (grant_valid) begin
      if (MESH_MASK[grant_idx] && cnt_q[grant_idx] != '0) begin
        cnt_d[grant_idx] = cnt_q[grant_idx] - 1'b1;
      end else begin
        if (MESH_MASK[grant_idx]) cnt_d[grant_idx] = CW'(MESH_BURST);
        for (int i = 0; i < NPORTS - 1; i++) begin
          if (i >= int'(pos)) order_d[i] = order_q[i+1];
        end
        order_d[NPORTS-1] = grant_idx;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < NPORTS; i++) begin
        order_q[i] <= INIT_ORDER[i*PORT_W +: PORT_W];
        cnt_q[i]   <= CW'(MESH_BURST);
      end
    end else begin
      order_q <= order_d;
      cnt_q   <= cnt_d;
    end
  end

  a_grant_requested : assert property (@(posedge clk) disable iff (!rst_n)
    grant_valid |-> req[grant_idx]);
  a_grant_when_free : assert property (@(posedge clk) disable iff (!rst_n)
    grant_valid |-> out_free);

endmodule
