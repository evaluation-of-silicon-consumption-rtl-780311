// noc_allocator: turns the eight arbiter commands into crossbar settings.
//
// Each output arbiter sends a command: a valid bit and the 3-bit number of the
// input it granted. In the same cycle, for all eight outputs at once, the
// allocator drives the crossbar select of that output, strobes the output
// interface to load the flit, and tells every input whether it was granted and
// to which output it is being connected (the transposed view, used to notify the
// origin). Since an input requests only one output at a time, no input is ever
// granted twice; an assertion checks this.
//
// Purely combinational. The role and the eight-commands-per-cycle parallelism are
// the paper's; the exact signals are this design's.
module noc_allocator
  import noc_pkg::*;
(
  input  logic              clk,    // used by the assertions only
  input  logic              rst_n,
  input  logic [NPORTS-1:0] cmd_valid,
  input  logic [PORT_W-1:0] cmd_in   [NPORTS],
  output logic [PORT_W-1:0] xbar_sel [NPORTS],
  output logic [NPORTS-1:0] out_load,
  output logic [NPORTS-1:0] in_grant,
  output logic [PORT_W-1:0] in_to_out[NPORTS]
);

  always_comb begin
    in_grant = '0;
    for (int i = 0; i < NPORTS; i++) in_to_out[i] = '0;
    for (int o = 0; o < NPORTS; o++) begin
      xbar_sel[o] = cmd_valid[o] ? cmd_in[o] : PORT_W'(o);
      out_load[o] = cmd_valid[o];
      if (cmd_valid[o]) begin
        in_grant[cmd_in[o]]  = 1'b1;
        in_to_out[cmd_in[o]] = PORT_W'(o);
      end
    end
  end

  // One input is connected to at most one output.
  for (genvar i = 0; i < NPORTS; i++) begin : g_chk
    logic [NPORTS-1:0] users;
    always_comb begin
      for (int o = 0; o < NPORTS; o++) users[o] = cmd_valid[o] && (cmd_in[o] == PORT_W'(i));
    end
    a_one_output : assert property (@(posedge clk) disable iff (!rst_n) $onehot0(users));
  end

endmodule
