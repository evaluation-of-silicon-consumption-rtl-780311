// noc_fifo: synchronous FIFO used as the Input FIFO and the Output FIFO of a
// network interface.
//
// DEPTH words of W bits in a register array, with first-word fall-through: the
// oldest word is always on dout while empty is low. push writes din when not
// full, pop removes the head when not empty; both may happen in one cycle.
// empty and full are the handshake flags seen by the core and by the router
// adapter. With DEPTH=1 it reduces to one register with a valid bit, as the paper
// prescribes for a buffer size of one. DEPTH is the buffer size B_size, set at
// design time (the paper sizes it as ceil(T_wr/rd / T_net)); the default of 4 is
// this design's choice.
// Reset: synchronous, active low, empties the FIFO.
module noc_fifo #(
  parameter int unsigned DEPTH = 4,
  parameter int unsigned W     = 43
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       push,
  input  logic [W-1:0]               din,
  input  logic                       pop,
  output logic [W-1:0]               dout,
  output logic                       empty,
  output logic                       full,
  output logic [$clog2(DEPTH+1)-1:0] count
);

  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] rd_ptr, wr_ptr;
  logic          do_push, do_pop;

  assign empty   = (count == '0);
  assign full    = (count == ($clog2(DEPTH+1))'(DEPTH));
  assign do_push = push && !full;
  assign do_pop  = pop && !empty;
  assign dout    = mem[rd_ptr];

  function automatic logic [AW-1:0] next_ptr(logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
      for (int i = 0; i < DEPTH; i++) mem[i] <= '0;
    end else begin
      if (do_push) begin
        mem[wr_ptr] <= din;
        wr_ptr      <= next_ptr(wr_ptr);
      end
      if (do_pop) rd_ptr <= next_ptr(rd_ptr);
      case ({do_push, do_pop})
        2'b10:   count <= count + 1'b1;
        2'b01:   count <= count - 1'b1;
        default: count <= count;
      endcase
    end
  end

  a_no_overflow  : assert property (@(posedge clk) disable iff (!rst_n) push |-> !full);
  a_no_underflow : assert property (@(posedge clk) disable iff (!rst_n) pop |-> !empty);

endmodule
