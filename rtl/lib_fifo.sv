// lib_fifo: local instruction buffer (LIB) of a quantum core's local control
// unit.
//
// During the dispatch phase the LCU pushes every local (non-teleportation)
// instruction addressed to its core; during the execution phase the
// LocalInstruction process pops them in arrival order and executes them until
// the buffer is empty. The buffer is a circular register FIFO with separate
// read and write pointers and an occupancy counter.
//
// Interface: push/din write an entry (ignored and flagged when full), pop
// removes the head (ignored when empty), dout shows the head combinationally
// (first-word fall-through). A push and a pop in the same cycle are both
// performed. overflow is sticky until reset: the broadcast channel cannot
// stall the dispatcher, so a full buffer means the program exceeded DEPTH.
// Timing: an entry pushed in cycle t is visible on dout in cycle t+1.
// Depth and FIFO order are this design's choices; the source description
// names the buffer and its push/pop use only.
module lib_fifo #(
  parameter int unsigned WIDTH = idmac_pkg::GEN_W,
  parameter int unsigned DEPTH = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             push,
  input  logic [WIDTH-1:0] din,
  input  logic             pop,
  output logic [WIDTH-1:0] dout,
  output logic             empty,
  output logic             full,
  output logic             overflow
);
  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [PW-1:0]    rd_ptr, wr_ptr;
  logic [PW:0]      count;

  logic do_push, do_pop;
  assign empty   = (count == 0);
  assign full    = (count == (PW+1)'(DEPTH));
  assign do_pop  = pop && !empty;
  assign do_push = push && (!full || do_pop);
  assign dout    = mem[rd_ptr];

  function automatic logic [PW-1:0] incr(logic [PW-1:0] p);
    return (p == PW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr   <= '0;
      wr_ptr   <= '0;
      count    <= '0;
      overflow <= 1'b0;
    end else begin
      if (do_push) wr_ptr <= incr(wr_ptr);
      if (do_pop)  rd_ptr <= incr(rd_ptr);
      case ({do_push, do_pop})
        2'b10:   count <= count + 1'b1;
        2'b01:   count <= count - 1'b1;
        default: ;
      endcase
      if (push && !do_push) overflow <= 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (do_push) mem[wr_ptr] <= din;
  end

endmodule
