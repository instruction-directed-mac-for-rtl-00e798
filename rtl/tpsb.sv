// tpsb: teleportation-source buffer (TPSB) kept sorted by token order.
//
// Every TPS instruction a core receives carries a token order "to": the
// position of that teleportation in the bundle-wide sequence of accesses to
// the wireless medium. The TPSInstruction process must serve them in that
// order, so the buffer performs an insertion sort on push: entries are held in
// registers ordered by ascending "to"; a new entry is written at the first
// position whose "to" is larger than its own and the entries from there on
// shift up by one. Pop removes entry 0 and shifts the rest down. A pop and a
// push in the same cycle are allowed: the pop is applied first.
//
// Interface: push/push_instr/push_to insert; pop removes the head;
// head_instr/head_to show the entry with the smallest "to" (valid when
// !empty). A push to a full buffer is dropped and sets the sticky overflow.
// Timing: an entry inserted in cycle t is visible at the head in cycle t+1.
// The sorted order follows the source description (InsertSort on "to"); the
// register implementation, the depth and keeping arrival order among equal
// "to" values are this design's choices.
module tpsb
  import idmac_pkg::*;
#(
  parameter int unsigned DEPTH = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              push,
  input  tps_instr_t        push_instr,
  input  logic [TO_W-1:0]   push_to,
  input  logic              pop,
  output tps_instr_t        head_instr,
  output logic [TO_W-1:0]   head_to,
  output logic              empty,
  output logic              full,
  output logic              overflow
);
  localparam int unsigned CW = $clog2(DEPTH + 1);

  typedef struct packed {
    tps_instr_t      instr;
    logic [TO_W-1:0] to;
  } entry_t;

  entry_t        ent_q [DEPTH];
  logic [CW-1:0] count_q;

  entry_t        popped [DEPTH];
  entry_t        ent_d  [DEPTH];
  logic [CW-1:0] cnt_pop, count_d;
  logic          do_pop, do_push;
  logic [CW-1:0] pos;

  assign empty      = (count_q == 0);
  assign full       = (count_q == CW'(DEPTH));
  assign head_instr = ent_q[0].instr;
  assign head_to    = ent_q[0].to;
  assign do_pop     = pop && !empty;

  always_comb begin
    // 1. apply the pop (shift down)
    for (int i = 0; i < DEPTH; i++) begin
      if (do_pop) popped[i] = ent_q[(i + 1 < DEPTH) ? i + 1 : i];
      else        popped[i] = ent_q[i];
    end
    cnt_pop = do_pop ? count_q - 1'b1 : count_q;
    do_push = push && (cnt_pop != CW'(DEPTH));
    // 2. insertion point: number of valid entries with to <= push_to
    pos = cnt_pop;
    for (int i = DEPTH - 1; i >= 0; i--) begin
      if (CW'(i) < cnt_pop && popped[i].to > push_to) pos = CW'(i);
    end
    // 3. shift up and insert
    for (int i = 0; i < DEPTH; i++) begin
      ent_d[i] = popped[i];
      if (do_push) begin
        if (CW'(i) == pos)     ent_d[i] = '{instr: push_instr, to: push_to};
        else if (CW'(i) > pos) ent_d[i] = popped[(i > 0) ? i - 1 : 0];
      end
    end
    count_d = do_push ? cnt_pop + 1'b1 : cnt_pop;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      count_q  <= '0;
      overflow <= 1'b0;
      for (int i = 0; i < DEPTH; i++) ent_q[i] <= '0;
    end else begin
      count_q <= count_d;
      for (int i = 0; i < DEPTH; i++) ent_q[i] <= ent_d[i];
      if (push && !do_push) overflow <= 1'b1;
    end
  end

endmodule
