// heap_sort: top-K selector built as a level-pipelined bubble-pushing
// (sift-down) min-heap.
//
// The heap holds at most K items ordered by a signed key in the top KW bits
// of each item; its root is the smallest item kept. All slots start "empty"
// (smaller than any item). A new item larger than the root replaces it and
// is pushed down: the operation visits one tree level per cycle, swapping
// with the smaller child until both children are larger. Each level has its
// own pipeline stage and touches only its own level and the one below, so a
// new operation can enter two cycles after the previous one while that one
// is still sinking (the bubble-pushing scheme the paper takes from a known
// dual-port heap sorter; the two-cycle spacing and the single-port-per-level
// organisation are this design's choices). An item not larger than the root
// is dropped in its own cycle, so a stream of dropped items runs at one per
// cycle. After the stream the heap holds the K largest items.
//
// Extraction (`drain` pulse): the root is output and a "retired" marker
// (larger than any item) is pushed down in its place, one pop per two
// cycles at best, so items leave in ascending key order; empty slots are
// skipped. When the root is retired and no operation is in flight, every
// slot is cleared in one cycle and `drain_done` pulses.
//
// Interface: valid/ready input, `drain` pulse (only when idle), valid/ready
// output, `busy` while anything is in flight or draining, `pushed` pulses
// one cycle after an item entered the heap.
//
// Storage: all slots are one array read combinationally at the children of
// every active level, so it synthesises to registers, not block RAM (a
// block-RAM version would split the array per level and read ahead). The
// reset input also clears the slot states synchronously, since the slot
// array itself has no asynchronous reset.
module heap_sort #(
  parameter int unsigned K  = 1000,
  parameter int unsigned DW = 54,
  parameter int unsigned KW = 32
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  output logic          in_ready,
  input  logic [DW-1:0] in_data,
  input  logic          drain,
  output logic          out_valid,
  input  logic          out_ready,
  output logic [DW-1:0] out_data,
  output logic          drain_done,
  output logic          busy,
  output logic          pushed         // an accepted item entered the heap
);

  localparam int unsigned L  = $clog2(K + 1);      // tree levels
  localparam int unsigned NW = $clog2(K) + 2;      // node index width (children of the last level)
  localparam int unsigned AW = $clog2(K);          // slot address width

  typedef enum logic [1:0] {ST_EMPTY = 2'd0, ST_FULL = 2'd1, ST_RETIRED = 2'd2} slot_t;

  logic [DW-1:0] mem [K];
  slot_t         st  [K];

  // one operation register per level
  logic [L-1:0]            op_v;
  logic [L-1:0][NW-1:0]    op_n;      // node this level's operation writes
  logic [L-1:0][DW-1:0]    op_d;      // value being pushed down
  slot_t                   op_s [L];

  logic draining;

  // a < b in heap order
  function automatic logic less(slot_t as, logic [DW-1:0] ad, slot_t bs, logic [DW-1:0] bd);
    if (as != bs) return as < bs;
    return signed'(ad[DW-1 -: KW]) < signed'(bd[DW-1 -: KW]);
  endfunction

  // per stage: smaller child and whether the value moves down
  logic [L-1:0]         go_down;
  logic [L-1:0][NW-1:0] child;

  always_comb begin
    logic [NW-1:0] li, ri;
    for (int l = 0; l < L; l++) begin
      li = NW'(2) * op_n[l] + NW'(1);
      ri = li + NW'(1);
      child[l]   = li;
      go_down[l] = 1'b0;
      if (li < NW'(K)) begin
        if (ri < NW'(K) && less(st[ri[AW-1:0]], mem[ri[AW-1:0]], st[li[AW-1:0]], mem[li[AW-1:0]]))
          child[l] = ri;
        go_down[l] = less(st[child[l][AW-1:0]], mem[child[l][AW-1:0]], op_s[l], op_d[l]);
      end
    end
  end

  // entry to stage 0: insert, or pop during a drain
  logic stage0_free, accept, wins, pop, issue;
  logic [DW-1:0] issue_d;
  slot_t         issue_s;

  assign stage0_free = !op_v[0] && !(L > 1 && op_v[L > 1 ? 1 : 0]);
  assign in_ready    = !draining && !drain && stage0_free;
  assign accept      = in_valid && in_ready;
  assign wins        = less(st[0], mem[0], ST_FULL, in_data);
  assign out_valid   = draining && stage0_free && (st[0] == ST_FULL);
  assign out_data    = mem[0];
  assign pop         = draining && stage0_free &&
                       ((st[0] == ST_FULL && out_ready) || st[0] == ST_EMPTY);
  assign issue       = (accept && wins) || pop;
  assign issue_d     = pop ? '0 : in_data;
  assign issue_s     = pop ? ST_RETIRED : ST_FULL;
  assign busy        = draining || (op_v != '0);

  logic all_done;
  assign all_done = draining && (op_v == '0) && (st[0] == ST_RETIRED);

  always_ff @(posedge clk) begin
    for (int l = 0; l < L; l++) begin
      if (op_v[l]) begin
        if (go_down[l]) begin
          mem[op_n[l][AW-1:0]] <= mem[child[l][AW-1:0]];
          st[op_n[l][AW-1:0]]  <= st[child[l][AW-1:0]];
        end else begin
          mem[op_n[l][AW-1:0]] <= op_d[l];
          st[op_n[l][AW-1:0]]  <= op_s[l];
        end
      end
    end
    if (all_done || !rst_n) begin
      for (int i = 0; i < K; i++) st[i] <= ST_EMPTY;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      op_v       <= '0;
      op_n       <= '0;
      op_d       <= '0;
      for (int l = 0; l < L; l++) op_s[l] <= ST_EMPTY;
      draining   <= 1'b0;
      drain_done <= 1'b0;
      pushed     <= 1'b0;
    end else begin
      drain_done <= all_done;
      pushed     <= accept && wins;
      if (drain && !draining) draining <= 1'b1;
      if (all_done)           draining <= 1'b0;
      // stage 0
      op_v[0] <= issue;
      op_n[0] <= '0;
      op_d[0] <= issue_d;
      op_s[0] <= issue_s;
      // stages 1..L-1 take the operations that move down
      for (int l = 1; l < L; l++) begin
        op_v[l] <= op_v[l-1] && go_down[l-1];
        op_n[l] <= child[l-1];
        op_d[l] <= op_d[l-1];
        op_s[l] <= op_s[l-1];
      end
    end
  end

endmodule
