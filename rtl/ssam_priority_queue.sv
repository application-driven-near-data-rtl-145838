// ssam_priority_queue: one 16-entry hardware priority queue of (id, value) tuples that keeps
// the smallest values seen, in ascending order, for the global top-k of a kNN search.
//
// It is a shift-register queue: every entry compares the incoming value with its own in
// parallel. Entries whose value is not larger stay; the first entry whose value is larger takes
// the new tuple; every entry behind it takes its left neighbour's tuple. So an insert costs one
// clock whatever the depth, and entry 0 always holds the nearest neighbour. An empty entry
// counts as infinitely far. Ties keep the older tuple in front within one queue; in a chain, a
// tuple evicted later from an earlier queue lands behind equal values already further down, so
// equal distances may come out in either order (the set of k nearest is unaffected).
//
// Chaining: the tuple pushed out of the last entry leaves on evict_*; wiring it to the ins_*
// inputs of the next queue in the same cycle makes a longer queue for larger k. A queue with
// en = 0 ignores inserts and passes its ins_* input straight out on evict_*, so a disabled queue
// in a chain drops out of it.
//
// Interface: ins_valid/ins_id/ins_value insert on the clock edge; clear empties the queue
// (PQUEUE_RESET). rd_pos selects an entry for the combinational read ports rd_id/rd_value/
// rd_valid (PQUEUE_LOAD). The shift-register structure and depth 16 follow the paper; unsigned
// 32-bit values, the tie rule and the bypass of a disabled queue are this design's choices.
module ssam_priority_queue
  import ssam_pkg::*;
#(
  parameter int unsigned DEPTH = PQ_DEPTH
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      en,
  input  logic                      clear,
  input  logic                      ins_valid,
  input  word_t                     ins_id,
  input  word_t                     ins_value,
  output logic                      evict_valid,
  output word_t                     evict_id,
  output word_t                     evict_value,
  input  logic [$clog2(DEPTH)-1:0]  rd_pos,
  output logic                      rd_valid,
  output word_t                     rd_id,
  output word_t                     rd_value
);

  logic  [DEPTH-1:0] vld_q;
  word_t             id_q  [DEPTH];
  word_t             val_q [DEPTH];
  logic  [DEPTH-1:0] less;    // new value goes in front of entry i

  always_comb begin
    for (int i = 0; i < DEPTH; i++) less[i] = !vld_q[i] || (ins_value < val_q[i]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vld_q <= '0;
      for (int i = 0; i < DEPTH; i++) begin
        id_q[i]  <= '0;
        val_q[i] <= '0;
      end
    end else if (clear) begin
      vld_q <= '0;
    end else if (en && ins_valid) begin
      for (int i = 0; i < DEPTH; i++) begin
        if (less[i]) begin
          if (i > 0 && less[i-1]) begin
            vld_q[i] <= vld_q[i-1];
            id_q[i]  <= id_q[i-1];
            val_q[i] <= val_q[i-1];
          end else begin
            vld_q[i] <= 1'b1;
            id_q[i]  <= ins_id;
            val_q[i] <= ins_value;
          end
        end
      end
    end
  end

  // Tuple leaving the last entry (or the insert itself when it does not fit / queue disabled).
  always_comb begin
    if (!en) begin
      evict_valid = ins_valid;
      evict_id    = ins_id;
      evict_value = ins_value;
    end else if (less[DEPTH-1]) begin
      evict_valid = ins_valid && vld_q[DEPTH-1];
      evict_id    = id_q[DEPTH-1];
      evict_value = val_q[DEPTH-1];
    end else begin
      evict_valid = ins_valid;
      evict_id    = ins_id;
      evict_value = ins_value;
    end
  end

  assign rd_valid = vld_q[rd_pos];
  assign rd_id    = id_q[rd_pos];
  assign rd_value = val_q[rd_pos];

  // The queue stays sorted: a valid entry never follows an empty one.
  for (genvar i = 1; i < DEPTH; i++) begin : g_chk
    a_sorted: assert property (@(posedge clk) disable iff (!rst_n)
      vld_q[i] |-> (vld_q[i-1] && val_q[i-1] <= val_q[i]));
  end

endmodule
