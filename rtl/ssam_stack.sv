// ssam_stack: the hardware stack unit on the scalar datapath, used to hold backtracking
// points (tree nodes not yet visited) while an index such as a kd-tree or hierarchical
// k-means tree is traversed.
//
// A register array with a stack pointer. push writes push_data on top on the clock edge; pop
// removes the top entry, whose value is shown combinationally on top_data in the same cycle
// (the processing unit writes it back to a register). A push and a pop in the same cycle
// replace the top entry. A push when full or a pop when empty is dropped and flagged on
// overflow/underflow for one cycle. Depth 20 matches the processing unit's parameter table;
// the overflow behaviour is this design's choice.
module ssam_stack
  import ssam_pkg::*;
#(
  parameter int unsigned DEPTH = 20
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   push,
  input  word_t  push_data,
  input  logic   pop,
  output word_t  top_data,
  output logic   empty,
  output logic   full,
  output logic   overflow,
  output logic   underflow
);

  localparam int unsigned PW = $clog2(DEPTH + 1);

  word_t          mem_q [DEPTH];
  logic [PW-1:0]  sp_q;            // number of entries held

  assign empty    = (sp_q == '0);
  assign full     = (sp_q == PW'(DEPTH));
  assign top_data = empty ? '0 : mem_q[sp_q - 1'b1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sp_q      <= '0;
      overflow  <= 1'b0;
      underflow <= 1'b0;
      for (int i = 0; i < DEPTH; i++) mem_q[i] <= '0;
    end else begin
      overflow  <= 1'b0;
      underflow <= 1'b0;
      if (push && pop) begin
        if (empty) begin
          underflow <= 1'b1;
          mem_q[0]  <= push_data;
          sp_q      <= PW'(1);
        end else begin
          mem_q[sp_q - 1'b1] <= push_data;
        end
      end else if (push) begin
        if (full) overflow <= 1'b1;
        else begin
          mem_q[sp_q] <= push_data;
          sp_q        <= sp_q + 1'b1;
        end
      end else if (pop) begin
        if (empty) underflow <= 1'b1;
        else       sp_q      <= sp_q - 1'b1;
      end
    end
  end

endmodule
