// tb_ssam_priority_queue: two 16-entry queues chained as in the processing unit. Random
// (id, value) tuples are inserted, one per cycle; after every insert the chain must hold the
// 32 smallest values seen so far in ascending order (model: a sorted list). Within one queue
// ties keep insertion order; across the chain tuples of equal value may swap, so there the id
// at each position need only be one of the model's tuples with that value. Also checks clear, the combinational read ports, and that a disabled second queue
// leaves a 16-entry queue whose evictions pass through it.
`timescale 1ns/1ps
module tb_ssam_priority_queue;
  import ssam_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic en1, clear, ins_valid;
  word_t ins_id, ins_value;
  logic  v1, v2, rv0, rv1, ev2;
  word_t i1, i2, val1, val2, ri0, rd0, ri1, rd1, ei2, ed2;
  logic [3:0] pos;
  int checks = 0, failures = 0;

  ssam_priority_queue q0 (.clk, .rst_n, .en(1'b1), .clear, .ins_valid, .ins_id, .ins_value,
    .evict_valid(v1), .evict_id(i1), .evict_value(val1),
    .rd_pos(pos), .rd_valid(rv0), .rd_id(ri0), .rd_value(rd0));
  ssam_priority_queue q1 (.clk, .rst_n, .en(en1), .clear, .ins_valid(v1), .ins_id(i1),
    .ins_value(val1), .evict_valid(ev2), .evict_id(ei2), .evict_value(ed2),
    .rd_pos(pos), .rd_valid(rv1), .rd_id(ri1), .rd_value(rd1));

  typedef struct { word_t id; word_t v; } tup_t;
  tup_t m[$];

  task automatic model_insert(word_t id, word_t v);
    int j;
    tup_t t;
    t.id = id; t.v = v;
    j = 0;
    while (j < m.size() && m[j].v <= v) j++;
    m.insert(j, t);
  endtask

  task automatic compare(int depth, string tag);
    for (int p = 0; p < depth; p++) begin
      logic gv; word_t gi, gd;
      pos = 4'(p % 16);
      #1;
      gv = (p < 16) ? rv0 : rv1; gi = (p < 16) ? ri0 : ri1; gd = (p < 16) ? rd0 : rd1;
      checks++;
      if (p < m.size()) begin
        bit found;
        found = 0;
        foreach (m[j]) if (m[j].id == gi && m[j].v == gd) found = 1;
        if (!gv || gd != m[p].v || !found || (depth == 16 && gi != m[p].id)) begin
          failures++;
          $display("FAIL %s pos %0d got %0d/%0d exp %0d/%0d", tag, p, gi, gd, m[p].id, m[p].v);
        end
      end else if (gv) begin
        failures++;
        $display("FAIL %s pos %0d should be empty", tag, p);
      end
    end
  endtask

  int n_evict;
  initial begin
    en1 = 1; clear = 0; ins_valid = 0; ins_id = 0; ins_value = 0; pos = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // chain of two: keep 32 smallest
    for (int n = 0; n < 120; n++) begin
      @(negedge clk);
      ins_valid = 1; ins_id = n; ins_value = $urandom_range(500);
      model_insert(ins_id, ins_value);
      @(negedge clk);
      ins_valid = 0;
      if (m.size() > 32) m = m[0:31];
      if (n % 10 == 9 || n < 40) compare(32, "chain");
    end
    // clear
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    m.delete();
    compare(32, "clear");
    // second queue disabled: depth 16, overflow leaves the chain
    en1 = 0; n_evict = 0;
    for (int n = 0; n < 40; n++) begin
      @(negedge clk);
      ins_valid = 1; ins_id = 1000 + n; ins_value = $urandom_range(100);
      #1;
      if (ev2) n_evict++;
      model_insert(ins_id, ins_value);
      @(negedge clk);
      ins_valid = 0;
      if (m.size() > 16) m = m[0:15];
    end
    compare(16, "disabled");
    for (int p = 0; p < 16; p++) begin
      pos = 4'(p); #1;
      checks++;
      if (rv1) begin failures++; $display("FAIL disabled queue was written"); end
    end
    checks++;
    if (n_evict != 24) begin failures++; $display("FAIL evictions %0d", n_evict); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
