// tb_ssam_stack: random push/pop traffic against a queue model of a 20-deep stack, checking the
// top value, empty/full, and that pushes when full and pops when empty are flagged and dropped.
`timescale 1ns/1ps
module tb_ssam_stack;
  import ssam_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic push, pop, empty, full, ovf, unf;
  word_t pd, top;
  int checks = 0, failures = 0;
  word_t m[$];

  ssam_stack #(.DEPTH(20)) dut (.clk, .rst_n, .push, .push_data(pd), .pop, .top_data(top),
    .empty, .full, .overflow(ovf), .underflow(unf));

  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", s); end
  endtask

  initial begin
    int n_ovf, n_unf;
    bit exp_ovf, exp_unf;
    push = 0; pop = 0; pd = 0; n_ovf = 0; n_unf = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      chk(empty == (m.size() == 0), "empty");
      chk(full == (m.size() == 20), "full");
      if (m.size() > 0) chk(top == m[$], "top");
      // phases: fill past full, drain past empty, then random
      if (i < 30)       begin push = 1; pop = 0; end
      else if (i < 60)  begin push = 0; pop = 1; end
      else              begin push = $urandom_range(1); pop = $urandom_range(1); end
      pd = $urandom;
      exp_ovf = push && !pop && m.size() == 20;
      exp_unf = pop && m.size() == 0;
      if (push && pop) begin
        if (m.size() == 0) m.push_back(pd); else m[$] = pd;
      end else if (push && m.size() < 20) m.push_back(pd);
      else if (pop && m.size() > 0) void'(m.pop_back());
      @(negedge clk);
      push = 0; pop = 0;
      chk(ovf == exp_ovf, "overflow flag");
      chk(unf == exp_unf, "underflow flag");
      n_ovf += ovf; n_unf += unf;
    end
    chk(n_ovf > 0 && n_unf > 0, "overflow and underflow exercised");
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
