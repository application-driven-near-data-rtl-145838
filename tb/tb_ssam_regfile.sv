// tb_ssam_regfile: random writes and three-port reads of the 32 x 32-bit scalar register file
// against an array model; register 0 must stay zero. Reads see the old value in the cycle of
// a write to the same register.
`timescale 1ns/1ps
module tb_ssam_regfile;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [4:0] ra1, ra2, ra3, wa;
  logic [31:0] rd1, rd2, rd3, wd;
  logic we;
  logic [31:0] m[32];
  int checks = 0, failures = 0;

  ssam_regfile #(.NREGS(32), .WIDTH(32), .ZERO_REG0(1'b1)) dut (.clk, .rst_n, .ra1, .ra2, .ra3,
    .rd1, .rd2, .rd3, .we, .wa, .wd);

  initial begin
    we = 0; wa = 0; wd = 0; ra1 = 0; ra2 = 0; ra3 = 0;
    foreach (m[i]) m[i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      we = $urandom_range(1); wa = 5'($urandom); wd = $urandom;
      ra1 = 5'($urandom); ra2 = 5'($urandom); ra3 = (i % 3 == 0) ? wa : 5'($urandom);
      #1;
      checks += 3;
      if (rd1 != m[ra1]) begin failures++; $display("FAIL rd1 r%0d", ra1); end
      if (rd2 != m[ra2]) begin failures++; $display("FAIL rd2 r%0d", ra2); end
      if (rd3 != m[ra3]) begin failures++; $display("FAIL rd3 r%0d", ra3); end
      @(posedge clk);
      if (we && wa != 0) m[wa] = wd;
    end
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
