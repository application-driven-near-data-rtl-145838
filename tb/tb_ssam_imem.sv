// tb_ssam_imem: fills the 512-word instruction memory and reads it back, checking the
// one-cycle read latency and that a write does not disturb other words.
`timescale 1ns/1ps
module tb_ssam_imem;
  logic clk = 0;
  always #5 clk = ~clk;
  logic we;
  logic [8:0] wa, ra;
  logic [31:0] wd, rd;
  logic [31:0] m[512];
  int checks = 0, failures = 0;

  ssam_imem #(.WORDS(512)) dut (.clk, .we, .waddr(wa), .wdata(wd), .raddr(ra), .rdata(rd));

  initial begin
    we = 0; wa = 0; ra = 0; wd = 0;
    for (int i = 0; i < 512; i++) begin
      @(negedge clk); we = 1; wa = 9'(i); wd = $urandom; m[i] = wd;
    end
    @(negedge clk); we = 0;
    for (int i = 0; i < 1500; i++) begin
      int a;
      a = $urandom_range(511);
      @(negedge clk); ra = 9'(a);
      if (i % 5 == 0) begin we = 1; wa = 9'($urandom); wd = $urandom; m[wa] = wd; end
      else we = 0;
      @(posedge clk); #1;
      checks++;
      if (rd != m[a] && !(i % 5 == 0 && wa == 9'(a))) begin failures++; $display("FAIL %0d", a); end
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
