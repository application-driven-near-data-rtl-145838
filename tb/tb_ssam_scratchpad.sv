// tb_ssam_scratchpad: random masked row writes and row reads of the 32 KB scratchpad
// (4 lanes per row) against a word-array model, with the one-cycle read latency.
`timescale 1ns/1ps
module tb_ssam_scratchpad;
  localparam int VLEN = 4, WORDS = 8192, ROWS = WORDS / VLEN;
  logic clk = 0;
  always #5 clk = ~clk;
  logic en, we;
  logic [$clog2(ROWS)-1:0] row;
  logic [VLEN-1:0] wmask;
  logic [VLEN*32-1:0] wdata, rdata;
  logic [31:0] m[WORDS];
  int checks = 0, failures = 0;

  ssam_scratchpad #(.VLEN(VLEN), .WORDS(WORDS)) dut (.clk, .en, .we, .row, .wmask, .wdata, .rdata);

  initial begin
    en = 0; we = 0; row = 0; wmask = 0; wdata = 0;
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk); en = 1; we = 1; row = 11'(r); wmask = '1;
      for (int l = 0; l < VLEN; l++) begin wdata[l*32 +: 32] = $urandom; m[r*VLEN+l] = wdata[l*32 +: 32]; end
    end
    for (int i = 0; i < 4000; i++) begin
      @(negedge clk);
      row = 11'($urandom_range(ROWS - 1)); en = 1; we = $urandom_range(1);
      wmask = 4'($urandom);
      for (int l = 0; l < VLEN; l++) wdata[l*32 +: 32] = $urandom;
      if (we) begin
        for (int l = 0; l < VLEN; l++) if (wmask[l]) m[row*VLEN+l] = wdata[l*32 +: 32];
      end else begin
        int r;
        r = row;
        @(negedge clk); en = 0;
        for (int l = 0; l < VLEN; l++) begin
          checks++;
          if (rdata[l*32 +: 32] != m[r*VLEN+l]) begin failures++; $display("FAIL row %0d lane %0d", r, l); end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
