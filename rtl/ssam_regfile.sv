// ssam_regfile: register file with three combinational read ports and one write port.
//
// The processing unit uses it twice: 32 scalar registers of 32 bits, and 8 vector registers of
// VLEN x 32 bits. Three read ports serve rs1, rs2 and rd (rd is read as the accumulator of FXP,
// the data of a store and the first operand of a branch). Writes land on the clock edge; a read
// of the register being written sees the old value, so the pipeline forwards around it. With
// ZERO_REG0 = 1 register 0 reads as zero and ignores writes (this design's choice for the
// scalar file). Register counts follow the paper; everything else is this design's.
module ssam_regfile #(
  parameter int unsigned NREGS     = 32,
  parameter int unsigned WIDTH     = 32,
  parameter bit          ZERO_REG0 = 1'b1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [$clog2(NREGS)-1:0] ra1,
  input  logic [$clog2(NREGS)-1:0] ra2,
  input  logic [$clog2(NREGS)-1:0] ra3,
  output logic [WIDTH-1:0]         rd1,
  output logic [WIDTH-1:0]         rd2,
  output logic [WIDTH-1:0]         rd3,
  input  logic                     we,
  input  logic [$clog2(NREGS)-1:0] wa,
  input  logic [WIDTH-1:0]         wd
);

  logic [WIDTH-1:0] r_q [NREGS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NREGS; i++) r_q[i] <= '0;
    end else if (we && !(ZERO_REG0 && wa == '0)) begin
      r_q[wa] <= wd;
    end
  end

  assign rd1 = (ZERO_REG0 && ra1 == '0) ? '0 : r_q[ra1];
  assign rd2 = (ZERO_REG0 && ra2 == '0) ? '0 : r_q[ra2];
  assign rd3 = (ZERO_REG0 && ra3 == '0) ? '0 : r_q[ra3];

endmodule
