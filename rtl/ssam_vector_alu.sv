// ssam_vector_alu: VLEN parallel copies of the ALU lane, all under one operation code.
//
// Operand vectors are packed VLEN x 32-bit words, lane 0 in the low bits. Each lane works on
// its own element; there is no cross-lane traffic (a distance is reduced across lanes in
// software with VSMOVE and scalar adds). Combinational. VLEN defaults to 4, the vector length
// of the design point used for the module-level comparisons; 2, 8 and 16 were also evaluated.
module ssam_vector_alu
  import ssam_pkg::*;
#(
  parameter int unsigned VLEN = 4
) (
  input  alu_op_e                 op,
  input  logic [VLEN*XLEN-1:0]    a,
  input  logic [VLEN*XLEN-1:0]    b,
  input  logic [VLEN*XLEN-1:0]    c,
  output logic [VLEN*XLEN-1:0]    y
);

  for (genvar l = 0; l < VLEN; l++) begin : g_lane
    ssam_alu u_lane (
      .op(op),
      .a (a[l*XLEN +: XLEN]),
      .b (b[l*XLEN +: XLEN]),
      .c (c[l*XLEN +: XLEN]),
      .y (y[l*XLEN +: XLEN])
    );
  end

endmodule
