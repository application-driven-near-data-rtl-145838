// ssam_scratchpad: the processing unit's 32 KB scratchpad, holding the query vector and the
// top of an index structure (or any other reused data).
//
// It is a single-port SRAM organised as rows of VLEN 32-bit words (8192 words = 32 KB in total),
// so one access moves a whole vector register. A write stores the lanes selected by wmask; a
// read returns the row on rdata one clock later. Scalar accesses use one lane of a row. The
// 32 KB size follows the paper; the row organisation and per-lane write mask are this design's.
module ssam_scratchpad #(
  parameter int unsigned VLEN  = 4,
  parameter int unsigned WORDS = 8192
) (
  input  logic                           clk,
  input  logic                           en,
  input  logic                           we,
  input  logic [$clog2(WORDS/VLEN)-1:0]  row,
  input  logic [VLEN-1:0]                wmask,
  input  logic [VLEN*32-1:0]             wdata,
  output logic [VLEN*32-1:0]             rdata
);

  localparam int unsigned ROWS = WORDS / VLEN;

  logic [VLEN*32-1:0] mem [ROWS];

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) begin
        for (int l = 0; l < VLEN; l++)
          if (wmask[l]) mem[row][l*32 +: 32] <= wdata[l*32 +: 32];
      end else begin
        rdata <= mem[row];
      end
    end
  end

endmodule
