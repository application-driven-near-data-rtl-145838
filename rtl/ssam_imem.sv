// ssam_imem: the processing unit's instruction memory, 2 KB = 512 words of 32 bits.
//
// A simple dual-port SRAM: the host writes program words through the write port while the
// unit is idle; the fetch logic reads through the read port, with the word at raddr appearing
// on rdata one clock later (a synchronous SRAM read). The 2 KB size is the paper's instruction
// memory size; the one-write/one-read organisation is this design's choice.
module ssam_imem #(
  parameter int unsigned WORDS = 512
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(WORDS)-1:0] waddr,
  input  logic [31:0]              wdata,
  input  logic [$clog2(WORDS)-1:0] raddr,
  output logic [31:0]              rdata
);

  logic [31:0] mem [WORDS];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end

endmodule
