// ssam_vault_model: behavioural model of a vault controller and its DRAM vault, for testbenches
// only (the real part belongs to the memory cube, not to this design).
//
// Holds a sparse word array. Accepts one line request per cycle when ready (ready drops at
// random if STALL_PCT > 0); a read returns the VLEN-word line at line address req_addr, with its
// tag, LAT cycles later, in order. A write stores the lanes in req_wmask and returns nothing.
// Testbenches preload data with the poke task.
module ssam_vault_model #(
  parameter int unsigned VLEN      = 4,
  parameter int unsigned TGW       = 5,
  parameter int unsigned LAT       = 8,
  parameter int unsigned STALL_PCT = 0
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 req_valid,
  output logic                 req_ready,
  input  logic                 req_we,
  input  logic [31:0]          req_addr,
  input  logic [VLEN*32-1:0]   req_wdata,
  input  logic [VLEN-1:0]      req_wmask,
  input  logic [TGW-1:0]       req_tag,
  output logic                 resp_valid,
  output logic [TGW-1:0]       resp_tag,
  output logic [VLEN*32-1:0]   resp_data
);

  logic [31:0] mem [int unsigned];
  int unsigned reads, writes;

  typedef struct {
    longint            due;
    logic [TGW-1:0]    tag;
    logic [VLEN*32-1:0] data;
  } resp_t;
  resp_t  q [$];
  longint cyc;

  function automatic logic [31:0] peek(int unsigned a);
    return mem.exists(a) ? mem[a] : 32'd0;
  endfunction

  task automatic poke(int unsigned a, logic [31:0] d);
    mem[a] = d;
  endtask

  always_ff @(posedge clk) begin
    if (!rst_n) req_ready <= 1'b1;
    else        req_ready <= ($urandom_range(99) >= STALL_PCT);
  end

  always @(posedge clk) begin
    if (!rst_n) begin
      cyc        <= 0;
      resp_valid <= 1'b0;
      q.delete();
    end else begin
      cyc <= cyc + 1;
      if (req_valid && req_ready) begin
        if (req_we) begin
          writes++;
          for (int l = 0; l < VLEN; l++)
            if (req_wmask[l]) mem[req_addr * VLEN + l] = req_wdata[l*32 +: 32];
        end else begin
          resp_t r;
          reads++;
          r.due = cyc + LAT;
          r.tag = req_tag;
          for (int l = 0; l < VLEN; l++) r.data[l*32 +: 32] = peek(req_addr * VLEN + l);
          q.push_back(r);
        end
      end
      resp_valid <= 1'b0;
      if (q.size() > 0 && q[0].due <= cyc) begin
        resp_valid <= 1'b1;
        resp_tag   <= q[0].tag;
        resp_data  <= q[0].data;
        void'(q.pop_front());
      end
    end
  end

endmodule
