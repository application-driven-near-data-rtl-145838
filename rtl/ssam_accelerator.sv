// ssam_accelerator: the accelerator placed beside one vault controller on the memory cube's
// logic layer: NUM_PU processing units sharing that vault through ssam_vault_arbiter.
//
// The units run independently (no lockstep), each from its own instruction memory, so different
// indexing kernels can run side by side. The host reaches them through one configuration port:
// cfg_pu selects a unit, or all of them when it equals BCAST (a write is then broadcast, which is
// how one query and one program are sent to every unit). cfg_sel/cfg_addr/cfg_wdata follow the
// unit's host port (0 instruction memory, 1 scratchpad, 2 control). A read returns cfg_rdata one
// cycle later with cfg_rvalid. accel_en = 0 turns the acceleration off and hands the vault to
// the host memory port (h_*), so the module is plain memory.
// The number of units per vault is not fixed by the paper (80 to 320 units over 32 vaults are
// reported across the design points); NUM_PU = 4 is this design's choice.
module ssam_accelerator
  import ssam_pkg::*;
#(
  parameter int unsigned NUM_PU     = 4,
  parameter int unsigned VLEN       = 4,
  parameter int unsigned SPAD_WORDS = 8192,
  parameter int unsigned IMEM_WORDS = 512,
  parameter int unsigned PQ_COUNT   = 2,
  parameter int unsigned PF_ENTRIES = 4,
  localparam int unsigned LW        = VLEN * 32,
  localparam int unsigned TW        = (PF_ENTRIES > 1) ? $clog2(PF_ENTRIES) : 1,
  localparam int unsigned IW        = $clog2(NUM_PU + 1),
  localparam logic [7:0]  BCAST     = 8'hFF
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     accel_en,
  // host configuration
  input  logic                     cfg_en,
  input  logic                     cfg_we,
  input  logic [7:0]               cfg_pu,
  input  logic [1:0]               cfg_sel,
  input  logic [15:0]              cfg_addr,
  input  word_t                    cfg_wdata,
  output logic                     cfg_rvalid,
  output word_t                    cfg_rdata,
  output logic [NUM_PU-1:0]        pu_busy,
  output logic [NUM_PU-1:0]        pu_done,
  output pu_events_t [NUM_PU-1:0]  pu_events,
  // host memory port (used when accel_en = 0)
  input  logic                     h_req_valid,
  output logic                     h_req_ready,
  input  logic                     h_req_we,
  input  logic [31:0]              h_req_addr,
  input  logic [LW-1:0]            h_req_wdata,
  input  logic [VLEN-1:0]          h_req_wmask,
  output logic                     h_resp_valid,
  output logic [LW-1:0]            h_resp_data,
  // vault controller port
  output logic                     v_req_valid,
  input  logic                     v_req_ready,
  output logic                     v_req_we,
  output logic [31:0]              v_req_addr,
  output logic [LW-1:0]            v_req_wdata,
  output logic [VLEN-1:0]          v_req_wmask,
  output logic [IW+TW-1:0]         v_req_tag,
  input  logic                     v_resp_valid,
  input  logic [IW+TW-1:0]         v_resp_tag,
  input  logic [LW-1:0]            v_resp_data
);

  logic [NUM_PU-1:0]           p_req_valid, p_req_ready, p_req_we, p_resp_valid, h_rv;
  logic [NUM_PU-1:0][31:0]     p_req_addr;
  logic [NUM_PU-1:0][LW-1:0]   p_req_wdata;
  logic [NUM_PU-1:0][VLEN-1:0] p_req_wmask;
  logic [NUM_PU-1:0][TW-1:0]   p_req_tag;
  logic [TW-1:0]               p_resp_tag;
  logic [LW-1:0]               p_resp_data;
  word_t                       h_rd [NUM_PU];

  for (genvar i = 0; i < NUM_PU; i++) begin : g_pu
    logic sel;
    assign sel = cfg_en && (cfg_pu == BCAST || cfg_pu == 8'(i));
    ssam_pu #(
      .VLEN(VLEN), .SPAD_WORDS(SPAD_WORDS), .IMEM_WORDS(IMEM_WORDS),
      .PQ_COUNT(PQ_COUNT), .PF_ENTRIES(PF_ENTRIES)
    ) u_pu (
      .clk(clk), .rst_n(rst_n),
      .h_en(sel), .h_we(cfg_we), .h_sel(cfg_sel), .h_addr(cfg_addr), .h_wdata(cfg_wdata),
      .h_rvalid(h_rv[i]), .h_rdata(h_rd[i]),
      .busy(pu_busy[i]), .done(pu_done[i]), .events(pu_events[i]),
      .m_req_valid(p_req_valid[i]), .m_req_ready(p_req_ready[i]), .m_req_we(p_req_we[i]),
      .m_req_addr(p_req_addr[i]), .m_req_wdata(p_req_wdata[i]), .m_req_wmask(p_req_wmask[i]),
      .m_req_tag(p_req_tag[i]), .m_resp_valid(p_resp_valid[i]), .m_resp_tag(p_resp_tag),
      .m_resp_data(p_resp_data)
    );
  end

  // read-back: the addressed unit (the lowest one for a broadcast read)
  logic [7:0] rd_pu_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                rd_pu_q <= '0;
    else if (cfg_en && !cfg_we) rd_pu_q <= (cfg_pu == BCAST) ? 8'd0 : cfg_pu;
  end
  assign cfg_rvalid = |h_rv;
  always_comb begin
    cfg_rdata = '0;
    for (int i = 0; i < NUM_PU; i++) if (rd_pu_q == 8'(i)) cfg_rdata = h_rd[i];
  end

  ssam_vault_arbiter #(.N(NUM_PU), .VLEN(VLEN), .TW(TW)) u_arb (
    .clk(clk), .rst_n(rst_n), .accel_en(accel_en),
    .p_req_valid(p_req_valid), .p_req_ready(p_req_ready), .p_req_we(p_req_we),
    .p_req_addr(p_req_addr), .p_req_wdata(p_req_wdata), .p_req_wmask(p_req_wmask),
    .p_req_tag(p_req_tag), .p_resp_valid(p_resp_valid), .p_resp_tag(p_resp_tag),
    .p_resp_data(p_resp_data),
    .h_req_valid(h_req_valid), .h_req_ready(h_req_ready), .h_req_we(h_req_we),
    .h_req_addr(h_req_addr), .h_req_wdata(h_req_wdata), .h_req_wmask(h_req_wmask),
    .h_resp_valid(h_resp_valid), .h_resp_data(h_resp_data),
    .v_req_valid(v_req_valid), .v_req_ready(v_req_ready), .v_req_we(v_req_we),
    .v_req_addr(v_req_addr), .v_req_wdata(v_req_wdata), .v_req_wmask(v_req_wmask),
    .v_req_tag(v_req_tag), .v_resp_valid(v_resp_valid), .v_resp_tag(v_resp_tag),
    .v_resp_data(v_resp_data)
  );

endmodule
