// ssam_module: the logic-layer addition of one similarity-search memory module, the top of
// this design. A die-stacked memory cube is split into vaults, each with its own vault
// controller; one accelerator (ssam_accelerator) sits beside every vault controller and scans
// that vault's data, so the bandwidth used for a search is the sum of all vaults' internal
// bandwidth, not the external link's.
//
// The cube's own parts, the vault controllers, the DRAM vaults, the switch and the external
// data links, are not part of this RTL: each accelerator's vault port (v_*) and host memory
// port (h_*) is brought out as an array indexed by vault, where the vault controller and
// the switch connect. The host configuration port is common: cfg_vault picks one accelerator or,
// with 8'hFF, all of them, so a query and a program are broadcast to every unit in the module;
// the host then reduces the per-unit top-k lists into the global result. accel_en = 0 makes
// the whole module ordinary memory. Read data return on cfg_rdata one cycle after the request.
// NUM_VAULTS = 32 is the cube's vault count; the other defaults are those of ssam_accelerator.
module ssam_module
  import ssam_pkg::*;
#(
  parameter int unsigned NUM_VAULTS = 32,
  parameter int unsigned NUM_PU     = 4,
  parameter int unsigned VLEN       = 4,
  parameter int unsigned SPAD_WORDS = 8192,
  parameter int unsigned IMEM_WORDS = 512,
  parameter int unsigned PQ_COUNT   = 2,
  parameter int unsigned PF_ENTRIES = 4,
  localparam int unsigned LW        = VLEN * 32,
  localparam int unsigned TW        = (PF_ENTRIES > 1) ? $clog2(PF_ENTRIES) : 1,
  localparam int unsigned IW        = $clog2(NUM_PU + 1),
  localparam int unsigned VTW       = IW + TW
) (
  input  logic                                   clk,
  input  logic                                   rst_n,
  input  logic                                   accel_en,
  // host configuration
  input  logic                                   cfg_en,
  input  logic                                   cfg_we,
  input  logic [7:0]                             cfg_vault,
  input  logic [7:0]                             cfg_pu,
  input  logic [1:0]                             cfg_sel,
  input  logic [15:0]                            cfg_addr,
  input  word_t                                  cfg_wdata,
  output logic                                   cfg_rvalid,
  output word_t                                  cfg_rdata,
  output logic [NUM_VAULTS-1:0][NUM_PU-1:0]      pu_busy,
  output logic [NUM_VAULTS-1:0][NUM_PU-1:0]      pu_done,
  output pu_events_t [NUM_VAULTS-1:0][NUM_PU-1:0] pu_events,
  // host memory ports, one per vault
  input  logic [NUM_VAULTS-1:0]                  h_req_valid,
  output logic [NUM_VAULTS-1:0]                  h_req_ready,
  input  logic [NUM_VAULTS-1:0]                  h_req_we,
  input  logic [NUM_VAULTS-1:0][31:0]            h_req_addr,
  input  logic [NUM_VAULTS-1:0][LW-1:0]          h_req_wdata,
  input  logic [NUM_VAULTS-1:0][VLEN-1:0]        h_req_wmask,
  output logic [NUM_VAULTS-1:0]                  h_resp_valid,
  output logic [NUM_VAULTS-1:0][LW-1:0]          h_resp_data,
  // vault controller ports
  output logic [NUM_VAULTS-1:0]                  v_req_valid,
  input  logic [NUM_VAULTS-1:0]                  v_req_ready,
  output logic [NUM_VAULTS-1:0]                  v_req_we,
  output logic [NUM_VAULTS-1:0][31:0]            v_req_addr,
  output logic [NUM_VAULTS-1:0][LW-1:0]          v_req_wdata,
  output logic [NUM_VAULTS-1:0][VLEN-1:0]        v_req_wmask,
  output logic [NUM_VAULTS-1:0][VTW-1:0]         v_req_tag,
  input  logic [NUM_VAULTS-1:0]                  v_resp_valid,
  input  logic [NUM_VAULTS-1:0][VTW-1:0]         v_resp_tag,
  input  logic [NUM_VAULTS-1:0][LW-1:0]          v_resp_data
);

  logic [NUM_VAULTS-1:0] rv;
  word_t                 rd [NUM_VAULTS];

  for (genvar v = 0; v < NUM_VAULTS; v++) begin : g_vault
    logic sel;
    assign sel = cfg_en && (cfg_vault == 8'hFF || cfg_vault == 8'(v));
    ssam_accelerator #(
      .NUM_PU(NUM_PU), .VLEN(VLEN), .SPAD_WORDS(SPAD_WORDS), .IMEM_WORDS(IMEM_WORDS),
      .PQ_COUNT(PQ_COUNT), .PF_ENTRIES(PF_ENTRIES)
    ) u_acc (
      .clk(clk), .rst_n(rst_n), .accel_en(accel_en),
      .cfg_en(sel), .cfg_we(cfg_we), .cfg_pu(cfg_pu), .cfg_sel(cfg_sel), .cfg_addr(cfg_addr),
      .cfg_wdata(cfg_wdata), .cfg_rvalid(rv[v]), .cfg_rdata(rd[v]),
      .pu_busy(pu_busy[v]), .pu_done(pu_done[v]), .pu_events(pu_events[v]),
      .h_req_valid(h_req_valid[v]), .h_req_ready(h_req_ready[v]), .h_req_we(h_req_we[v]),
      .h_req_addr(h_req_addr[v]), .h_req_wdata(h_req_wdata[v]), .h_req_wmask(h_req_wmask[v]),
      .h_resp_valid(h_resp_valid[v]), .h_resp_data(h_resp_data[v]),
      .v_req_valid(v_req_valid[v]), .v_req_ready(v_req_ready[v]), .v_req_we(v_req_we[v]),
      .v_req_addr(v_req_addr[v]), .v_req_wdata(v_req_wdata[v]), .v_req_wmask(v_req_wmask[v]),
      .v_req_tag(v_req_tag[v]), .v_resp_valid(v_resp_valid[v]), .v_resp_tag(v_resp_tag[v]),
      .v_resp_data(v_resp_data[v])
    );
  end

  logic [7:0] rd_v_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                 rd_v_q <= '0;
    else if (cfg_en && !cfg_we) rd_v_q <= (cfg_vault == 8'hFF) ? 8'd0 : cfg_vault;
  end
  assign cfg_rvalid = |rv;
  always_comb begin
    cfg_rdata = '0;
    for (int v = 0; v < NUM_VAULTS; v++) if (rd_v_q == 8'(v)) cfg_rdata = rd[v];
  end

endmodule
