// ssam_vault_arbiter: the interconnect of one accelerator, which shares a single vault
// controller port among its processing units, and the bypass that gives the host the vault
// as plain memory when the acceleration logic is disabled.
//
// accel_en = 1: requests of the N processing units are granted round-robin, one per accepted
// request. Once a request is offered to the vault the grant is held until the vault accepts it,
// so the vault sees a stable request. The unit number is prepended to the request tag; the
// vault returns the tag with read data, and the response is steered back to that unit.
// accel_en = 0: the units are ignored and the host port owns the vault (tag id = N), so the
// module behaves as an ordinary memory.
// All paths are combinational except the round-robin pointer and the grant lock. The shared
// port and the bypass follow the paper; round-robin and the tag scheme are this design's.
module ssam_vault_arbiter #(
  parameter int unsigned N    = 4,
  parameter int unsigned VLEN = 4,
  parameter int unsigned TW   = 2,
  localparam int unsigned LW  = VLEN * 32,
  localparam int unsigned IW  = $clog2(N + 1),
  localparam int unsigned GW  = (N > 1) ? $clog2(N) : 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  accel_en,
  // processing units
  input  logic [N-1:0]          p_req_valid,
  output logic [N-1:0]          p_req_ready,
  input  logic [N-1:0]          p_req_we,
  input  logic [N-1:0][31:0]    p_req_addr,
  input  logic [N-1:0][LW-1:0]  p_req_wdata,
  input  logic [N-1:0][VLEN-1:0] p_req_wmask,
  input  logic [N-1:0][TW-1:0]  p_req_tag,
  output logic [N-1:0]          p_resp_valid,
  output logic [TW-1:0]         p_resp_tag,
  output logic [LW-1:0]         p_resp_data,
  // host bypass port
  input  logic                  h_req_valid,
  output logic                  h_req_ready,
  input  logic                  h_req_we,
  input  logic [31:0]           h_req_addr,
  input  logic [LW-1:0]         h_req_wdata,
  input  logic [VLEN-1:0]       h_req_wmask,
  output logic                  h_resp_valid,
  output logic [LW-1:0]         h_resp_data,
  // vault controller
  output logic                  v_req_valid,
  input  logic                  v_req_ready,
  output logic                  v_req_we,
  output logic [31:0]           v_req_addr,
  output logic [LW-1:0]         v_req_wdata,
  output logic [VLEN-1:0]       v_req_wmask,
  output logic [IW+TW-1:0]      v_req_tag,
  input  logic                  v_resp_valid,
  input  logic [IW+TW-1:0]      v_resp_tag,
  input  logic [LW-1:0]         v_resp_data
);

  logic [GW-1:0] ptr_q, grant, lock_g_q;
  logic          lock_q, any;

  // round-robin pick: first valid unit at or after ptr_q
  always_comb begin
    grant = ptr_q;
    any   = 1'b0;
    for (int k = N - 1; k >= 0; k--) begin
      int unsigned idx;
      idx = (int'(ptr_q) + k) % N;
      if (p_req_valid[idx]) begin
        grant = GW'(idx);
        any   = 1'b1;
      end
    end
    if (lock_q) begin
      grant = lock_g_q;
      any   = 1'b1;
    end
  end

  always_comb begin
    p_req_ready = '0;
    h_req_ready = 1'b0;
    if (accel_en) begin
      v_req_valid        = any && p_req_valid[grant];
      v_req_we           = p_req_we[grant];
      v_req_addr         = p_req_addr[grant];
      v_req_wdata        = p_req_wdata[grant];
      v_req_wmask        = p_req_wmask[grant];
      v_req_tag          = {IW'(grant), p_req_tag[grant]};
      p_req_ready[grant] = v_req_ready;
    end else begin
      v_req_valid = h_req_valid;
      v_req_we    = h_req_we;
      v_req_addr  = h_req_addr;
      v_req_wdata = h_req_wdata;
      v_req_wmask = h_req_wmask;
      v_req_tag   = {IW'(N), TW'(0)};
      h_req_ready = v_req_ready;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ptr_q    <= '0;
      lock_q   <= 1'b0;
      lock_g_q <= '0;
    end else if (accel_en && v_req_valid) begin
      if (v_req_ready) begin
        lock_q <= 1'b0;
        ptr_q  <= (grant == GW'(N - 1)) ? '0 : grant + 1'b1;
      end else begin
        lock_q   <= 1'b1;
        lock_g_q <= grant;
      end
    end
  end

  // responses
  logic [IW-1:0] rid;
  assign rid         = v_resp_tag[IW+TW-1:TW];
  assign p_resp_tag  = v_resp_tag[TW-1:0];
  assign p_resp_data = v_resp_data;
  assign h_resp_data = v_resp_data;
  assign h_resp_valid = v_resp_valid && rid == IW'(N);
  always_comb begin
    for (int i = 0; i < N; i++) p_resp_valid[i] = v_resp_valid && rid == IW'(i);
  end

  a_one_grant: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(p_req_ready));

endmodule
