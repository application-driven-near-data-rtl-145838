// tb_ssam_vault_arbiter: three requesters with random read traffic share one vault model
// through the arbiter. Every response must reach the unit that asked, with the data of the line
// it asked for, in its own request order. With all three always requesting, grants must be
// shared evenly (round-robin). With accel_en = 0 only the host port may reach the vault.
`timescale 1ns/1ps
module tb_ssam_vault_arbiter;
  localparam int N = 3, VLEN = 4, TW = 2, IW = $clog2(N + 1), LW = VLEN * 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic accel_en;
  logic [N-1:0] p_req_valid, p_req_ready, p_req_we, p_resp_valid;
  logic [N-1:0][31:0] p_req_addr;
  logic [N-1:0][LW-1:0] p_req_wdata;
  logic [N-1:0][VLEN-1:0] p_req_wmask;
  logic [N-1:0][TW-1:0] p_req_tag;
  logic [TW-1:0] p_resp_tag;
  logic [LW-1:0] p_resp_data, h_resp_data, h_req_wdata, v_req_wdata, v_resp_data;
  logic h_req_valid, h_req_ready, h_req_we, h_resp_valid;
  logic [31:0] h_req_addr, v_req_addr;
  logic [VLEN-1:0] h_req_wmask, v_req_wmask;
  logic v_req_valid, v_req_ready, v_req_we, v_resp_valid;
  logic [IW+TW-1:0] v_req_tag, v_resp_tag;

  ssam_vault_arbiter #(.N(N), .VLEN(VLEN), .TW(TW)) dut (.*);

  ssam_vault_model #(.VLEN(VLEN), .TGW(IW+TW), .LAT(5), .STALL_PCT(30)) vault (.clk, .rst_n,
    .req_valid(v_req_valid), .req_ready(v_req_ready), .req_we(v_req_we), .req_addr(v_req_addr),
    .req_wdata(v_req_wdata), .req_wmask(v_req_wmask), .req_tag(v_req_tag),
    .resp_valid(v_resp_valid), .resp_tag(v_resp_tag), .resp_data(v_resp_data));

  int checks = 0, failures = 0;
  int unsigned expq [N+1][$];
  int grants [N];
  bit flood;

  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", s); end
  endtask

  function automatic logic [LW-1:0] line_of(int unsigned a);
    logic [LW-1:0] d;
    for (int l = 0; l < VLEN; l++) d[l*32 +: 32] = (a * VLEN + l) * 3 + 1;
    return d;
  endfunction

  // requesters
  for (genvar i = 0; i < N; i++) begin : g_req
    always @(posedge clk) begin
      if (!rst_n) begin
        p_req_valid[i] <= 0;
      end else begin
        if (p_req_valid[i] && p_req_ready[i]) begin
          expq[i].push_back(p_req_addr[i]);
          grants[i]++;
          p_req_valid[i] <= 0;
        end
        if ((!p_req_valid[i] || p_req_ready[i]) && (flood || $urandom_range(99) < 40)) begin
          p_req_valid[i] <= 1;
          p_req_addr[i]  <= 32'($urandom_range(63));
          p_req_tag[i]   <= TW'(i);
        end
      end
    end
  end
  assign p_req_we = '0;
  assign p_req_wdata = '0;
  assign p_req_wmask = '0;

  // response checker
  always @(posedge clk) if (rst_n) begin
    for (int i = 0; i < N; i++) if (p_resp_valid[i]) begin
      int unsigned a;
      a = expq[i].pop_front();
      chk(p_resp_data == line_of(a) && p_resp_tag == TW'(i), $sformatf("unit %0d response", i));
    end
    if (h_resp_valid) begin
      int unsigned a;
      a = expq[N].pop_front();
      chk(h_resp_data == line_of(a), "host response");
    end
    chk($countones(p_resp_valid) + h_resp_valid <= 1, "one response target");
  end

  initial begin
    accel_en = 1; flood = 0; h_req_valid = 0; h_req_we = 0; h_req_addr = 0; h_req_wdata = 0;
    h_req_wmask = 0;
    foreach (grants[i]) grants[i] = 0;
    for (int a = 0; a < 64 * VLEN; a++) vault.poke(a, a * 3 + 1);
    repeat (2) @(posedge clk);
    rst_n = 1;
    repeat (2000) @(posedge clk);
    // fairness under full load
    flood = 1;
    foreach (grants[i]) grants[i] = 0;
    repeat (1000) @(posedge clk);
    for (int i = 1; i < N; i++) chk(grants[i] - grants[0] <= 1 && grants[0] - grants[i] <= 1,
                                   $sformatf("fair share %0d vs %0d", grants[i], grants[0]));
    flood = 0;
    // bypass: host owns the vault
    @(negedge clk); accel_en = 0;
    repeat (50) @(posedge clk);
    foreach (grants[i]) grants[i] = 0;
    for (int k = 0; k < 40; k++) begin
      @(negedge clk);
      h_req_valid = 1; h_req_addr = 32'($urandom_range(63));
      @(posedge clk);
      while (!h_req_ready) @(posedge clk);
      expq[N].push_back(h_req_addr);
      @(negedge clk); h_req_valid = 0;
    end
    repeat (30) @(posedge clk);
    chk(expq[N].size() == 0, "all host reads answered");
    foreach (grants[i]) chk(grants[i] == 0, "units blocked in bypass");
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
