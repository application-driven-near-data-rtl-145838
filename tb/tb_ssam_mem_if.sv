// tb_ssam_mem_if: the memory interface against the vault model (latency 6, ready dropping 30%
// of cycles). Random loads, prefetches and masked stores are issued the way the pipeline does,
// holding each request while stall is high. Load data are checked against a word model of
// DRAM; a load that follows a prefetch after enough time must not stall; a missing load must
// stall at least the vault latency.
`timescale 1ns/1ps
module tb_ssam_mem_if;
  localparam int VLEN = 4, TW = 2, LAT = 6;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic rd_req, rd_consume, fetch_req, wr_req, rd_hit, stall, ev_pf_hit;
  logic [31:0] rd_addr, fetch_addr, wr_addr;
  logic [VLEN*32-1:0] rd_line, wr_line;
  logic [VLEN-1:0] wr_mask;
  logic m_req_valid, m_req_ready, m_req_we, m_resp_valid;
  logic [31:0] m_req_addr;
  logic [VLEN*32-1:0] m_req_wdata, m_resp_data;
  logic [VLEN-1:0] m_req_wmask;
  logic [TW-1:0] m_req_tag, m_resp_tag;
  int checks = 0, failures = 0;
  logic [31:0] m [int unsigned];

  ssam_mem_if #(.VLEN(VLEN), .PF_ENTRIES(4)) dut (.clk, .rst_n, .rd_req, .rd_addr, .rd_consume,
    .rd_hit, .rd_line, .fetch_req, .fetch_addr, .wr_req, .wr_addr, .wr_line, .wr_mask, .stall,
    .ev_pf_hit, .m_req_valid, .m_req_ready, .m_req_we, .m_req_addr, .m_req_wdata, .m_req_wmask,
    .m_req_tag, .m_resp_valid, .m_resp_tag, .m_resp_data);

  ssam_vault_model #(.VLEN(VLEN), .TGW(TW), .LAT(LAT), .STALL_PCT(30)) vault (.clk, .rst_n,
    .req_valid(m_req_valid), .req_ready(m_req_ready), .req_we(m_req_we), .req_addr(m_req_addr),
    .req_wdata(m_req_wdata), .req_wmask(m_req_wmask), .req_tag(m_req_tag),
    .resp_valid(m_resp_valid), .resp_tag(m_resp_tag), .resp_data(m_resp_data));

  function automatic logic [31:0] mw(int unsigned a);
    return m.exists(a) ? m[a] : 32'd0;
  endfunction

  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", s); end
  endtask

  // issue one operation; returns the number of stall cycles
  task automatic op_load(int unsigned a, bit consume, output int stalls);
    @(negedge clk);
    rd_req = 1; rd_addr = a; rd_consume = consume; stalls = 0;
    #1;
    while (stall) begin stalls++; @(negedge clk); #1; end
    for (int l = 0; l < VLEN; l++)
      chk(rd_line[l*32 +: 32] == mw((a / VLEN) * VLEN + l), $sformatf("load %0d lane %0d", a, l));
    @(negedge clk); rd_req = 0;
  endtask

  task automatic op_fetch(int unsigned a);
    @(negedge clk);
    fetch_req = 1; fetch_addr = a; #1;
    while (stall) begin @(negedge clk); #1; end
    @(negedge clk); fetch_req = 0;
  endtask

  task automatic op_store(int unsigned a);
    @(negedge clk);
    wr_req = 1; wr_addr = a; wr_mask = 4'($urandom);
    for (int l = 0; l < VLEN; l++) wr_line[l*32 +: 32] = $urandom;
    #1;
    while (stall) begin @(negedge clk); #1; end
    for (int l = 0; l < VLEN; l++)
      if (wr_mask[l]) m[(a / VLEN) * VLEN + l] = wr_line[l*32 +: 32];
    @(negedge clk); wr_req = 0;
  endtask

  initial begin
    int s, n_pf;
    rd_req = 0; fetch_req = 0; wr_req = 0; rd_consume = 0; rd_addr = 0; fetch_addr = 0;
    wr_addr = 0; wr_line = 0; wr_mask = 0; n_pf = 0;
    for (int a = 0; a < 256; a++) begin m[a] = $urandom; vault.poke(a, m[a]); end
    repeat (2) @(posedge clk);
    rst_n = 1;
    // cold miss stalls at least the vault latency
    op_load(40, 1, s);
    chk(s >= LAT, $sformatf("miss stalled %0d cycles", s));
    // prefetch then load: no stall
    op_fetch(100);
    repeat (20) @(posedge clk);
    @(negedge clk); rd_req = 1; rd_addr = 101; rd_consume = 1; #1;
    chk(!stall && rd_hit && ev_pf_hit, "prefetched line hits");
    @(negedge clk); rd_req = 0;
    // consumed by a vector load: next access to it misses again
    op_load(100, 0, s);
    chk(s > 0, "consumed line was freed");
    // scalar load keeps it
    op_load(102, 0, s);
    chk(s == 0, "scalar load keeps the line");
    // random mix
    for (int i = 0; i < 400; i++) begin
      int unsigned a;
      a = $urandom_range(255);
      case ($urandom_range(2))
        0: op_load(a, $urandom_range(1), s);
        1: op_fetch(a);
        default: op_store(a);
      endcase
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
