// tb_ssam_pu: runs complete kNN searches on one processing unit against a vault model.
//
// For each of the three distance metrics (squared Euclidean, Hamming with FXP, Manhattan) it
// loads the kNN program and a query, places a dataset in the vault, starts the unit, waits for
// done and compares the k ids and distances it wrote to the scratchpad with a software
// reference. k = 20 spans both chained priority queues. It also checks that the memory stall,
// prefetch hits, forwarding, taken branches, queue chaining and the stack were exercised, and
// that PQUEUE_RESET with a count of 1 limits the result to one queue.
`timescale 1ns/1ps
module tb_ssam_pu;
  import ssam_pkg::*;
  import ssam_tb_pkg::*;

  localparam int VLEN = 4;
  localparam int TW   = 2;
  localparam int NV   = 40;
  localparam int D    = 16;
  localparam int BASE = 8192;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic h_en, h_we, h_rvalid, busy, done;
  logic [1:0] h_sel;
  logic [15:0] h_addr;
  word_t h_wdata, h_rdata;
  pu_events_t ev;
  logic m_req_valid, m_req_ready, m_req_we, m_resp_valid;
  logic [31:0] m_req_addr;
  logic [VLEN*32-1:0] m_req_wdata, m_resp_data;
  logic [VLEN-1:0] m_req_wmask;
  logic [TW-1:0] m_req_tag, m_resp_tag;

  ssam_pu #(.VLEN(VLEN)) dut (
    .clk, .rst_n, .h_en, .h_we, .h_sel, .h_addr, .h_wdata, .h_rvalid, .h_rdata, .busy, .done,
    .events(ev), .m_req_valid, .m_req_ready, .m_req_we, .m_req_addr, .m_req_wdata,
    .m_req_wmask, .m_req_tag, .m_resp_valid, .m_resp_tag, .m_resp_data
  );

  ssam_vault_model #(.VLEN(VLEN), .TGW(TW), .LAT(10), .STALL_PCT(20)) vault (
    .clk, .rst_n, .req_valid(m_req_valid), .req_ready(m_req_ready), .req_we(m_req_we),
    .req_addr(m_req_addr), .req_wdata(m_req_wdata), .req_wmask(m_req_wmask),
    .req_tag(m_req_tag), .resp_valid(m_resp_valid), .resp_tag(m_resp_tag),
    .resp_data(m_resp_data)
  );

  int checks = 0, failures = 0;
  int n_stall, n_pf, n_fwd, n_br, n_chain, n_push, n_pop;
  always @(posedge clk) if (rst_n) begin
    n_stall += ev.mem_stall; n_pf += ev.pf_hit; n_fwd += ev.fwd_vector;
    n_br += ev.branch_taken; n_chain += ev.pq_chain; n_push += ev.push; n_pop += ev.pop;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic hw(int sel, int a, word_t d);
    @(negedge clk); h_en = 1; h_we = 1; h_sel = 2'(sel); h_addr = 16'(a); h_wdata = d;
    @(negedge clk); h_en = 0; h_we = 0;
  endtask

  task automatic hr(int sel, int a, output word_t d);
    @(negedge clk); h_en = 1; h_we = 0; h_sel = 2'(sel); h_addr = 16'(a);
    @(negedge clk); h_en = 0; d = h_rdata;
  endtask

  task automatic run_knn(int metric, int k, int nq);
    word_t prog[$];
    word_t q[], dv[], dsts[];
    int ids[$];
    word_t r, cyc;
    knn_program(VLEN, 2, prog);
    foreach (prog[i]) hw(0, i, prog[i]);
    q = new[D];
    for (int d = 0; d < D; d++) begin q[d] = data_word(7 + metric, 999, d, metric); hw(1, d, q[d]); end
    dsts = new[NV];
    for (int n = 0; n < NV; n++) begin
      dv = new[D];
      for (int d = 0; d < D; d++) begin
        dv[d] = data_word(7 + metric, n, d, metric);
        vault.poke(BASE + n * D + d, dv[d]);
      end
      dsts[n] = distance(metric, dv, q);
    end
    hw(1, PARAM_BASE + 0, BASE); hw(1, PARAM_BASE + 1, NV); hw(1, PARAM_BASE + 2, D);
    hw(1, PARAM_BASE + 3, k);    hw(1, PARAM_BASE + 4, metric);
    hw(2, 0, 1);
    hr(2, 0, r);
    check(r[1] == 1'b1, "unit busy after start");
    wait (done);
    hr(2, 1, cyc);
    topk(dsts, k, ids);
    for (int i = 0; i < k; i++) begin
      word_t gid, gval;
      hr(1, RES_ID + i, gid);
      hr(1, RES_VAL + i, gval);
      check(gval == dsts[ids[i]], $sformatf("metric %0d rank %0d value %0d exp %0d", metric, i, gval, dsts[ids[i]]));
      check(gid == word_t'(ids[i]) || dsts[gid] == dsts[ids[i]], $sformatf("metric %0d rank %0d id %0d exp %0d", metric, i, gid, ids[i]));
    end
    $display("metric %0d: %0d cycles for %0d vectors of %0d dims", metric, cyc, NV, D);
  endtask

  initial begin
    h_en = 0; h_we = 0; h_sel = 0; h_addr = 0; h_wdata = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_knn(0, 20, NV);
    run_knn(1, 20, NV);
    run_knn(2, 6, NV);
    check(n_stall > 0, "memory stall seen");
    check(n_pf > 0, "prefetch hit seen");
    check(n_fwd > 0, "vector forwarding seen");
    check(n_br > 0, "taken branch seen");
    check(n_chain > 0, "queue chaining seen");
    check(n_push == 6 && n_pop == 6, "stack push/pop count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
