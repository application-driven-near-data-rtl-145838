// tb_ssam_accelerator: one accelerator (four processing units sharing one vault) end to end.
// Plain-memory mode through the host port first, then a broadcast kNN program and query, one
// data slice per unit, all units started together; every unit's k nearest are checked, and
// the host's merge of the four lists is checked against a search over the vault's whole data.
// A second query runs different metrics on different units at the same time. Counts memory
// stalls, prefetch hits, forwarding, queue chaining, stack use, arbitration between units and
// bypass traffic, and fails if any never happened.
`timescale 1ns/1ps
module tb_ssam_accelerator;
  import ssam_pkg::*;
  import ssam_tb_pkg::*;

  localparam int NV_VAULT = 1, NPU = 4, VLEN = 4, LW = VLEN * 32;
  localparam int VTW = $clog2(NPU + 1) + 2;
  localparam int NVEC = 40, D = 16, K = 20, BASE = 8192;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic accel_en, cfg_en, cfg_we, cfg_rvalid;
  logic [7:0] cfg_vault, cfg_pu;
  logic acc_sel;
  logic [1:0] cfg_sel;
  logic [15:0] cfg_addr;
  word_t cfg_wdata, cfg_rdata;
  logic [NV_VAULT-1:0][NPU-1:0] pu_busy, pu_done;
  pu_events_t [NV_VAULT-1:0][NPU-1:0] pu_events;
  logic [NV_VAULT-1:0] h_req_valid, h_req_ready, h_req_we, h_resp_valid;
  logic [NV_VAULT-1:0][31:0] h_req_addr, v_req_addr;
  logic [NV_VAULT-1:0][LW-1:0] h_req_wdata, h_resp_data, v_req_wdata, v_resp_data;
  logic [NV_VAULT-1:0][VLEN-1:0] h_req_wmask, v_req_wmask;
  logic [NV_VAULT-1:0] v_req_valid, v_req_ready, v_req_we, v_resp_valid;
  logic [NV_VAULT-1:0][VTW-1:0] v_req_tag, v_resp_tag;

  assign acc_sel = cfg_en && (cfg_vault == 8'hFF || cfg_vault == 8'd0);
  ssam_accelerator dut (.clk, .rst_n, .accel_en, .cfg_en(acc_sel), .cfg_we, .cfg_pu, .cfg_sel,
    .cfg_addr, .cfg_wdata, .cfg_rvalid, .cfg_rdata, .pu_busy(pu_busy[0]), .pu_done(pu_done[0]),
    .pu_events(pu_events[0]), .h_req_valid(h_req_valid[0]), .h_req_ready(h_req_ready[0]),
    .h_req_we(h_req_we[0]), .h_req_addr(h_req_addr[0]), .h_req_wdata(h_req_wdata[0]),
    .h_req_wmask(h_req_wmask[0]), .h_resp_valid(h_resp_valid[0]), .h_resp_data(h_resp_data[0]),
    .v_req_valid(v_req_valid[0]), .v_req_ready(v_req_ready[0]), .v_req_we(v_req_we[0]),
    .v_req_addr(v_req_addr[0]), .v_req_wdata(v_req_wdata[0]), .v_req_wmask(v_req_wmask[0]),
    .v_req_tag(v_req_tag[0]), .v_resp_valid(v_resp_valid[0]), .v_resp_tag(v_resp_tag[0]),
    .v_resp_data(v_resp_data[0]));

  for (genvar v = 0; v < NV_VAULT; v++) begin : g_vm
    ssam_vault_model #(.VLEN(VLEN), .TGW(VTW), .LAT(12), .STALL_PCT(10)) vm (.clk, .rst_n,
      .req_valid(v_req_valid[v]), .req_ready(v_req_ready[v]), .req_we(v_req_we[v]),
      .req_addr(v_req_addr[v]), .req_wdata(v_req_wdata[v]), .req_wmask(v_req_wmask[v]),
      .req_tag(v_req_tag[v]), .resp_valid(v_resp_valid[v]), .resp_tag(v_resp_tag[v]),
      .resp_data(v_resp_data[v]));
  end

  logic [NV_VAULT-1:0] contend;
  for (genvar v = 0; v < NV_VAULT; v++) begin : g_cont
    assign contend[v] = $countones(dut.p_req_valid) > 1;
  end

  int checks = 0, failures = 0;
  longint n_stall, n_pf, n_fwd, n_br, n_chain, n_push, n_pop, n_contend, n_bcast, n_bypass;

  always @(posedge clk) if (rst_n) begin
    for (int v = 0; v < NV_VAULT; v++) begin
      for (int p = 0; p < NPU; p++) begin
        n_stall += pu_events[v][p].mem_stall; n_pf += pu_events[v][p].pf_hit;
        n_fwd += pu_events[v][p].fwd_vector; n_br += pu_events[v][p].branch_taken;
        n_chain += pu_events[v][p].pq_chain; n_push += pu_events[v][p].push;
        n_pop += pu_events[v][p].pop;
      end
      if (contend[v]) n_contend++;
      if (h_req_valid[v] && h_req_ready[v]) n_bypass++;
    end
    if (cfg_en && cfg_we && cfg_vault == 8'hFF && cfg_pu == 8'hFF) n_bcast++;
  end

  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", s); end
  endtask

  task automatic cw(int v, int p, int sel, int a, word_t d);
    @(negedge clk);
    cfg_en = 1; cfg_we = 1; cfg_vault = 8'(v); cfg_pu = 8'(p); cfg_sel = 2'(sel);
    cfg_addr = 16'(a); cfg_wdata = d;
    @(negedge clk); cfg_en = 0; cfg_we = 0;
  endtask

  task automatic cr(int v, int p, int sel, int a, output word_t d);
    @(negedge clk);
    cfg_en = 1; cfg_we = 0; cfg_vault = 8'(v); cfg_pu = 8'(p); cfg_sel = 2'(sel); cfg_addr = 16'(a);
    @(negedge clk); cfg_en = 0; d = cfg_rdata;
  endtask

  function automatic word_t elem(int seed, int v, int p, int n, int d, int metric);
    return data_word(seed, (v * NPU + p) * NVEC + n, d, metric);
  endfunction

  // one query over every unit; metric_of: -1 = all Euclidean, else unit-dependent
  task automatic run_query(int seed, bit mixed);
    word_t q[], dv[];
    word_t dsts[NV_VAULT][NPU][];
    word_t gd[];
    int ids[$], gids[$];
    word_t r;
    longint t0;
    q = new[D];
    for (int d = 0; d < D; d++) begin
      q[d] = data_word(seed, 1 << 20, d, 0);
      cw(255, 255, 1, d, q[d]);                       // broadcast query
    end
    for (int v = 0; v < NV_VAULT; v++)
      for (int p = 0; p < NPU; p++) begin
        int metric;
        metric = mixed ? (v * NPU + p) % 3 : 0;
        if (metric == 1)
          for (int d = 0; d < D; d++) cw(v, p, 1, d, data_word(seed, 1 << 21, d, 1));
        dsts[v][p] = new[NVEC];
        for (int n = 0; n < NVEC; n++) begin
          dv = new[D];
          for (int d = 0; d < D; d++) begin
            dv[d] = elem(seed, v, p, n, d, metric);
            g_poke(v, BASE + (p * NVEC + n) * D + d, dv[d]);
          end
          if (metric == 1) begin
            word_t qh[];
            qh = new[D];
            for (int d = 0; d < D; d++) qh[d] = data_word(seed, 1 << 21, d, 1);
            dsts[v][p][n] = distance(1, dv, qh);
          end else dsts[v][p][n] = distance(metric, dv, q);
        end
        cw(v, p, 1, PARAM_BASE + 0, BASE + p * NVEC * D);
        cw(v, p, 1, PARAM_BASE + 1, NVEC);
        cw(v, p, 1, PARAM_BASE + 2, D);
        cw(v, p, 1, PARAM_BASE + 3, K);
        cw(v, p, 1, PARAM_BASE + 4, metric);
      end
    t0 = $time;
    cw(255, 255, 2, 0, 1);                              // broadcast start
    wait (&pu_done);
    $display("query %0d: all %0d units done after %0d cycles", seed, NV_VAULT * NPU, ($time - t0) / 10);
    // read back and check every unit; gather global candidates
    gd = new[NV_VAULT * NPU * K];
    for (int v = 0; v < NV_VAULT; v++)
      for (int p = 0; p < NPU; p++) begin
        topk(dsts[v][p], K, ids);
        for (int i = 0; i < K; i++) begin
          word_t gid, gval;
          cr(v, p, 1, RES_ID + i, gid);
          cr(v, p, 1, RES_VAL + i, gval);
          chk(gval == dsts[v][p][ids[i]] && gid < NVEC && dsts[v][p][gid] == gval,
              $sformatf("vault %0d unit %0d rank %0d", v, p, i));
          gd[(v * NPU + p) * K + i] = gval;
        end
      end
    if (!mixed) begin
      // host-side global top-k over the per-unit lists against a search of the whole dataset
      word_t all[];
      all = new[NV_VAULT * NPU * NVEC];
      for (int v = 0; v < NV_VAULT; v++)
        for (int p = 0; p < NPU; p++)
          for (int n = 0; n < NVEC; n++) all[(v * NPU + p) * NVEC + n] = dsts[v][p][n];
      topk(all, K, ids);
      topk(gd, K, gids);
      for (int i = 0; i < K; i++)
        chk(gd[gids[i]] == all[ids[i]], $sformatf("global rank %0d", i));
    end
  endtask

  task automatic g_poke(int v, int unsigned a, word_t d);
    // route to the vault model instance
    g_vm[0].vm.poke(a, d);
  endtask

  initial begin
    word_t prog[$];
    accel_en = 0; cfg_en = 0; cfg_we = 0; cfg_vault = 0; cfg_pu = 0; cfg_sel = 0; cfg_addr = 0;
    cfg_wdata = 0; h_req_valid = '0; h_req_we = '0; h_req_addr = '0; h_req_wdata = '0;
    h_req_wmask = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // 1. plain memory mode on vault 5: write a line, read it back
    @(negedge clk);
    h_req_valid[0] = 1; h_req_we[0] = 1; h_req_addr[0] = 32'd77; h_req_wmask[0] = '1;
    h_req_wdata[0] = {32'hA, 32'hB, 32'hC, 32'hD};
    @(posedge clk); while (!h_req_ready[0]) @(posedge clk);
    @(negedge clk); h_req_we[0] = 0;
    @(posedge clk); while (!h_req_ready[0]) @(posedge clk);
    @(negedge clk); h_req_valid[0] = 0;
    while (!h_resp_valid[0]) @(posedge clk);
    chk(h_resp_data[0] == {32'hA, 32'hB, 32'hC, 32'hD}, "plain-memory read after write");
    // 2. accelerator on; program broadcast
    accel_en = 1;
    knn_program(VLEN, 2, prog);
    foreach (prog[i]) cw(255, 255, 0, i, prog[i]);
    run_query(3, 0);
    run_query(4, 1);
    chk(n_stall > 0,   "memory stall happened");
    chk(n_pf > 0,      "prefetch hit happened");
    chk(n_fwd > 0,     "vector forwarding happened");
    chk(n_br > 0,      "taken branch happened");
    chk(n_chain > 0,   "priority queue chaining happened");
    chk(n_push > 0 && n_pop > 0, "stack push/pop happened");
    chk(n_contend > 0, "units of one vault contended");
    chk(n_bcast > 0,   "broadcast configuration happened");
    chk(n_bypass > 0,  "plain-memory bypass traffic happened");
    $display("events: stall=%0d pf_hit=%0d fwd=%0d branch=%0d chain=%0d push=%0d pop=%0d contend=%0d bcast=%0d bypass=%0d",
             n_stall, n_pf, n_fwd, n_br, n_chain, n_push, n_pop, n_contend, n_bcast, n_bypass);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
