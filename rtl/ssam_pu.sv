// ssam_pu: one similarity-search processing unit, a scalar and a vector datapath driven by a
// single instruction stream, plus the kNN support units: a chain of hardware priority queues
// for the top-k, a stack unit for index backtracking, a scratchpad and a memory interface with
// a MEM_FETCH prefetch buffer.
//
// Pipeline, three stages:
//   fetch      the instruction memory is read synchronously; the address is chosen in the same
//              cycle from the execute stage's outcome, so a taken branch costs no bubble.
//   execute    decode, register read with forwarding from write-back, scalar ALU, VLEN-lane
//              vector ALU, branch resolution, address generation, scratchpad/DRAM access
//              start, priority-queue insert/read, stack push/pop.
//   write-back load data (scratchpad row or buffered DRAM line) or execute result is written to
//              the scalar or vector register file and forwarded to execute in the same cycle,
//              so dependent vector operations chain back to back with no stall.
// The only stall is the memory interface's: a DRAM LOAD that misses the prefetch buffer, or a
// request that cannot be issued yet.
//
// Host port (h_*): h_sel 0 writes the instruction memory, 1 reads/writes one scratchpad word
// (only while the unit is idle), 2 is control: writing bit 0 starts the program at address 0;
// reading address 0 gives {busy, done}, address 1 the cycle count of the last run. Read data
// appears on h_rdata the cycle after the request (h_rvalid). The program ends with HALT.
//
// From the paper: the scalar/vector organisation, one instruction stream, 32 scalar and 8 vector
// registers, forwarding for chaining, 16-entry shift-register priority queues that chain for
// larger k, the stack unit, a 32 KB scratchpad, 2 KB instruction memory and the instruction set.
// This design's own choices: the encoding, the three-stage pipeline, HALT, the address map,
// the host port, two chained queues (k up to 32) and the 4-line prefetch buffer.
module ssam_pu
  import ssam_pkg::*;
#(
  parameter int unsigned VLEN       = 4,
  parameter int unsigned SPAD_WORDS = 8192,   // 32 KB
  parameter int unsigned IMEM_WORDS = 512,    // 2 KB
  parameter int unsigned PQ_COUNT   = 2,
  parameter int unsigned STACK_DEPTH= 20,
  parameter int unsigned PF_ENTRIES = 4,
  localparam int unsigned LW        = VLEN * XLEN,
  localparam int unsigned TW        = (PF_ENTRIES > 1) ? $clog2(PF_ENTRIES) : 1
) (
  input  logic            clk,
  input  logic            rst_n,
  // host configuration port
  input  logic            h_en,
  input  logic            h_we,
  input  logic [1:0]      h_sel,
  input  logic [15:0]     h_addr,
  input  word_t           h_wdata,
  output logic            h_rvalid,
  output word_t           h_rdata,
  output logic            busy,
  output logic            done,
  output pu_events_t      events,
  // vault port
  output logic            m_req_valid,
  input  logic            m_req_ready,
  output logic            m_req_we,
  output logic [31:0]     m_req_addr,
  output logic [LW-1:0]   m_req_wdata,
  output logic [VLEN-1:0] m_req_wmask,
  output logic [TW-1:0]   m_req_tag,
  input  logic            m_resp_valid,
  input  logic [TW-1:0]   m_resp_tag,
  input  logic [LW-1:0]   m_resp_data
);

  localparam int unsigned OFS   = (VLEN > 1) ? $clog2(VLEN) : 1;
  localparam int unsigned IAW   = $clog2(IMEM_WORDS);
  localparam int unsigned RAW   = $clog2(SPAD_WORDS / VLEN);
  localparam int unsigned PQAW  = $clog2(PQ_DEPTH);
  localparam int unsigned PQN_W = $clog2(PQ_COUNT + 1);

  // ---------------------------------------------------------------- control state
  logic             running_q, done_q;
  logic             ex_valid_q;
  logic [IAW-1:0]   ex_pc_q;
  word_t            cycles_q;
  logic [PQN_W-1:0] pq_nen_q;   // number of enabled chained queues

  // ---------------------------------------------------------------- fetch
  word_t          instr;
  logic [IAW-1:0] imem_raddr;
  logic           imem_we;

  assign imem_we = h_en && h_we && h_sel == 2'd0;

  ssam_imem #(.WORDS(IMEM_WORDS)) u_imem (
    .clk  (clk),
    .we   (imem_we),
    .waddr(h_addr[IAW-1:0]),
    .wdata(h_wdata),
    .raddr(imem_raddr),
    .rdata(instr)
  );

  // ---------------------------------------------------------------- decode / register read
  ctrl_t c;
  ssam_decoder u_dec (.instr(instr), .c(c));

  word_t          s_rd1, s_rd2, s_rd3;
  logic [LW-1:0]  v_rd1, v_rd2, v_rd3;

  // write-back stage
  logic           wb_valid_q, wb_s_we_q, wb_v_we_q, wb_load_q, wb_dram_q;
  logic [4:0]     wb_rd_q;
  logic [OFS-1:0] wb_lane_q;
  word_t          wb_s_q;
  logic [LW-1:0]  wb_v_q, wb_line_q;
  logic [LW-1:0]  spad_rdata;
  word_t          wb_s_val;
  logic [LW-1:0]  wb_v_val, wb_ld_line;
  logic           wb_s_we, wb_v_we;

  assign wb_ld_line = wb_dram_q ? wb_line_q : spad_rdata;
  assign wb_s_val   = wb_load_q ? wb_ld_line[wb_lane_q*XLEN +: XLEN] : wb_s_q;
  assign wb_v_val   = wb_load_q ? wb_ld_line : wb_v_q;
  assign wb_s_we    = wb_valid_q && wb_s_we_q;
  assign wb_v_we    = wb_valid_q && wb_v_we_q;

  ssam_regfile #(.NREGS(NUM_SREGS), .WIDTH(XLEN), .ZERO_REG0(1'b1)) u_srf (
    .clk(clk), .rst_n(rst_n),
    .ra1(c.rs1), .ra2(c.rs2), .ra3(c.rd), .rd1(s_rd1), .rd2(s_rd2), .rd3(s_rd3),
    .we(wb_s_we), .wa(wb_rd_q), .wd(wb_s_val)
  );

  ssam_regfile #(.NREGS(NUM_VREGS), .WIDTH(LW), .ZERO_REG0(1'b0)) u_vrf (
    .clk(clk), .rst_n(rst_n),
    .ra1(c.rs1[2:0]), .ra2(c.rs2[2:0]), .ra3(c.rd[2:0]), .rd1(v_rd1), .rd2(v_rd2), .rd3(v_rd3),
    .we(wb_v_we), .wa(wb_rd_q[2:0]), .wd(wb_v_val)
  );

  // forwarding from write-back
  logic f_s1, f_s2, f_s3, f_v1, f_v2, f_v3;
  assign f_s1 = wb_s_we && wb_rd_q == c.rs1 && c.rs1 != 5'd0;
  assign f_s2 = wb_s_we && wb_rd_q == c.rs2 && c.rs2 != 5'd0;
  assign f_s3 = wb_s_we && wb_rd_q == c.rd  && c.rd  != 5'd0;
  assign f_v1 = wb_v_we && wb_rd_q[2:0] == c.rs1[2:0];
  assign f_v2 = wb_v_we && wb_rd_q[2:0] == c.rs2[2:0];
  assign f_v3 = wb_v_we && wb_rd_q[2:0] == c.rd[2:0];

  word_t         sa, sb_reg, sc;
  logic [LW-1:0] va, vb_reg, vc;
  assign sa     = f_s1 ? wb_s_val : s_rd1;
  assign sb_reg = f_s2 ? wb_s_val : s_rd2;
  assign sc     = f_s3 ? wb_s_val : s_rd3;
  assign va     = f_v1 ? wb_v_val : v_rd1;
  assign vb_reg = f_v2 ? wb_v_val : v_rd2;
  assign vc     = f_v3 ? wb_v_val : v_rd3;

  // ---------------------------------------------------------------- execute
  word_t         s_y;
  logic [LW-1:0] v_y;
  word_t         sb;
  logic [LW-1:0] vb;
  assign sb = c.use_imm ? c.imm : sb_reg;
  assign vb = c.use_imm ? {VLEN{c.imm}} : vb_reg;

  ssam_alu u_salu (.op(c.alu_op), .a(sa), .b(sb), .c(sc), .y(s_y));
  ssam_vector_alu #(.VLEN(VLEN)) u_valu (.op(c.alu_op), .a(va), .b(vb), .c(vc), .y(v_y));

  // memory address (word address)
  word_t          addr;
  logic           is_spad;
  logic [OFS-1:0] lane;
  assign addr    = sa + c.imm;
  assign is_spad = addr < word_t'(SPAD_WORDS);
  assign lane    = (VLEN > 1) ? addr[OFS-1:0] : '0;

  logic [LW-1:0]   st_line;
  logic [VLEN-1:0] st_mask;
  always_comb begin
    if (c.vec) begin
      st_line = vc;
      st_mask = '1;
    end else begin
      st_line = {VLEN{sc}};
      st_mask = VLEN'(1) << lane;
    end
  end

  logic ld, st, fe;
  assign ld = ex_valid_q && c.load;
  assign st = ex_valid_q && c.store;
  assign fe = ex_valid_q && c.fetch;

  // memory interface
  logic          mi_stall, mi_hit, mi_pf_hit;
  logic [LW-1:0] mi_line;
  ssam_mem_if #(.VLEN(VLEN), .PF_ENTRIES(PF_ENTRIES), .AW(32)) u_mem_if (
    .clk(clk), .rst_n(rst_n),
    .rd_req(ld && !is_spad), .rd_addr(addr), .rd_consume(c.vec), .rd_hit(mi_hit), .rd_line(mi_line),
    .fetch_req(fe), .fetch_addr(addr),
    .wr_req(st && !is_spad), .wr_addr(addr), .wr_line(st_line), .wr_mask(st_mask),
    .stall(mi_stall), .ev_pf_hit(mi_pf_hit),
    .m_req_valid(m_req_valid), .m_req_ready(m_req_ready), .m_req_we(m_req_we),
    .m_req_addr(m_req_addr), .m_req_wdata(m_req_wdata), .m_req_wmask(m_req_wmask),
    .m_req_tag(m_req_tag), .m_resp_valid(m_resp_valid), .m_resp_tag(m_resp_tag),
    .m_resp_data(m_resp_data)
  );

  logic ex_go;
  assign ex_go = ex_valid_q && !mi_stall;

  // scratchpad, shared with the host while idle
  logic            sp_en, sp_we;
  logic [RAW-1:0]  sp_row;
  logic [VLEN-1:0] sp_mask;
  logic [LW-1:0]   sp_wdata;
  logic            h_spad;
  logic [OFS-1:0]  h_lane;
  assign h_spad = h_en && h_sel == 2'd1 && !running_q;
  assign h_lane = (VLEN > 1) ? h_addr[OFS-1:0] : '0;

  always_comb begin
    if (running_q) begin
      sp_en    = ex_go && (c.load || c.store) && is_spad;
      sp_we    = c.store;
      sp_row   = RAW'(addr >> ((VLEN > 1) ? OFS : 0));
      sp_mask  = st_mask;
      sp_wdata = st_line;
    end else begin
      sp_en    = h_spad;
      sp_we    = h_we;
      sp_row   = RAW'(h_addr >> ((VLEN > 1) ? OFS : 0));
      sp_mask  = VLEN'(1) << h_lane;
      sp_wdata = {VLEN{h_wdata}};
    end
  end

  ssam_scratchpad #(.VLEN(VLEN), .WORDS(SPAD_WORDS)) u_spad (
    .clk(clk), .en(sp_en), .we(sp_we), .row(sp_row), .wmask(sp_mask),
    .wdata(sp_wdata), .rdata(spad_rdata)
  );

  // stack unit
  word_t stk_top;
  logic  stk_empty, stk_full, stk_ovf, stk_unf;
  ssam_stack #(.DEPTH(STACK_DEPTH)) u_stack (
    .clk(clk), .rst_n(rst_n),
    .push(ex_go && c.push), .push_data(sa), .pop(ex_go && c.pop), .top_data(stk_top),
    .empty(stk_empty), .full(stk_full), .overflow(stk_ovf), .underflow(stk_unf)
  );

  // chained priority queues
  logic  [PQ_COUNT:0] ch_valid;
  word_t              ch_id  [PQ_COUNT+1];
  word_t              ch_val [PQ_COUNT+1];
  logic  [PQ_COUNT-1:0] q_rvalid;
  word_t              q_rid  [PQ_COUNT];
  word_t              q_rval [PQ_COUNT];
  logic               pq_clear;

  assign pq_clear    = ex_go && c.pq_reset;
  assign ch_valid[0] = ex_go && c.pq_insert;
  assign ch_id[0]    = sa;
  assign ch_val[0]   = sb_reg;

  for (genvar q = 0; q < PQ_COUNT; q++) begin : g_pq
    ssam_priority_queue #(.DEPTH(PQ_DEPTH)) u_pq (
      .clk(clk), .rst_n(rst_n),
      .en(PQN_W'(q) < pq_nen_q), .clear(pq_clear),
      .ins_valid(ch_valid[q]), .ins_id(ch_id[q]), .ins_value(ch_val[q]),
      .evict_valid(ch_valid[q+1]), .evict_id(ch_id[q+1]), .evict_value(ch_val[q+1]),
      .rd_pos(sa[PQAW-1:0]), .rd_valid(q_rvalid[q]), .rd_id(q_rid[q]), .rd_value(q_rval[q])
    );
  end

  word_t pq_out;
  always_comb begin
    pq_out = '0;
    for (int q = 0; q < PQ_COUNT; q++)
      if ((sa >> PQAW) == word_t'(q))
        pq_out = !q_rvalid[q] ? '1 : (c.imm[0] ? q_rval[q] : q_rid[q]);
  end

  // branch resolution
  logic           taken;
  logic [IAW-1:0] target;
  always_comb begin
    unique case (c.br)
      BR_NE:   taken = sc != sa;
      BR_GT:   taken = $signed(sc) > $signed(sa);
      BR_LT:   taken = $signed(sc) < $signed(sa);
      BR_EQ:   taken = sc == sa;
      BR_JUMP: taken = 1'b1;
      default: taken = 1'b0;
    endcase
    taken  = taken && ex_go;
    target = (c.br == BR_JUMP) ? c.imm[IAW-1:0] : ex_pc_q + c.imm[IAW-1:0];
  end

  always_comb begin
    if (!running_q || !ex_valid_q) imem_raddr = '0;
    else if (!ex_go)               imem_raddr = ex_pc_q;
    else if (taken)                imem_raddr = target;
    else                           imem_raddr = ex_pc_q + 1'b1;
  end

  // scalar / vector results for write-back
  word_t         s_res;
  logic [LW-1:0] v_res;
  always_comb begin
    unique case (c.wb_sel)
      WB_PQ:     s_res = pq_out;
      WB_STACK:  s_res = stk_top;
      WB_VSMOVE: s_res = va[c.imm[OFS-1:0]*XLEN +: XLEN];
      default:   s_res = s_y;
    endcase
    v_res = v_y;
    if (c.svmove) begin
      v_res = vc;
      v_res[c.imm[OFS-1:0]*XLEN +: XLEN] = sa;
    end
  end

  // ---------------------------------------------------------------- sequential
  logic start;
  assign start = h_en && h_we && h_sel == 2'd2 && h_addr == 16'd0 && h_wdata[0] && !running_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running_q  <= 1'b0;
      done_q     <= 1'b0;
      ex_valid_q <= 1'b0;
      ex_pc_q    <= '0;
      cycles_q   <= '0;
      pq_nen_q   <= PQN_W'(PQ_COUNT);
      wb_valid_q <= 1'b0;
      wb_s_we_q  <= 1'b0;
      wb_v_we_q  <= 1'b0;
      wb_load_q  <= 1'b0;
      wb_dram_q  <= 1'b0;
      wb_rd_q    <= '0;
      wb_lane_q  <= '0;
      wb_s_q     <= '0;
      wb_v_q     <= '0;
      wb_line_q  <= '0;
    end else begin
      if (start) begin
        running_q  <= 1'b1;
        done_q     <= 1'b0;
        ex_valid_q <= 1'b1;
        ex_pc_q    <= '0;
        cycles_q   <= '0;
      end else if (running_q) begin
        cycles_q <= cycles_q + 1'b1;
        if (ex_go) begin
          ex_pc_q <= imem_raddr;
          if (c.halt) begin
            running_q  <= 1'b0;
            done_q     <= 1'b1;
            ex_valid_q <= 1'b0;
          end
        end
      end
      if (pq_clear)
        pq_nen_q <= (c.imm == '0 || c.imm > word_t'(PQ_COUNT)) ? PQN_W'(PQ_COUNT)
                                                              : PQN_W'(c.imm);
      // write-back stage register
      wb_valid_q <= ex_go;
      if (ex_go) begin
        wb_s_we_q <= c.s_we;
        wb_v_we_q <= c.v_we;
        wb_load_q <= c.load;
        wb_dram_q <= !is_spad;
        wb_rd_q   <= c.rd;
        wb_lane_q <= lane;
        wb_s_q    <= s_res;
        wb_v_q    <= v_res;
        wb_line_q <= mi_line;
      end
    end
  end

  // ---------------------------------------------------------------- host read-back
  logic       h_rd_q;
  logic [1:0] h_sel_q;
  logic [OFS-1:0] h_lane_q;
  logic       h_a1_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      h_rd_q   <= 1'b0;
      h_sel_q  <= '0;
      h_lane_q <= '0;
      h_a1_q   <= 1'b0;
    end else begin
      h_rd_q   <= h_en && !h_we;
      h_sel_q  <= h_sel;
      h_lane_q <= h_lane;
      h_a1_q   <= h_addr[0];
    end
  end

  assign h_rvalid = h_rd_q;
  always_comb begin
    if (h_sel_q == 2'd1)  h_rdata = spad_rdata[h_lane_q*XLEN +: XLEN];
    else if (h_a1_q)      h_rdata = cycles_q;
    else                  h_rdata = {30'd0, running_q, done_q};
  end

  assign busy = running_q;
  assign done = done_q;

  always_comb begin
    events              = '0;
    events.mem_stall    = ex_valid_q && mi_stall;
    events.fwd_scalar   = ex_go && (f_s1 || f_s2 || f_s3) && !c.vec;
    events.fwd_vector   = ex_go && (f_v1 || f_v2 || f_v3) && c.vec && c.v_we;
    events.branch_taken = taken;
    events.pq_insert    = ch_valid[0];
    events.pq_chain     = (PQ_COUNT > 1) && ch_valid[1] && pq_nen_q > PQN_W'(1);
    events.pf_hit       = ex_go && mi_pf_hit;
    events.push         = ex_go && c.push;
    events.pop          = ex_go && c.pop;
    events.halt         = ex_go && c.halt;
  end

  a_legal_op: assert property (@(posedge clk) disable iff (!rst_n)
    ex_valid_q |-> c.valid_op);
  a_no_stack_ovf: assert property (@(posedge clk) disable iff (!rst_n) !stk_ovf && !stk_unf);

endmodule
