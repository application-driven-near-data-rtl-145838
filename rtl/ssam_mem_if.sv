// ssam_mem_if: the processing unit's memory interface to the vault DRAM, with the small
// prefetch buffer behind the MEM_FETCH instruction.
//
// The unit has no cache hierarchy. Data vectors are scanned once, so DRAM is read in lines of
// VLEN words (one vector register) into a buffer of PF_ENTRIES lines. MEM_FETCH names a line
// ahead of use: the interface issues its read and lets the program run on. A LOAD that finds
// its line in the buffer takes no extra time; a LOAD that misses stalls the pipeline (stall = 1)
// until the line has arrived. A vector LOAD (rd_consume) frees the line it used, since streamed
// data is read once; a scalar LOAD keeps it. A STORE to DRAM is posted as a masked line write and updates a
// buffered copy of that line. Entries are taken free entry first, else round-robin; an entry still waiting for data
// is never replaced, and a request that cannot be issued yet stalls.
//
// Vault side: one request register with a valid/ready handshake (m_req_*; m_req_addr is a line
// address, m_req_tag names the buffer entry) and responses m_resp_* carrying the tag back, in
// any order. PU side, all combinational in the execute stage: rd_* (with rd_hit/rd_line),
// fetch_*, wr_*. ev_pf_hit pulses when a LOAD hits a line brought in by MEM_FETCH.
// The MEM_FETCH instruction is the paper's; the buffer, its size and the handshake are this
// design's choices.
module ssam_mem_if #(
  parameter int unsigned VLEN       = 4,
  parameter int unsigned PF_ENTRIES = 4,
  parameter int unsigned AW         = 32,
  localparam int unsigned TW        = (PF_ENTRIES > 1) ? $clog2(PF_ENTRIES) : 1,
  localparam int unsigned LW        = VLEN * 32
) (
  input  logic            clk,
  input  logic            rst_n,
  // processing unit side
  input  logic            rd_req,
  input  logic [AW-1:0]   rd_addr,
  input  logic            rd_consume,
  output logic            rd_hit,
  output logic [LW-1:0]   rd_line,
  input  logic            fetch_req,
  input  logic [AW-1:0]   fetch_addr,
  input  logic            wr_req,
  input  logic [AW-1:0]   wr_addr,
  input  logic [LW-1:0]   wr_line,
  input  logic [VLEN-1:0] wr_mask,
  output logic            stall,
  output logic            ev_pf_hit,
  // vault side
  output logic            m_req_valid,
  input  logic            m_req_ready,
  output logic            m_req_we,
  output logic [AW-1:0]   m_req_addr,
  output logic [LW-1:0]   m_req_wdata,
  output logic [VLEN-1:0] m_req_wmask,
  output logic [TW-1:0]   m_req_tag,
  input  logic            m_resp_valid,
  input  logic [TW-1:0]   m_resp_tag,
  input  logic [LW-1:0]   m_resp_data
);

  localparam int unsigned OFS = (VLEN > 1) ? $clog2(VLEN) : 0;

  logic [PF_ENTRIES-1:0] vld_q, pend_q, pf_q;
  logic [AW-1:0]         tag_q  [PF_ENTRIES];
  logic [LW-1:0]         data_q [PF_ENTRIES];
  logic [TW-1:0]         ptr_q;

  logic [AW-1:0] rd_line_a, fe_line_a, wr_line_a;
  assign rd_line_a = rd_addr >> OFS;
  assign fe_line_a = fetch_addr >> OFS;
  assign wr_line_a = wr_addr >> OFS;

  logic [PF_ENTRIES-1:0] rd_m, rd_pm, fe_m, fe_pm, wr_m, wr_pm;
  always_comb begin
    for (int i = 0; i < PF_ENTRIES; i++) begin
      rd_m[i]  = vld_q[i]  && tag_q[i] == rd_line_a;
      rd_pm[i] = pend_q[i] && tag_q[i] == rd_line_a;
      fe_m[i]  = vld_q[i]  && tag_q[i] == fe_line_a;
      fe_pm[i] = pend_q[i] && tag_q[i] == fe_line_a;
      wr_m[i]  = vld_q[i]  && tag_q[i] == wr_line_a;
      wr_pm[i] = pend_q[i] && tag_q[i] == wr_line_a;
    end
  end

  assign rd_hit = |rd_m;
  always_comb begin
    rd_line   = '0;
    ev_pf_hit = 1'b0;
    for (int i = 0; i < PF_ENTRIES; i++)
      if (rd_m[i]) begin
        rd_line   = rd_line | data_q[i];
        ev_pf_hit = rd_req && pf_q[i];
      end
  end

  logic          slot_free, victim_ok, have_free;
  logic [TW-1:0] victim, free_idx;
  always_comb begin
    have_free = 1'b0;
    free_idx  = '0;
    for (int i = PF_ENTRIES - 1; i >= 0; i--)
      if (!vld_q[i] && !pend_q[i]) begin
        have_free = 1'b1;
        free_idx  = TW'(i);
      end
  end
  assign victim    = have_free ? free_idx : ptr_q;
  assign slot_free = !m_req_valid;
  assign victim_ok = !pend_q[victim];

  logic alloc_rd, alloc_fe, issue_wr;
  always_comb begin
    alloc_rd = 1'b0;
    alloc_fe = 1'b0;
    issue_wr = 1'b0;
    stall    = 1'b0;
    if (rd_req && !rd_hit) begin
      stall    = 1'b1;
      alloc_rd = !(|rd_pm) && slot_free && victim_ok;
    end else if (fetch_req && !(|fe_m) && !(|fe_pm)) begin
      alloc_fe = slot_free && victim_ok;
      stall    = !alloc_fe;
    end else if (wr_req) begin
      issue_wr = slot_free && !(|wr_pm);
      stall    = !issue_wr;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vld_q       <= '0;
      pend_q      <= '0;
      pf_q        <= '0;
      ptr_q       <= '0;
      m_req_valid <= 1'b0;
      m_req_we    <= 1'b0;
      m_req_addr  <= '0;
      m_req_wdata <= '0;
      m_req_wmask <= '0;
      m_req_tag   <= '0;
      for (int i = 0; i < PF_ENTRIES; i++) begin
        tag_q[i]  <= '0;
        data_q[i] <= '0;
      end
    end else begin
      if (m_req_valid && m_req_ready) m_req_valid <= 1'b0;
      if (m_resp_valid) begin
        data_q[m_resp_tag] <= m_resp_data;
        vld_q[m_resp_tag]  <= 1'b1;
        pend_q[m_resp_tag] <= 1'b0;
      end
      if (rd_req && rd_hit && rd_consume) vld_q <= vld_q & ~rd_m;
      if (alloc_rd || alloc_fe) begin
        vld_q[victim]  <= 1'b0;
        pend_q[victim] <= 1'b1;
        pf_q[victim]   <= alloc_fe;
        tag_q[victim]  <= alloc_fe ? fe_line_a : rd_line_a;
        if (!have_free) ptr_q <= (ptr_q == TW'(PF_ENTRIES - 1)) ? '0 : ptr_q + 1'b1;
        m_req_valid    <= 1'b1;
        m_req_we       <= 1'b0;
        m_req_addr     <= alloc_fe ? fe_line_a : rd_line_a;
        m_req_wmask    <= '0;
        m_req_tag      <= victim;
      end
      if (issue_wr) begin
        m_req_valid <= 1'b1;
        m_req_we    <= 1'b1;
        m_req_addr  <= wr_line_a;
        m_req_wdata <= wr_line;
        m_req_wmask <= wr_mask;
        m_req_tag   <= '0;
        for (int i = 0; i < PF_ENTRIES; i++)
          if (wr_m[i])
            for (int l = 0; l < VLEN; l++)
              if (wr_mask[l]) data_q[i][l*32 +: 32] <= wr_line[l*32 +: 32];
      end
    end
  end

  a_req_stable: assert property (@(posedge clk) disable iff (!rst_n)
    m_req_valid && !m_req_ready |=> m_req_valid && $stable(m_req_addr) && $stable(m_req_we));

endmodule
