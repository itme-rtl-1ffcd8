// miss_handler: miss line handler of the DRAM cache, with MSHRs.
//
// Requests are {set, tag} lines from the two hit/miss checkers (demand
// misses) and from the prefetch engine (prefetch pages). A request for a line
// that already has a miss status holding register (MSHR) is merged; a request
// for a page that an MSHR is still writing back waits. Otherwise, once an MSHR
// is free, the handler takes the set through one atomic metadata update:
// if the line is present by now it only broadcasts it; if not, it picks a
// victim (an invalid way, else the oldest way; ways held by MSHRs are never
// chosen), clears the victim's valid bit and opens an MSHR. The MSHR then
// writes the victim back to the SSD if it was dirty, reads the new page from
// the SSD into the victim's DRAM page, and finally takes the set through a
// second metadata update that marks the entry valid, clean and most recently
// used; the fill is broadcast so that waiting checkers replay. MSHRs progress
// independently, so several SSD reads are in flight at once.
//
// NVMe side: one command port per SSD channel, {id = MSHR index, op, LBA,
// DRAM page}; the NVMe controller moves the 4 KB page between SSD and DRAM and
// answers with the id. A write-back is not issued while a checker still holds
// a committed write to the victim page that DRAM has not taken (hz_valid /
// hz_page); once DRAM has taken it, the memory controller orders it before the
// NVMe controller's later read of the page. Pages are striped over the two SSDs by the lowest
// page-number bit (= lowest set bit), so LBA = page number >> 1. The paper
// gives the victim invalidation and the valid-setting metadata write, and the
// MSHRs for overlapping SSD reads; write-back of dirty victims, merging,
// request priorities (demand, then prefetch; fills before new lookups) and the
// striping are this design's choices.
module miss_handler
  import itme_pkg::*;
#(
  parameter int unsigned SET_BITS = itme_pkg::DEF_SET_BITS,
  parameter int unsigned N_MSHR   = 8,
  localparam int unsigned IDW     = (N_MSHR > 1) ? $clog2(N_MSHR) : 1,
  localparam int unsigned LBA_W   = TAG_BITS + SET_BITS - 1,
  localparam int unsigned DPAGE_W = SET_BITS + WAY_BITS
) (
  input  logic                clk,
  input  logic                rst_n,
  // demand misses, one port per checker
  input  logic [N_SLICE-1:0]  dm_valid,
  output logic [N_SLICE-1:0]  dm_ready,
  input  logic [N_SLICE-1:0][SET_BITS-1:0] dm_set,
  input  logic [N_SLICE-1:0][TAG_BITS-1:0] dm_tag,
  // prefetch pages
  input  logic                pf_valid,
  output logic                pf_ready,
  input  logic [SET_BITS-1:0] pf_set,
  input  logic [TAG_BITS-1:0] pf_tag,
  // metadata client
  output logic                m_req,
  output logic [SET_BITS-1:0] m_set,
  input  logic                m_gnt,
  input  logic                m_s2,
  input  meta_row_t           m_rd_row,
  output logic                m_wr_en,
  output meta_row_t           m_wr_row,
  // NVMe command / completion per channel
  output logic [NVME_CH-1:0]  nv_cmd_valid,
  input  logic [NVME_CH-1:0]  nv_cmd_ready,
  output logic [NVME_CH-1:0][IDW-1:0]     nv_cmd_id,
  output nvme_op_e [NVME_CH-1:0]          nv_cmd_op,
  output logic [NVME_CH-1:0][LBA_W-1:0]   nv_cmd_lba,
  output logic [NVME_CH-1:0][DPAGE_W-1:0] nv_cmd_dpage,
  input  logic [NVME_CH-1:0]  nv_cpl_valid,
  input  logic [NVME_CH-1:0][IDW-1:0]     nv_cpl_id,
  // DRAM writes the checkers have committed but DRAM has not yet taken
  input  logic [N_SLICE-1:0]  hz_valid,
  input  logic [N_SLICE-1:0][DPAGE_W-1:0] hz_page,
  // fill broadcast
  output logic                fill_valid,
  output logic [SET_BITS-1:0] fill_set,
  output logic [TAG_BITS-1:0] fill_tag,
  // event pulses
  output logic                ev_merge,
  output logic                ev_present,
  output logic                ev_evict_clean,
  output logic                ev_evict_dirty,
  output logic                ev_no_victim,
  output logic [IDW:0]        mshr_busy
);
  typedef enum logic [2:0] {M_FREE, M_WB_ISSUE, M_WB_WAIT, M_RD_ISSUE, M_RD_WAIT, M_FILL} mst_e;
  typedef struct packed {
    mst_e                st;
    logic [SET_BITS-1:0] set;
    logic [TAG_BITS-1:0] tag;
    logic [TAG_BITS-1:0] old_tag;
    logic [WAY_BITS-1:0] way;
  } mshr_t;

  typedef enum logic [2:0] {IDLE, LREQ, LS2, FREQ, FS2, RETRY} fsm_e;
  fsm_e  state;
  mshr_t mshr [N_MSHR];

  logic [SET_BITS-1:0] r_set;
  logic [TAG_BITS-1:0] r_tag;
  logic                held;
  logic [IDW-1:0]      fsel;

  // ---- MSHR summaries ----
  logic           any_fill, any_free;
  logic [IDW-1:0] fill_idx, free_idx;
  always_comb begin
    any_fill = 1'b0; fill_idx = '0;
    any_free = 1'b0; free_idx = '0;
    mshr_busy = '0;
    for (int i = N_MSHR - 1; i >= 0; i--) begin
      if (mshr[i].st == M_FILL) begin any_fill = 1'b1; fill_idx = IDW'(i); end
      if (mshr[i].st == M_FREE) begin any_free = 1'b1; free_idx = IDW'(i); end
      else mshr_busy = mshr_busy + 1'b1;
    end
  end

  // ---- input selection (demand 0, demand 1, prefetch) ----
  logic                c_valid;
  logic [1:0]          c_src;
  logic [SET_BITS-1:0] c_set;
  logic [TAG_BITS-1:0] c_tag;
  logic                c_match, c_wbblock, c_take;
  always_comb begin
    c_valid = 1'b1; c_src = 2'd2; c_set = pf_set; c_tag = pf_tag;
    if (dm_valid[0])      begin c_src = 2'd0; c_set = dm_set[0]; c_tag = dm_tag[0]; end
    else if (dm_valid[1]) begin c_src = 2'd1; c_set = dm_set[1]; c_tag = dm_tag[1]; end
    else if (!pf_valid)   c_valid = 1'b0;
    c_match = 1'b0; c_wbblock = 1'b0;
    for (int i = 0; i < N_MSHR; i++) begin
      if (mshr[i].st != M_FREE && mshr[i].set == c_set && mshr[i].tag == c_tag) c_match = 1'b1;
      if ((mshr[i].st == M_WB_ISSUE || mshr[i].st == M_WB_WAIT) &&
          mshr[i].set == c_set && mshr[i].old_tag == c_tag) c_wbblock = 1'b1;
    end
    // taken when idle, no fill is waiting, and it merges or can open an MSHR
    c_take = (state == IDLE) && !any_fill && c_valid && !c_wbblock && (c_match || any_free);
    dm_ready = '0;
    pf_ready = 1'b0;
    if (c_take) begin
      if (c_src == 2'd2) pf_ready = 1'b1;
      else dm_ready[c_src[0]] = 1'b1;
    end
  end
  assign ev_merge = c_take && c_match;

  // ---- metadata operations ----
  logic [WAYS-1:0]     reserved;
  logic                l_hit, v_ok;
  logic [WAY_BITS-1:0] l_way, v_way;
  meta_entry_t         v_ent;
  always_comb begin
    reserved = '0;
    for (int i = 0; i < N_MSHR; i++)
      if (mshr[i].st != M_FREE && mshr[i].set == r_set) reserved[mshr[i].way] = 1'b1;
    l_hit = row_hit(m_rd_row, r_tag, l_way);
    v_ok  = pick_victim(m_rd_row, reserved, v_way);
    v_ent = m_rd_row[v_way];

    m_req    = (state == LREQ) || (state == FREQ);
    m_set    = (state == FREQ) ? mshr[fsel].set : r_set;
    m_wr_en  = 1'b0;
    m_wr_row = m_rd_row;
    fill_valid = 1'b0;
    fill_set   = r_set;
    fill_tag   = r_tag;
    if (state == LS2 && m_s2 && !l_hit && v_ok) begin
      m_wr_en = 1'b1;
      m_wr_row[v_way].valid = 1'b0;
    end
    if (state == LS2 && m_s2 && l_hit) fill_valid = 1'b1;
    if (state == FS2 && m_s2) begin
      m_wr_en  = 1'b1;
      m_wr_row = lru_touch(m_rd_row, mshr[fsel].way);
      m_wr_row[mshr[fsel].way].valid = 1'b1;
      m_wr_row[mshr[fsel].way].tag   = mshr[fsel].tag;
      m_wr_row[mshr[fsel].way].dirty = 1'b0;
      fill_valid = 1'b1;
      fill_set   = mshr[fsel].set;
      fill_tag   = mshr[fsel].tag;
    end
  end
  assign ev_present     = (state == LS2) && m_s2 && l_hit;
  assign ev_no_victim   = (state == LS2) && m_s2 && !l_hit && !v_ok;
  assign ev_evict_dirty = (state == LS2) && m_s2 && !l_hit && v_ok && v_ent.valid && v_ent.dirty;
  assign ev_evict_clean = (state == LS2) && m_s2 && !l_hit && v_ok && v_ent.valid && !v_ent.dirty;

  // ---- write-back hold: a checker still owes DRAM a write to the page ----
  logic [N_MSHR-1:0] wb_hold;
  always_comb begin
    for (int i = 0; i < N_MSHR; i++) begin
      wb_hold[i] = 1'b0;
      for (int s = 0; s < N_SLICE; s++)
        if (hz_valid[s] && hz_page[s] == {mshr[i].set, mshr[i].way}) wb_hold[i] = 1'b1;
    end
  end

  // ---- NVMe command selection, one per channel ----
  logic [NVME_CH-1:0]          iss_any;
  logic [NVME_CH-1:0][IDW-1:0] iss_idx;
  always_comb begin
    for (int c = 0; c < NVME_CH; c++) begin
      iss_any[c] = 1'b0;
      iss_idx[c] = '0;
      for (int i = N_MSHR - 1; i >= 0; i--) begin
        if (((mshr[i].st == M_WB_ISSUE && !wb_hold[i]) || mshr[i].st == M_RD_ISSUE) &&
            int'(mshr[i].set[0]) == c) begin
          iss_any[c] = 1'b1;
          iss_idx[c] = IDW'(i);
        end
      end
      nv_cmd_valid[c] = iss_any[c];
      nv_cmd_id[c]    = iss_idx[c];
      nv_cmd_op[c]    = (mshr[iss_idx[c]].st == M_WB_ISSUE) ? NV_WRITE : NV_READ;
      nv_cmd_lba[c]   = {(mshr[iss_idx[c]].st == M_WB_ISSUE) ? mshr[iss_idx[c]].old_tag
                                                              : mshr[iss_idx[c]].tag,
                         mshr[iss_idx[c]].set[SET_BITS-1:1]};
      nv_cmd_dpage[c] = {mshr[iss_idx[c]].set, mshr[iss_idx[c]].way};
    end
  end

  // ---- state ----
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= IDLE;
      r_set <= '0;
      r_tag <= '0;
      held  <= 1'b0;
      fsel  <= '0;
      for (int i = 0; i < N_MSHR; i++) mshr[i] <= '{st: M_FREE, default: '0};
    end else begin
      unique case (state)
        IDLE: begin
          if (any_fill) begin
            fsel  <= fill_idx;
            state <= FREQ;
          end else if (c_take && !c_match) begin
            r_set <= c_set;
            r_tag <= c_tag;
            held  <= 1'b1;
            state <= LREQ;
          end
        end
        LREQ: if (m_gnt) state <= LS2;
        LS2: if (m_s2) begin
          if (l_hit) begin
            held  <= 1'b0;
            state <= IDLE;
          end else if (v_ok) begin
            mshr[free_idx] <= '{st:      (v_ent.valid && v_ent.dirty) ? M_WB_ISSUE : M_RD_ISSUE,
                                set:     r_set,
                                tag:     r_tag,
                                old_tag: v_ent.tag,
                                way:     v_way};
            held  <= 1'b0;
            state <= IDLE;
          end else begin
            state <= RETRY;
          end
        end
        RETRY: if (any_fill) begin
          fsel  <= fill_idx;
          state <= FREQ;
        end
        FREQ: if (m_gnt) state <= FS2;
        FS2: if (m_s2) begin
          mshr[fsel].st <= M_FREE;
          state <= held ? LREQ : IDLE;
        end
        default: state <= IDLE;
      endcase
      for (int c = 0; c < NVME_CH; c++) begin
        if (iss_any[c] && nv_cmd_ready[c])
          mshr[iss_idx[c]].st <= (mshr[iss_idx[c]].st == M_WB_ISSUE) ? M_WB_WAIT : M_RD_WAIT;
        if (nv_cpl_valid[c]) begin
          if (mshr[nv_cpl_id[c]].st == M_WB_WAIT) mshr[nv_cpl_id[c]].st <= M_RD_ISSUE;
          else if (mshr[nv_cpl_id[c]].st == M_RD_WAIT) mshr[nv_cpl_id[c]].st <= M_FILL;
        end
      end
    end
  end

  // A completion must belong to an MSHR that is waiting for one.
  for (genvar c = 0; c < NVME_CH; c++) begin : g_chk
    a_cpl_waiting: assert property (@(posedge clk) disable iff (!rst_n)
      nv_cpl_valid[c] |-> (mshr[nv_cpl_id[c]].st == M_WB_WAIT || mshr[nv_cpl_id[c]].st == M_RD_WAIT));
  end
endmodule
