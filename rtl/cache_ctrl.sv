// cache_ctrl: the cache controller of the CXL-hybrid memory.
//
// Holds the hardware-managed DRAM cache's control: two hit/miss checkers (one
// per CXL .mem slice), the metadata buffer behind the metadata interface
// controller (clients: checker 0, checker 1, miss line handler), the miss
// line handler with its MSHRs, and the user-directed prefetch path (register
// set on CXL.io feeding the prefetch command queue and page walker, whose
// pages go to the miss line handler). Outputs are one DRAM request stream per
// slice, already translated to DRAM-cache line addresses, and one NVMe
// command port per SSD channel. After reset no host request is served until
// the metadata buffer has been cleared (init_done). The structure follows the
// paper's figure of the device; the wiring details are this design's.
module cache_ctrl
  import itme_pkg::*;
#(
  parameter int unsigned SET_BITS   = itme_pkg::DEF_SET_BITS,
  parameter int unsigned N_MSHR     = 8,
  parameter int unsigned FIFO_DEPTH = 16,
  localparam int unsigned ADDR_W    = TAG_BITS + SET_BITS + PAGE_BITS,
  localparam int unsigned DADDR_W   = SET_BITS + WAY_BITS + PAGE_BITS - LINE_BITS,
  localparam int unsigned IDW       = (N_MSHR > 1) ? $clog2(N_MSHR) : 1,
  localparam int unsigned LBA_W     = TAG_BITS + SET_BITS - 1,
  localparam int unsigned DPAGE_W   = SET_BITS + WAY_BITS,
  localparam int unsigned LW        = $clog2(FIFO_DEPTH)
) (
  input  logic clk,
  input  logic rst_n,
  output logic init_done,
  // host .mem requests, one per slice
  input  logic [N_SLICE-1:0]               s_req_valid,
  output logic [N_SLICE-1:0]               s_req_ready,
  input  logic [N_SLICE-1:0][ADDR_W-1:0]   s_req_addr,
  input  logic [N_SLICE-1:0]               s_req_we,
  input  logic [N_SLICE-1:0][DATA_W-1:0]   s_req_wdata,
  input  logic [N_SLICE-1:0][HTAG_W-1:0]   s_req_tag,
  // CXL.io register access
  input  logic        io_valid,
  input  logic        io_we,
  input  logic [3:0]  io_addr,
  input  logic [63:0] io_wdata,
  output logic        io_rvalid,
  output logic [63:0] io_rdata,
  // DRAM requests, one per slice
  output logic [N_SLICE-1:0]               d_valid,
  input  logic [N_SLICE-1:0]               d_ready,
  output logic [N_SLICE-1:0][DADDR_W-1:0]  d_addr,
  output logic [N_SLICE-1:0]               d_we,
  output logic [N_SLICE-1:0][DATA_W-1:0]   d_wdata,
  output logic [N_SLICE-1:0][HTAG_W-1:0]   d_tag,
  // NVMe commands / completions
  output logic [NVME_CH-1:0]               nv_cmd_valid,
  input  logic [NVME_CH-1:0]               nv_cmd_ready,
  output logic [NVME_CH-1:0][IDW-1:0]      nv_cmd_id,
  output nvme_op_e [NVME_CH-1:0]           nv_cmd_op,
  output logic [NVME_CH-1:0][LBA_W-1:0]    nv_cmd_lba,
  output logic [NVME_CH-1:0][DPAGE_W-1:0]  nv_cmd_dpage,
  input  logic [NVME_CH-1:0]               nv_cpl_valid,
  input  logic [NVME_CH-1:0][IDW-1:0]      nv_cpl_id,
  // event pulses (performance monitoring)
  output logic [N_SLICE-1:0] ev_hit,
  output logic [N_SLICE-1:0] ev_miss,
  output logic               ev_fill,
  output logic               ev_merge,
  output logic               ev_present,
  output logic               ev_evict_clean,
  output logic               ev_evict_dirty,
  output logic               ev_no_victim,
  output logic               ev_pf_page
);
  localparam int unsigned NC = N_SLICE + 1;

  logic [NC-1:0]                m_req, m_gnt, m_s2, m_wr_en;
  logic [NC-1:0][SET_BITS-1:0]  m_set;
  meta_row_t                    m_rd_row;
  meta_row_t [NC-1:0]           m_wr_row;

  logic [N_SLICE-1:0]                miss_valid, miss_ready;
  logic [N_SLICE-1:0][SET_BITS-1:0]  miss_set;
  logic [N_SLICE-1:0][TAG_BITS-1:0]  miss_tag;
  logic                fill_valid;
  logic [SET_BITS-1:0] fill_set;
  logic [TAG_BITS-1:0] fill_tag;

  logic                pg_valid, pg_ready;
  logic [SET_BITS-1:0] pg_set;
  logic [TAG_BITS-1:0] pg_tag;
  logic                cmd_valid, cmd_ready, eng_busy;
  logic [ADDR_W-1:0]   cmd_pa;
  logic [31:0]         cmd_count;
  logic [LW:0]         eng_level;
  logic [IDW:0]        mshr_busy;
  logic [N_SLICE-1:0]  req_ready_c;
  logic [N_SLICE-1:0]  wr_pend;
  logic [N_SLICE-1:0][SET_BITS+WAY_BITS-1:0] wr_pend_page;

  meta_ctrl #(.N_CLI(NC), .SET_BITS(SET_BITS)) u_meta (
    .clk, .rst_n, .init_done,
    .cli_req(m_req), .cli_set(m_set), .cli_gnt(m_gnt), .cli_s2(m_s2),
    .rd_row(m_rd_row), .cli_wr_en(m_wr_en), .cli_wr_row(m_wr_row)
  );

  for (genvar s = 0; s < N_SLICE; s++) begin : g_slice
    hm_checker #(.SET_BITS(SET_BITS)) u_chk (
      .clk, .rst_n,
      .req_valid (s_req_valid[s] && init_done),
      .req_ready (req_ready_c[s]),
      .req_addr  (s_req_addr[s]),
      .req_we    (s_req_we[s]),
      .req_wdata (s_req_wdata[s]),
      .req_tag   (s_req_tag[s]),
      .m_req     (m_req[s]),
      .m_set     (m_set[s]),
      .m_gnt     (m_gnt[s]),
      .m_s2      (m_s2[s]),
      .m_rd_row  (m_rd_row),
      .m_wr_en   (m_wr_en[s]),
      .m_wr_row  (m_wr_row[s]),
      .miss_valid(miss_valid[s]),
      .miss_ready(miss_ready[s]),
      .miss_set  (miss_set[s]),
      .miss_tag  (miss_tag[s]),
      .fill_valid, .fill_set, .fill_tag,
      .d_valid   (d_valid[s]),
      .d_ready   (d_ready[s]),
      .d_addr    (d_addr[s]),
      .d_we      (d_we[s]),
      .d_wdata   (d_wdata[s]),
      .d_tag     (d_tag[s]),
      .wr_pend     (wr_pend[s]),
      .wr_pend_page(wr_pend_page[s]),
      .hit_pulse (ev_hit[s]),
      .miss_pulse(ev_miss[s])
    );
    assign s_req_ready[s] = req_ready_c[s] && init_done;
  end

  miss_handler #(.SET_BITS(SET_BITS), .N_MSHR(N_MSHR)) u_mlh (
    .clk, .rst_n,
    .dm_valid(miss_valid), .dm_ready(miss_ready), .dm_set(miss_set), .dm_tag(miss_tag),
    .pf_valid(pg_valid), .pf_ready(pg_ready), .pf_set(pg_set), .pf_tag(pg_tag),
    .m_req(m_req[NC-1]), .m_set(m_set[NC-1]), .m_gnt(m_gnt[NC-1]), .m_s2(m_s2[NC-1]),
    .m_rd_row(m_rd_row), .m_wr_en(m_wr_en[NC-1]), .m_wr_row(m_wr_row[NC-1]),
    .nv_cmd_valid, .nv_cmd_ready, .nv_cmd_id, .nv_cmd_op, .nv_cmd_lba, .nv_cmd_dpage,
    .nv_cpl_valid, .nv_cpl_id,
    .hz_valid(wr_pend), .hz_page(wr_pend_page),
    .fill_valid, .fill_set, .fill_tag,
    .ev_merge, .ev_present, .ev_evict_clean, .ev_evict_dirty, .ev_no_victim,
    .mshr_busy
  );
  assign ev_fill    = fill_valid;
  assign ev_pf_page = pg_valid && pg_ready;

  pf_engine #(.SET_BITS(SET_BITS), .FIFO_DEPTH(FIFO_DEPTH)) u_pfe (
    .clk, .rst_n,
    .cmd_valid, .cmd_ready, .cmd_pa, .cmd_count,
    .pg_valid, .pg_ready, .pg_set, .pg_tag,
    .busy(eng_busy), .level(eng_level)
  );

  pf_regs #(.SET_BITS(SET_BITS), .LW(LW)) u_regs (
    .clk, .rst_n,
    .io_valid, .io_we, .io_addr, .io_wdata, .io_rvalid, .io_rdata,
    .cmd_valid, .cmd_ready, .cmd_pa, .cmd_count,
    .eng_busy, .eng_level, .page_issued(ev_pf_page)
  );
endmodule
