// chm_top: CXL-hybrid memory controller (top level).
//
// A DRAM cache (four DDR4 channels, 32 GB in 4 KB lines, 16-way) in front of
// two NVMe SSDs (2 TB), presented to the host as one byte-addressable memory
// over CXL. This top holds the cache controller and the interconnect to the
// memory controllers. The CXL controller IP, the DDR4 memory controllers and
// the NVMe controllers are outside: their signals are this module's ports.
//   s_req_* / s_rsp_*  two CXL .mem slices: 64 B reads and writes at 41-bit
//                      byte addresses, tagged; responses come back tagged
//                      (read data, or write acknowledge), possibly out of order
//   io_*               CXL.io access to the prefetch registers (see pf_regs)
//   mc_* / mcr_*       one request and one response port per memory
//                      controller, at 64 B line addresses inside the channel
//   nv_cmd_* / nv_cpl_* one command port per NVMe controller: read or write
//                      the 4 KB page `lba` from/to DRAM page `dpage`
//                      (DRAM byte address = dpage * 4096), then complete `id`
// Block structure and sizes follow the paper; interfaces are this design's.
module chm_top
  import itme_pkg::*;
#(
  parameter int unsigned SET_BITS   = itme_pkg::DEF_SET_BITS,
  parameter int unsigned N_MSHR     = 8,
  parameter int unsigned FIFO_DEPTH = 16,
  localparam int unsigned ADDR_W    = TAG_BITS + SET_BITS + PAGE_BITS,
  localparam int unsigned DADDR_W   = SET_BITS + WAY_BITS + PAGE_BITS - LINE_BITS,
  localparam int unsigned CADDR_W   = DADDR_W - $clog2(DRAM_CH),
  localparam int unsigned IDW       = (N_MSHR > 1) ? $clog2(N_MSHR) : 1,
  localparam int unsigned LBA_W     = TAG_BITS + SET_BITS - 1,
  localparam int unsigned DPAGE_W   = SET_BITS + WAY_BITS
) (
  input  logic clk,
  input  logic rst_n,
  output logic init_done,
  // CXL .mem slices
  input  logic [N_SLICE-1:0]               s_req_valid,
  output logic [N_SLICE-1:0]               s_req_ready,
  input  logic [N_SLICE-1:0][ADDR_W-1:0]   s_req_addr,
  input  logic [N_SLICE-1:0]               s_req_we,
  input  logic [N_SLICE-1:0][DATA_W-1:0]   s_req_wdata,
  input  logic [N_SLICE-1:0][HTAG_W-1:0]   s_req_tag,
  output logic [N_SLICE-1:0]               s_rsp_valid,
  input  logic [N_SLICE-1:0]               s_rsp_ready,
  output logic [N_SLICE-1:0][HTAG_W-1:0]   s_rsp_tag,
  output logic [N_SLICE-1:0]               s_rsp_we,
  output logic [N_SLICE-1:0][DATA_W-1:0]   s_rsp_rdata,
  // CXL.io
  input  logic        io_valid,
  input  logic        io_we,
  input  logic [3:0]  io_addr,
  input  logic [63:0] io_wdata,
  output logic        io_rvalid,
  output logic [63:0] io_rdata,
  // memory controllers
  output logic [DRAM_CH-1:0]               mc_valid,
  input  logic [DRAM_CH-1:0]               mc_ready,
  output logic [DRAM_CH-1:0][CADDR_W-1:0]  mc_addr,
  output logic [DRAM_CH-1:0]               mc_we,
  output logic [DRAM_CH-1:0][DATA_W-1:0]   mc_wdata,
  output logic [DRAM_CH-1:0][HTAG_W-1:0]   mc_tag,
  output logic [DRAM_CH-1:0][0:0]          mc_src,
  input  logic [DRAM_CH-1:0]               mcr_valid,
  output logic [DRAM_CH-1:0]               mcr_ready,
  input  logic [DRAM_CH-1:0][0:0]          mcr_src,
  input  logic [DRAM_CH-1:0][HTAG_W-1:0]   mcr_tag,
  input  logic [DRAM_CH-1:0]               mcr_we,
  input  logic [DRAM_CH-1:0][DATA_W-1:0]   mcr_rdata,
  // NVMe controllers
  output logic [NVME_CH-1:0]               nv_cmd_valid,
  input  logic [NVME_CH-1:0]               nv_cmd_ready,
  output logic [NVME_CH-1:0][IDW-1:0]      nv_cmd_id,
  output nvme_op_e [NVME_CH-1:0]           nv_cmd_op,
  output logic [NVME_CH-1:0][LBA_W-1:0]    nv_cmd_lba,
  output logic [NVME_CH-1:0][DPAGE_W-1:0]  nv_cmd_dpage,
  input  logic [NVME_CH-1:0]               nv_cpl_valid,
  input  logic [NVME_CH-1:0][IDW-1:0]      nv_cpl_id,
  // event pulses
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
  logic [N_SLICE-1:0]               d_valid, d_ready, d_we;
  logic [N_SLICE-1:0][DADDR_W-1:0]  d_addr;
  logic [N_SLICE-1:0][DATA_W-1:0]   d_wdata;
  logic [N_SLICE-1:0][HTAG_W-1:0]   d_tag;

  cache_ctrl #(.SET_BITS(SET_BITS), .N_MSHR(N_MSHR), .FIFO_DEPTH(FIFO_DEPTH)) u_cc (
    .clk, .rst_n, .init_done,
    .s_req_valid, .s_req_ready, .s_req_addr, .s_req_we, .s_req_wdata, .s_req_tag,
    .io_valid, .io_we, .io_addr, .io_wdata, .io_rvalid, .io_rdata,
    .d_valid, .d_ready, .d_addr, .d_we, .d_wdata, .d_tag,
    .nv_cmd_valid, .nv_cmd_ready, .nv_cmd_id, .nv_cmd_op, .nv_cmd_lba, .nv_cmd_dpage,
    .nv_cpl_valid, .nv_cpl_id,
    .ev_hit, .ev_miss, .ev_fill, .ev_merge, .ev_present, .ev_evict_clean,
    .ev_evict_dirty, .ev_no_victim, .ev_pf_page
  );

  dram_xbar #(.DADDR_W(DADDR_W), .N_IN(N_SLICE), .N_CH(DRAM_CH)) u_xbar (
    .clk, .rst_n,
    .in_valid(d_valid), .in_ready(d_ready), .in_addr(d_addr), .in_we(d_we),
    .in_wdata(d_wdata), .in_tag(d_tag),
    .ch_valid(mc_valid), .ch_ready(mc_ready), .ch_addr(mc_addr), .ch_we(mc_we),
    .ch_wdata(mc_wdata), .ch_tag(mc_tag), .ch_src(mc_src),
    .chr_valid(mcr_valid), .chr_ready(mcr_ready), .chr_src(mcr_src), .chr_tag(mcr_tag),
    .chr_we(mcr_we), .chr_rdata(mcr_rdata),
    .out_valid(s_rsp_valid), .out_ready(s_rsp_ready), .out_tag(s_rsp_tag),
    .out_we(s_rsp_we), .out_rdata(s_rsp_rdata)
  );
endmodule
