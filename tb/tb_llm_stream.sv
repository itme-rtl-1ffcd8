// tb_llm_stream: the two LLM memory workloads, run through the whole
// controller at a reduced cache size (16 sets, 256 pages of 4 KB).
//
// 1. Layer-wise weight streaming. NL layers of LP pages each, twice and a half
//    the cache, are read line by line from both slices, layer after layer.
//    When reading of layer L starts, software posts one prefetch command for
//    the whole of layer L+1, so that the SSD reads overlap the reads of layer
//    L. Every host read must hit, every SSD page is read exactly once, and
//    each page beyond the cache capacity evicts exactly one clean page.
// 2. KV-cache offload and restore. NC chunks of CP pages are written line by
//    line (the cache write-allocates and evicts dirty pages to the SSDs), then
//    restored in order: one prefetch command per chunk, then the chunk is read
//    back and compared with what was written. Reads after the prefetch must
//    all hit.
// The DRAM, NVMe/SSD and host models are the same as in the end-to-end test.
// The test prints the cycles each phase took and the host bytes per cycle.
module tb_llm_stream;
  import itme_pkg::*;
  parameter int unsigned SB = 4;
  parameter int NL = 10;           // weight layers
  parameter int LP = 64;           // pages per layer
  parameter int NC = 5;            // KV chunks
  parameter int CP = 64;           // pages per chunk
  localparam int unsigned AW  = TAG_BITS + SB + PAGE_BITS;
  localparam int unsigned DAW = SB + WAY_BITS + PAGE_BITS - LINE_BITS;
  localparam int unsigned CAW = DAW - 2;
  localparam int unsigned IDW = 3;
  localparam int unsigned LBA_W = TAG_BITS + SB - 1;
  localparam int unsigned DPW = SB + WAY_BITS;
  localparam int LAT = 40;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic rst_n = 0, init_done;
  logic [1:0] s_req_valid = 0, s_req_ready, s_req_we = 0;
  logic [1:0][AW-1:0] s_req_addr = 0;
  logic [1:0][DATA_W-1:0] s_req_wdata = 0;
  logic [1:0][HTAG_W-1:0] s_req_tag = 0;
  logic [1:0] s_rsp_valid, s_rsp_ready, s_rsp_we;
  logic [1:0][HTAG_W-1:0] s_rsp_tag;
  logic [1:0][DATA_W-1:0] s_rsp_rdata;
  logic io_valid = 0, io_we = 0, io_rvalid;
  logic [3:0] io_addr = 0;
  logic [63:0] io_wdata = 0, io_rdata;
  logic [3:0] mc_valid, mc_ready, mc_we;
  logic [3:0][CAW-1:0] mc_addr;
  logic [3:0][DATA_W-1:0] mc_wdata;
  logic [3:0][HTAG_W-1:0] mc_tag;
  logic [3:0][0:0] mc_src;
  logic [3:0] mcr_valid, mcr_ready, mcr_we;
  logic [3:0][0:0] mcr_src;
  logic [3:0][HTAG_W-1:0] mcr_tag;
  logic [3:0][DATA_W-1:0] mcr_rdata;
  logic [1:0] nv_cmd_valid, nv_cmd_ready, nv_cpl_valid;
  logic [1:0][IDW-1:0] nv_cmd_id, nv_cpl_id;
  nvme_op_e [1:0] nv_cmd_op;
  logic [1:0][LBA_W-1:0] nv_cmd_lba;
  logic [1:0][DPW-1:0] nv_cmd_dpage;
  logic [1:0] ev_hit, ev_miss;
  logic ev_fill, ev_merge, ev_present, ev_evict_clean, ev_evict_dirty, ev_no_victim, ev_pf_page;

  chm_top #(.SET_BITS(SB)) dut (.*);

  // ---------------- storage models ----------------
  function automatic logic [DATA_W-1:0] init_line(input longint hl);
    return {16{32'(hl * 2654435761 + 12345)}};
  endfunction
  logic [DATA_W-1:0] dram [longint];   // key: DRAM-cache line address
  logic [DATA_W-1:0] ssd  [longint];   // key: host line address
  logic [DATA_W-1:0] refm [longint];   // host view

  // DRAM channels
  typedef struct { int src; int tag; int we; logic [DATA_W-1:0] d; int due; } mrsp_t;
  mrsp_t mq [4][$];
  always @(posedge clk) begin
    for (int c = 0; c < 4; c++) begin
      mc_ready[c] <= ($urandom_range(0, 4) != 0);
      if (mc_valid[c] && mc_ready[c]) begin
        mrsp_t r;
        longint la;
        la = (longint'(mc_addr[c]) << 2) | c;
        if (mc_we[c]) dram[la] = mc_wdata[c];
        r.src = int'(mc_src[c]); r.tag = int'(mc_tag[c]); r.we = int'(mc_we[c]);
        r.d = dram.exists(la) ? dram[la] : '0;
        r.due = cyc + $urandom_range(2, 8);
        mq[c].push_back(r);
      end
      if (mcr_valid[c] && mcr_ready[c]) void'(mq[c].pop_front());
    end
  end
  always_comb begin
    for (int c = 0; c < 4; c++) begin
      mcr_valid[c] = mq[c].size() > 0 && mq[c][0].due <= cyc;
      mcr_src[c]   = mq[c].size() > 0 ? 1'(mq[c][0].src) : 1'b0;
      mcr_tag[c]   = mq[c].size() > 0 ? HTAG_W'(mq[c][0].tag) : '0;
      mcr_we[c]    = mq[c].size() > 0 ? 1'(mq[c][0].we) : 1'b0;
      mcr_rdata[c] = mq[c].size() > 0 ? mq[c][0].d : '0;
    end
  end

  // NVMe controllers + SSDs
  typedef struct { int id; int op; longint page; longint dpage; int due; } ncmd_t;
  ncmd_t nq [2][$];
  int n_nv_rd = 0, n_nv_wr = 0;
  assign nv_cmd_ready = 2'b11;
  always @(posedge clk) begin
    nv_cpl_valid <= '0;
    for (int c = 0; c < 2; c++) begin
      if (nq[c].size() > 0 && nq[c][0].due <= cyc) begin
        ncmd_t n;
        n = nq[c].pop_front();
        for (int i = 0; i < 64; i++) begin
          longint hl, dl;
          hl = (n.page << 6) | i;
          dl = (n.dpage << 6) | i;
          if (n.op == int'(NV_READ)) dram[dl] = ssd.exists(hl) ? ssd[hl] : init_line(hl);
          else ssd[hl] = dram.exists(dl) ? dram[dl] : '0;
        end
        nv_cpl_valid[c] <= 1'b1;
        nv_cpl_id[c] <= IDW'(n.id);
      end
      if (nv_cmd_valid[c]) begin
        ncmd_t n;
        n.id = int'(nv_cmd_id[c]); n.op = int'(nv_cmd_op[c]);
        n.page = (longint'(nv_cmd_lba[c]) << 1) | c;
        n.dpage = longint'(nv_cmd_dpage[c]);
        n.due = cyc + LAT + $urandom_range(0, 20);
        nq[c].push_back(n);
        if (nv_cmd_op[c] == NV_READ) n_nv_rd++; else n_nv_wr++;
      end
    end
  end
  initial nv_cpl_valid = '0;

  // ---------------- host ----------------
  int pend_rd [longint];       // outstanding reads per line
  bit pend_wr [longint];       // outstanding write per line
  longint tag_line [2][256];
  logic [DATA_W-1:0] tag_exp [2][256];
  bit tag_busy [2][256];
  bit tag_we [2][256];
  int n_sent = 0, n_rsp = 0;
  assign s_rsp_ready = 2'b11;

  always @(posedge clk) begin
    for (int s = 0; s < 2; s++) begin
      if (s_rsp_valid[s]) begin
        int t;
        t = int'(s_rsp_tag[s]);
        checks++;
        if (!tag_busy[s][t] || s_rsp_we[s] != tag_we[s][t] ||
            (!tag_we[s][t] && s_rsp_rdata[s] != tag_exp[s][t])) begin
          failures++;
          $display("FAIL slice %0d tag %0d line %h data mismatch", s, t, tag_line[s][t]);
        end
        if (tag_we[s][t]) pend_wr.delete(tag_line[s][t]);
        else begin
          pend_rd[tag_line[s][t]]--;
          if (pend_rd[tag_line[s][t]] == 0) pend_rd.delete(tag_line[s][t]);
        end
        tag_busy[s][t] = 0;
        n_rsp++;
      end
    end
  end

  function automatic logic [AW-1:0] haddr(input int tag, input int set, input int line);
    return {TAG_BITS'(tag), SB'(set), 6'(line), 6'd0};
  endfunction

  task automatic host_req(input int s, input logic [AW-1:0] a, input bit we, inout int t);
    longint hl;
    logic [DATA_W-1:0] wd;
    hl = longint'(a >> 6);
    while (pend_wr.exists(hl) || (we && pend_rd.exists(hl)) || tag_busy[s][t]) @(posedge clk);
    for (int i = 0; i < 16; i++) wd[i*32 +: 32] = $urandom;
    if (!refm.exists(hl)) refm[hl] = init_line(hl);
    tag_busy[s][t] = 1; tag_we[s][t] = we; tag_line[s][t] = hl;
    tag_exp[s][t] = refm[hl];
    if (we) begin refm[hl] = wd; pend_wr[hl] = 1; end
    else pend_rd[hl] = pend_rd.exists(hl) ? pend_rd[hl] + 1 : 1;
    @(negedge clk);
    s_req_valid[s] = 1; s_req_addr[s] = a; s_req_we[s] = we; s_req_wdata[s] = wd;
    s_req_tag[s] = HTAG_W'(t);
    @(posedge clk); while (!s_req_ready[s]) @(posedge clk);
    n_sent++;
    @(negedge clk); s_req_valid[s] = 0;
    t = (t + 1) % 256;
  endtask

  task automatic io_wr(input int a, input logic [63:0] d);
    @(negedge clk); io_valid = 1; io_we = 1; io_addr = 4'(a); io_wdata = d;
    @(negedge clk); io_valid = 0; io_we = 0;
  endtask
  task automatic io_rd(input int a, output logic [63:0] d);
    @(negedge clk); io_valid = 1; io_we = 0; io_addr = 4'(a);
    @(negedge clk); io_valid = 0;
    d = io_rdata;
  endtask
  task automatic prefetch(input logic [AW-1:0] pa, input int cnt);
    io_wr(0, 64'(pa));
    io_wr(1, 64'(cnt));
  endtask
  task automatic quiesce();
    repeat (10) @(posedge clk);
    while (n_rsp != n_sent || dut.u_cc.u_mlh.mshr_busy != 0 || dut.u_cc.u_pfe.busy) @(posedge clk);
    repeat (10) @(posedge clk);
  endtask

  // ---------------- mechanism counters ----------------
  int m_hit = 0, m_miss = 0, m_clean = 0, m_dirty = 0, m_pf = 0;
  always @(posedge clk) if (rst_n) begin
    m_hit   += int'(ev_hit[0]) + int'(ev_hit[1]);
    m_miss  += int'(ev_miss[0]) + int'(ev_miss[1]);
    m_clean += int'(ev_evict_clean);
    m_dirty += int'(ev_evict_dirty);
    m_pf    += int'(ev_pf_page);
  end

  task automatic expect_eq(input longint got, input longint exp, input string what);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: %0d, expected %0d", what, got, exp); end
  endtask

  // page p of a region starting at page number base: host byte address
  function automatic logic [AW-1:0] page_addr(input longint base, input longint p);
    return AW'((base + p) << PAGE_BITS);
  endfunction

  // read (or write) all 64 lines of pages [p0, p0+np) from both slices:
  // slice 0 takes the even lines, slice 1 the odd ones
  task automatic sweep(input longint base, input int p0, input int np, input bit we);
    fork
      begin
        automatic int t = 0;
        for (int p = p0; p < p0 + np; p++)
          for (int l = 0; l < 64; l += 2) host_req(0, page_addr(base, p) | AW'(l << LINE_BITS), we, t);
      end
      begin
        automatic int t = 0;
        for (int p = p0; p < p0 + np; p++)
          for (int l = 1; l < 64; l += 2) host_req(1, page_addr(base, p) | AW'(l << LINE_BITS), we, t);
      end
    join
  endtask

  localparam longint W_BASE  = 64'd1 << 20;   // weights start at 4 GB
  localparam longint KV_BASE = 64'd3 << 20;   // KV cache starts at 12 GB
  int t0, mi0, h0, c0, d0, r0, w0;
  longint bpc;
  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk); rst_n = 1;
    while (!init_done) @(posedge clk);

    // ---- 1. weight streaming ----
    prefetch(page_addr(W_BASE, 0), LP);
    quiesce();
    t0 = cyc; mi0 = m_miss; h0 = m_hit;
    for (int L = 0; L < NL; L++) begin
      if (L + 1 < NL) prefetch(page_addr(W_BASE, (L + 1) * LP), LP);
      sweep(W_BASE, L * LP, LP, 0);
    end
    quiesce();
    bpc = longint'(NL) * LP * 4096 * 100 / (cyc - t0);
    $display("WORKLOAD weights: %0d layers x %0d pages, %0d cycles, %0d.%02d host bytes/cycle",
             NL, LP, cyc - t0, bpc / 100, bpc % 100);
    expect_eq(m_miss - mi0, 0, "weight reads that missed");
    expect_eq(m_hit - h0, NL * LP * 64, "weight reads that hit");
    expect_eq(n_nv_rd, NL * LP, "SSD page reads for weights");
    expect_eq(n_nv_wr, 0, "SSD page writes for weights");
    expect_eq(m_clean, NL * LP - (1 << (SB + WAY_BITS)), "clean evictions for weights");
    expect_eq(m_pf, NL * LP, "prefetched weight pages");

    // ---- 2. KV-cache offload and restore ----
    t0 = cyc; c0 = m_clean; d0 = m_dirty; r0 = n_nv_rd; w0 = n_nv_wr;
    for (int c = 0; c < NC; c++) sweep(KV_BASE, c * CP, CP, 1);
    quiesce();
    $display("WORKLOAD kv offload: %0d chunks x %0d pages, %0d cycles, %0d dirty evictions",
             NC, CP, cyc - t0, m_dirty - d0);
    checks++;
    if (m_dirty - d0 == 0) begin failures++; $display("FAIL no dirty page reached the SSD"); end
    expect_eq(n_nv_wr - w0, m_dirty - d0, "SSD writes against dirty evictions");
    t0 = cyc;
    for (int c = 0; c < NC; c++) begin
      prefetch(page_addr(KV_BASE, c * CP), CP);
      quiesce();
      mi0 = m_miss;
      sweep(KV_BASE, c * CP, CP, 0);
      quiesce();
      expect_eq(m_miss - mi0, 0, $sformatf("misses restoring chunk %0d", c));
    end
    $display("WORKLOAD kv restore: %0d cycles, %0d SSD reads, %0d SSD writes",
             cyc - t0, n_nv_rd - r0, n_nv_wr - w0);
    expect_eq(n_rsp, n_sent, "host responses");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
