// tb_miss_handler: the miss line handler on a real metadata interface
// controller, with a testbench NVMe model that completes each command after
// a fixed latency, and a second metadata client to inspect and preset sets.
//  - a prefetch page gives one NVMe read (channel = set bit 0, LBA = {tag,
//    set>>1}, DRAM page = {set, way}), then a valid, clean, MRU entry and a
//    fill broadcast;
//  - a demand miss for a line with an open MSHR is merged (one SSD read);
//  - a request for a present line only broadcasts it;
//  - with a full set, the oldest way is the victim; a dirty victim is
//    written back (NVMe write of the old page) before the new page is read;
//  - with four MSHRs, four SSD reads are in flight at once;
//  - a write-back waits while a checker still owes DRAM a write to the page.
module tb_miss_handler;
  import itme_pkg::*;
  localparam int unsigned SB  = 4;
  localparam int unsigned NM  = 4;
  localparam int unsigned IDW = 2;
  localparam int unsigned LBA_W = TAG_BITS + SB - 1;
  localparam int unsigned DPW = SB + WAY_BITS;
  localparam int LAT = 30;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst_n = 0, init_done;
  logic [1:0] dm_valid = 0, dm_ready;
  logic [1:0][SB-1:0] dm_set = 0;
  logic [1:0][TAG_BITS-1:0] dm_tag = 0;
  logic pf_valid = 0, pf_ready;
  logic [SB-1:0] pf_set = 0;
  logic [TAG_BITS-1:0] pf_tag = 0;
  logic [1:0] m_req, m_gnt, m_s2, m_wr_en;
  logic [1:0][SB-1:0] m_set;
  meta_row_t m_rd_row;
  meta_row_t [1:0] m_wr_row;
  logic [1:0] nv_cmd_valid, nv_cmd_ready, nv_cpl_valid;
  logic [1:0][IDW-1:0] nv_cmd_id, nv_cpl_id;
  nvme_op_e [1:0] nv_cmd_op;
  logic [1:0][LBA_W-1:0] nv_cmd_lba;
  logic [1:0][DPW-1:0] nv_cmd_dpage;
  logic fill_valid;
  logic [SB-1:0] fill_set;
  logic [TAG_BITS-1:0] fill_tag;
  logic ev_merge, ev_present, ev_evict_clean, ev_evict_dirty, ev_no_victim;
  logic [IDW:0] mshr_busy;
  logic [1:0] hz_valid = '0;
  logic [1:0][SB+WAY_BITS-1:0] hz_page = '0;

  meta_ctrl #(.N_CLI(2), .SET_BITS(SB)) u_meta (
    .clk, .rst_n, .init_done, .cli_req(m_req), .cli_set(m_set), .cli_gnt(m_gnt),
    .cli_s2(m_s2), .rd_row(m_rd_row), .cli_wr_en(m_wr_en), .cli_wr_row(m_wr_row));

  miss_handler #(.SET_BITS(SB), .N_MSHR(NM)) dut (
    .clk, .rst_n, .dm_valid, .dm_ready, .dm_set, .dm_tag, .pf_valid, .pf_ready, .pf_set, .pf_tag,
    .m_req(m_req[0]), .m_set(m_set[0]), .m_gnt(m_gnt[0]), .m_s2(m_s2[0]), .m_rd_row,
    .m_wr_en(m_wr_en[0]), .m_wr_row(m_wr_row[0]),
    .nv_cmd_valid, .nv_cmd_ready, .nv_cmd_id, .nv_cmd_op, .nv_cmd_lba, .nv_cmd_dpage,
    .nv_cpl_valid, .nv_cpl_id, .hz_valid, .hz_page, .fill_valid, .fill_set, .fill_tag,
    .ev_merge, .ev_present, .ev_evict_clean, .ev_evict_dirty, .ev_no_victim, .mshr_busy);

  // testbench metadata client
  logic t_req = 0, t_wen = 0;
  logic [SB-1:0] t_set = 0;
  meta_row_t t_wrow, t_got;
  assign m_req[1] = t_req;
  assign m_set[1] = t_set;
  assign m_wr_en[1] = m_s2[1] && t_wen;
  assign m_wr_row[1] = t_wrow;
  always @(posedge clk) begin
    if (m_gnt[1]) t_req <= 1'b0;
    if (m_s2[1]) t_got <= m_rd_row;
  end
  task automatic meta_op(input int s, input logic wen, input meta_row_t row);
    @(negedge clk); t_set = SB'(s); t_wen = wen; t_wrow = row; t_req = 1;
    while (t_req) @(posedge clk);
    repeat (3) @(posedge clk);
  endtask

  // NVMe model: every command completes LAT cycles after it is taken
  assign nv_cmd_ready = 2'b11;
  int  due [2][$];
  int  did [2][$];
  int  cyc = 0;
  int  n_rd = 0, n_wr = 0, outstanding = 0, max_out = 0, n_fill = 0, n_merge = 0, n_present = 0;
  int  log_op [$];
  int  log_lba [$];
  int  log_dp [$];
  int  log_ch [$];
  always @(posedge clk) begin
    cyc <= cyc + 1;
    nv_cpl_valid <= '0;
    for (int c = 0; c < 2; c++) begin
      if (due[c].size() > 0 && due[c][0] <= cyc) begin
        nv_cpl_valid[c] <= 1'b1;
        nv_cpl_id[c]    <= IDW'(did[c][0]);
        void'(due[c].pop_front()); void'(did[c].pop_front());
        outstanding--;
      end
      if (nv_cmd_valid[c] && nv_cmd_ready[c]) begin
        due[c].push_back(cyc + LAT); did[c].push_back(int'(nv_cmd_id[c]));
        log_op.push_back(int'(nv_cmd_op[c])); log_lba.push_back(int'(nv_cmd_lba[c]));
        log_dp.push_back(int'(nv_cmd_dpage[c])); log_ch.push_back(c);
        if (nv_cmd_op[c] == NV_READ) n_rd++; else n_wr++;
        outstanding++;
      end
    end
    if (outstanding > max_out) max_out = outstanding;
    if (fill_valid) n_fill++;
    if (ev_merge) n_merge++;
    if (ev_present) n_present++;
  end
  initial nv_cpl_valid = '0;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask
  task automatic pf(input int s, input int t);
    @(negedge clk); pf_valid = 1; pf_set = SB'(s); pf_tag = TAG_BITS'(t);
    @(posedge clk); while (!pf_ready) @(posedge clk);
    @(negedge clk); pf_valid = 0;
  endtask
  task automatic dm(input int p, input int s, input int t);
    @(negedge clk); dm_valid[p] = 1; dm_set[p] = SB'(s); dm_tag[p] = TAG_BITS'(t);
    @(posedge clk); while (!dm_ready[p]) @(posedge clk);
    @(negedge clk); dm_valid[p] = 0;
  endtask
  task automatic drain();
    repeat (5) @(posedge clk);
    while (mshr_busy != 0) @(posedge clk);
    repeat (5) @(posedge clk);
  endtask

  int k, f0;
  meta_row_t row;
  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk); rst_n = 1;
    while (!init_done) @(posedge clk);
    // 1. prefetch of one page
    pf(2, 5);
    drain();
    check(log_op.size() == 1 && log_op[0] == int'(NV_READ) && log_ch[0] == 0, "one read on channel 0");
    check(log_lba[0] == ((5 << (SB - 1)) | (2 >> 1)), "read LBA");
    check(log_dp[0] == (2 << WAY_BITS) | 0, "DRAM page {set 2, way 0}");
    meta_op(2, 1'b0, '0);
    check(t_got[0].valid && t_got[0].tag == 5 && !t_got[0].dirty && t_got[0].age == 0, "filled entry");
    check(n_fill == 1, "one fill broadcast");
    // 2. merge: prefetch then demand for the same line of set 3
    pf(3, 7);
    dm(0, 3, 7);
    drain();
    check(n_merge == 1 && n_rd == 2, "demand merged into prefetch MSHR");
    // 3. present line
    f0 = n_fill;
    dm(1, 2, 5);
    drain();
    check(n_present == 1 && n_fill == f0 + 1 && n_rd == 2, "present line only broadcast");
    // 4. full set 4: preset 16 valid ways, way 6 oldest and dirty
    row = '0;
    for (int w = 0; w < 16; w++) begin
      row[w].valid = 1; row[w].tag = TAG_BITS'(200 + w);
      row[w].age = AGE_BITS'((w + 9) % 16);   // way 6 has age 15
    end
    row[6].dirty = 1;
    meta_op(4, 1'b1, row);
    k = log_op.size();
    dm(0, 4, 300);
    drain();
    check(log_op.size() == k + 2, "write-back and read");
    check(log_op[k] == int'(NV_WRITE) && log_lba[k] == ((206 << (SB - 1)) | 2) &&
          log_dp[k] == ((4 << WAY_BITS) | 6), "write-back of dirty victim way 6 first");
    check(log_op[k+1] == int'(NV_READ) && log_lba[k+1] == ((300 << (SB - 1)) | 2), "then read of new page");
    meta_op(4, 1'b0, '0);
    check(t_got[6].valid && t_got[6].tag == 300 && !t_got[6].dirty && t_got[6].age == 0, "victim way refilled");
    check(t_got[5].age == 15 && t_got[7].age == 1, "ages shifted");
    // 5. a clean victim: next oldest way 5 (age 15) is clean -> read only
    k = log_op.size();
    dm(1, 4, 301);
    drain();
    check(log_op.size() == k + 1 && log_op[k] == int'(NV_READ), "clean victim not written back");
    // 6. MSHR overlap: four pages of different sets
    max_out = 0;
    for (int i = 0; i < 4; i++) pf(8 + i, 40 + i);
    drain();
    check(max_out == 4, $sformatf("four reads in flight (saw %0d)", max_out));
    check(!ev_no_victim, "no victim shortage");
    // 7. write-back held while slice 1 has a pending DRAM write to the victim
    meta_op(5, 1'b1, row);
    @(negedge clk); hz_valid[1] = 1; hz_page[1] = {4'd5, 4'd6};
    k = log_op.size();
    dm(0, 5, 400);
    repeat (40) @(posedge clk);
    check(log_op.size() == k, "write-back held by pending DRAM write");
    @(negedge clk); hz_valid[1] = 0;
    drain();
    check(log_op.size() == k + 2 && log_op[k] == int'(NV_WRITE) && log_dp[k] == ((5 << WAY_BITS) | 6),
          "write-back issued after the DRAM write");
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
