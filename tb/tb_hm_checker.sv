// tb_hm_checker: one hit/miss checker on a real metadata interface
// controller; the testbench plays the miss line handler through a second
// metadata client.
//  - a read of an empty cache misses and reports {set, tag};
//  - after the testbench fills the line into way 3 and broadcasts the fill,
//    the checker replays, hits and issues DRAM line address {set, 3, line};
//  - a write hit sets the dirty bit; hits reorder the 4-bit ages as LRU;
//  - an uncontended hit reaches DRAM three cycles after the request is taken.
module tb_hm_checker;
  import itme_pkg::*;
  localparam int unsigned SB = 4;
  localparam int unsigned AW = TAG_BITS + SB + PAGE_BITS;
  localparam int unsigned DW = SB + WAY_BITS + PAGE_BITS - LINE_BITS;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic rst_n = 0, init_done;
  logic req_valid = 0, req_ready, req_we = 0;
  logic [AW-1:0] req_addr = 0;
  logic [DATA_W-1:0] req_wdata = 0;
  logic [HTAG_W-1:0] req_tag = 0;
  logic [1:0] m_req, m_gnt, m_s2, m_wr_en;
  logic [1:0][SB-1:0] m_set;
  meta_row_t m_rd_row;
  meta_row_t [1:0] m_wr_row;
  logic miss_valid, miss_ready = 0;
  logic [SB-1:0] miss_set;
  logic [TAG_BITS-1:0] miss_tag;
  logic fill_valid = 0;
  logic [SB-1:0] fill_set = 0;
  logic [TAG_BITS-1:0] fill_tag = 0;
  logic d_valid, d_ready = 1, d_we;
  logic [DW-1:0] d_addr;
  logic [DATA_W-1:0] d_wdata;
  logic [HTAG_W-1:0] d_tag;
  logic hit_pulse, miss_pulse, wr_pend;
  logic [SB+WAY_BITS-1:0] wr_pend_page;

  meta_ctrl #(.N_CLI(2), .SET_BITS(SB)) u_meta (
    .clk, .rst_n, .init_done, .cli_req(m_req), .cli_set(m_set), .cli_gnt(m_gnt),
    .cli_s2(m_s2), .rd_row(m_rd_row), .cli_wr_en(m_wr_en), .cli_wr_row(m_wr_row));

  hm_checker #(.SET_BITS(SB)) dut (
    .clk, .rst_n, .req_valid, .req_ready, .req_addr, .req_we, .req_wdata, .req_tag,
    .m_req(m_req[0]), .m_set(m_set[0]), .m_gnt(m_gnt[0]), .m_s2(m_s2[0]), .m_rd_row,
    .m_wr_en(m_wr_en[0]), .m_wr_row(m_wr_row[0]),
    .miss_valid, .miss_ready, .miss_set, .miss_tag, .fill_valid, .fill_set, .fill_tag,
    .d_valid, .d_ready, .d_addr, .d_we, .d_wdata, .d_tag, .wr_pend, .wr_pend_page,
    .hit_pulse, .miss_pulse);

  // testbench metadata client (client 1)
  logic      t_req = 0, t_wen = 0;
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

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic logic [AW-1:0] mk(input int tag, input int set, input int line);
    return {TAG_BITS'(tag), SB'(set), 6'(line), 6'd0};
  endfunction

  // capture of DRAM requests
  int d_cnt = 0, d_cyc;
  logic [DW-1:0] d_last_addr;
  logic d_last_we;
  logic [HTAG_W-1:0] d_last_tag;
  always @(posedge clk) if (d_valid && d_ready) begin
    d_cnt <= d_cnt + 1; d_cyc <= cyc; d_last_addr <= d_addr; d_last_we <= d_we; d_last_tag <= d_tag;
  end

  task automatic host(input logic [AW-1:0] a, input logic we, input int tag, output int acc_cyc);
    @(negedge clk); req_valid = 1; req_addr = a; req_we = we; req_tag = HTAG_W'(tag);
    @(posedge clk); while (!req_ready) @(posedge clk);
    acc_cyc = cyc;
    @(negedge clk); req_valid = 0;
  endtask

  int n0, acc;
  meta_row_t row;
  int d_hist[$];
  always @(posedge clk) if (d_valid && d_ready) d_hist.push_back(cyc);
  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk); rst_n = 1;
    while (!init_done) @(posedge clk);
    // 1. miss on empty cache
    n0 = d_cnt;
    host(mk(37, 6, 5), 1'b0, 11, acc);
    while (!miss_valid) @(posedge clk);
    check(miss_set == 6 && miss_tag == 37, "miss set/tag");
    @(negedge clk); miss_ready = 1; @(posedge clk); @(negedge clk); miss_ready = 0;
    repeat (10) @(posedge clk);
    check(d_cnt == n0, "no DRAM access while missing");
    // 2. fill way 3 and broadcast
    row = '0;
    row[3] = '{valid: 1'b1, tag: 10'd37, dirty: 1'b0, age: 4'd0};
    meta_op(6, 1'b1, row);
    @(negedge clk); fill_valid = 1; fill_set = 6; fill_tag = 37;
    @(negedge clk); fill_valid = 0;
    while (d_cnt == n0) @(posedge clk);
    #1;
    check(d_last_addr == {4'd6, 4'd3, 6'd5} && !d_last_we && d_last_tag == 11, "DRAM address after fill");
    // 3. write hit sets dirty; timing from accept to DRAM = 3 cycles
    n0 = d_cnt;
    host(mk(37, 6, 9), 1'b1, 12, acc);
    while (d_cnt == n0) @(posedge clk);
    #1;
    check(d_cyc - acc == 3, $sformatf("hit latency %0d", d_cyc - acc));
    check(d_last_addr == {4'd6, 4'd3, 6'd9} && d_last_we, "write hit address");
    meta_op(6, 1'b0, '0);
    check(t_got[3].dirty && t_got[3].valid && t_got[3].tag == 37, "dirty set by write hit");
    // 4. LRU ages: ways 0,1,2 valid with ages 0,1,2; hit on way 2
    row = '0;
    row[0] = '{valid: 1'b1, tag: 10'd100, dirty: 1'b0, age: 4'd0};
    row[1] = '{valid: 1'b1, tag: 10'd101, dirty: 1'b0, age: 4'd1};
    row[2] = '{valid: 1'b1, tag: 10'd102, dirty: 1'b0, age: 4'd2};
    meta_op(9, 1'b1, row);
    n0 = d_cnt;
    host(mk(102, 9, 0), 1'b0, 13, acc);
    while (d_cnt == n0) @(posedge clk);
    meta_op(9, 1'b0, '0);
    check(t_got[2].age == 0 && t_got[0].age == 1 && t_got[1].age == 2, "LRU ages after hit");
    check(!t_got[2].dirty, "read hit leaves dirty clear");
    // 5. back-to-back hits on one slice: one DRAM request every 3 cycles
    d_hist.delete();
    @(negedge clk); req_valid = 1; req_we = 0; req_addr = mk(37, 6, 0); req_tag = 20;
    for (int k = 1; k <= 4; k++) begin
      @(posedge clk); while (!req_ready) @(posedge clk);
      @(negedge clk); req_addr = mk(37, 6, k); req_tag = HTAG_W'(20 + k);
      if (k == 4) req_valid = 0;
    end
    repeat (6) @(posedge clk);
    check(d_hist.size() == 4, $sformatf("back-to-back DRAM count %0d", d_hist.size()));
    if (d_hist.size() == 4)
      check(d_hist[1] - d_hist[0] == 3 && d_hist[3] - d_hist[0] == 9,
            $sformatf("back-to-back spacing %0d %0d", d_hist[1] - d_hist[0], d_hist[3] - d_hist[0]));
    // 6. a write hit that DRAM does not take is shown as a pending write
    @(negedge clk); d_ready = 0;
    host(mk(37, 6, 2), 1'b1, 30, acc);
    while (!d_valid) @(posedge clk);
    repeat (3) @(posedge clk);
    #1;
    check(wr_pend && wr_pend_page == {4'd6, 4'd3}, "pending write page while DRAM stalls");
    @(negedge clk); d_ready = 1;
    @(negedge clk);
    check(!wr_pend, "pending write clears once DRAM takes it");
    // 7. miss on a full set with other tags
    host(mk(555, 9, 0), 1'b0, 14, acc);
    while (!miss_valid) @(posedge clk);
    check(miss_set == 9 && miss_tag == 555, "second miss");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
