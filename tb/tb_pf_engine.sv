// tb_pf_engine: posts prefetch commands and checks the page stream.
//  - {PA, count} gives `count` consecutive pages starting at PA's 4 KB page,
//    split into {set, tag}; an unaligned PA is aligned down;
//  - a zero count gives nothing;
//  - with the consumer stalled, the queue takes FIFO_DEPTH commands and then
//    refuses more; all queued commands come out in order.
module tb_pf_engine;
  import itme_pkg::*;
  localparam int unsigned SB = 4;
  localparam int unsigned AW = TAG_BITS + SB + PAGE_BITS;
  localparam int unsigned FD = 4;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst_n = 0;
  logic cmd_valid = 0, cmd_ready;
  logic [AW-1:0] cmd_pa = 0;
  logic [31:0] cmd_count = 0;
  logic pg_valid, pg_ready = 0, busy;
  logic [SB-1:0] pg_set;
  logic [TAG_BITS-1:0] pg_tag;
  logic [2:0] level;

  pf_engine #(.SET_BITS(SB), .FIFO_DEPTH(FD)) dut (.*);

  int exp_q [$];
  int got_q [$];
  always @(posedge clk) if (pg_valid && pg_ready) got_q.push_back(int'({pg_tag, pg_set}));

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask
  task automatic post(input int page, input int off, input int cnt);
    @(negedge clk); cmd_valid = 1; cmd_pa = {(AW-PAGE_BITS)'(page), PAGE_BITS'(off)}; cmd_count = cnt;
    @(posedge clk); while (!cmd_ready) @(posedge clk);
    @(negedge clk); cmd_valid = 0;
    for (int i = 0; i < cnt; i++) exp_q.push_back((page + i) % (1 << (AW - PAGE_BITS)));
  endtask

  logic accepted;
  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk); rst_n = 1;
    // consumer stalled: fill the queue
    post(100, 0, 3);
    post(17, 12'h7c0, 2);
    post(50, 0, 0);
    post(16383, 0, 3);    // wraps over the page-number range
    post(7, 0, 1);        // first command is being walked, so four wait
    repeat (3) @(posedge clk);
    @(negedge clk); cmd_valid = 1; cmd_pa = 0; cmd_count = 1;
    @(posedge clk); accepted = cmd_ready;
    @(negedge clk); cmd_valid = 0;
    check(!accepted, "queue full after FIFO_DEPTH commands (one being walked)");
    check(busy, "busy while commands wait");
    // release consumer with random stalls
    fork
      begin
        for (int i = 0; i < 200; i++) begin
          @(negedge clk); pg_ready = ($urandom_range(0, 2) != 0);
        end
        pg_ready = 1;
      end
    join_none
    while (got_q.size() < exp_q.size()) @(posedge clk);
    repeat (5) @(posedge clk);
    check(got_q.size() == exp_q.size(), $sformatf("page count %0d vs %0d", got_q.size(), exp_q.size()));
    for (int i = 0; i < exp_q.size() && i < got_q.size(); i++)
      check(got_q[i] == exp_q[i], $sformatf("page %0d: %0d vs %0d", i, got_q[i], exp_q[i]));
    check(!busy && level == 0, "idle at the end");
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
