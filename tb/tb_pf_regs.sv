// tb_pf_regs: register writes and reads of the prefetch register set.
//  - writing PF_ADDR then PF_COUNT posts one command with that address and
//    count in the cycle of the count write;
//  - registers read back one cycle after the read;
//  - a command posted while the queue refuses sets the sticky overflow bit,
//    which a write to STATUS clears; busy and level are reported;
//  - PF_PAGES counts issued pages.
module tb_pf_regs;
  import itme_pkg::*;
  localparam int unsigned SB = 4;
  localparam int unsigned AW = TAG_BITS + SB + PAGE_BITS;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst_n = 0;
  logic io_valid = 0, io_we = 0, io_rvalid;
  logic [3:0] io_addr = 0;
  logic [63:0] io_wdata = 0, io_rdata;
  logic cmd_valid, cmd_ready = 1;
  logic [AW-1:0] cmd_pa;
  logic [31:0] cmd_count;
  logic eng_busy = 0, page_issued = 0;
  logic [4:0] eng_level = 0;

  pf_regs #(.SET_BITS(SB), .LW(4)) dut (.*);

  int n_cmd = 0;
  logic [AW-1:0] last_pa;
  logic [31:0] last_cnt;
  always @(posedge clk) if (cmd_valid && cmd_ready) begin
    n_cmd <= n_cmd + 1; last_pa <= cmd_pa; last_cnt <= cmd_count;
  end

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask
  task automatic wr(input int a, input logic [63:0] d);
    @(negedge clk); io_valid = 1; io_we = 1; io_addr = 4'(a); io_wdata = d;
    @(negedge clk); io_valid = 0; io_we = 0;
  endtask
  task automatic rd(input int a, output logic [63:0] d);
    @(negedge clk); io_valid = 1; io_we = 0; io_addr = 4'(a);
    @(negedge clk); io_valid = 0;
    check(io_rvalid, "read valid one cycle later");
    d = io_rdata;
  endtask

  logic [63:0] d;
  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk); rst_n = 1;
    wr(0, 64'h1_2345_6789);
    check(n_cmd == 0, "address write posts nothing");
    wr(1, 64'd7);
    check(n_cmd == 1 && last_pa == AW'(64'h1_2345_6789) && last_cnt == 7, "command posted");
    rd(0, d); check(d == 64'(AW'(64'h1_2345_6789)), "PF_ADDR read back");
    rd(1, d); check(d == 64'd7, "PF_COUNT read back");
    rd(2, d); check(d[0] == 1'b0, "no overflow yet");
    // overflow
    @(negedge clk); cmd_ready = 0;
    wr(1, 64'd3);
    @(negedge clk); cmd_ready = 1;
    check(n_cmd == 1, "refused command not counted");
    eng_busy = 1; eng_level = 5'd4;
    rd(2, d); check(d[0] && d[1] && d[15:8] == 8'd4, "overflow, busy and level reported");
    wr(2, 64'd0);
    rd(2, d); check(!d[0], "overflow cleared");
    // page counter
    for (int i = 0; i < 5; i++) begin
      @(negedge clk); page_issued = 1;
    end
    @(negedge clk); page_issued = 0;
    rd(3, d); check(d == 64'd5, "pages counted");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
