// tb_meta_ctrl: checks the metadata interface controller.
//  - the clearing sweep takes 2^SET_BITS cycles and leaves every row zero;
//  - a row written in stage 2 is read back by a later update;
//  - two updates of the same set are granted exactly three cycles apart
//    (read+lock, write, unlock), while an update of another set proceeds at once;
//  - concurrent read-modify-write increments from three clients on one set
//    lose no update (the lock makes each update atomic).
module tb_meta_ctrl;
  import itme_pkg::*;
  localparam int unsigned SB = 4;
  localparam int unsigned NC = 3;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic rst_n = 0;
  logic init_done;
  logic [NC-1:0] cli_req = '0, cli_gnt, cli_s2, cli_wr_en;
  logic [NC-1:0][SB-1:0] cli_set = '0;
  meta_row_t rd_row;
  meta_row_t [NC-1:0] cli_wr_row;

  meta_ctrl #(.N_CLI(NC), .SET_BITS(SB)) dut (.*);

  // client behaviour: mode 0 = read only, 1 = write given row, 2 = increment row
  int        mode [NC];
  meta_row_t wval [NC];
  meta_row_t got  [NC];
  int        gcyc [NC];
  logic [ROW_BITS-1:0] rd_flat, got_flat;
  assign rd_flat  = rd_row;
  assign got_flat = got[0];
  always_comb begin
    for (int i = 0; i < NC; i++) begin
      cli_wr_en[i]  = cli_s2[i] && mode[i] != 0;
      cli_wr_row[i] = wval[i];
      if (mode[i] == 2) cli_wr_row[i] = meta_row_t'(rd_flat + 1'b1);
    end
  end
  always @(posedge clk) begin
    for (int i = 0; i < NC; i++) begin
      if (cli_gnt[i]) begin cli_req[i] <= 1'b0; gcyc[i] <= cyc; end
      if (cli_s2[i]) got[i] <= rd_row;
    end
  end

  task automatic op(input int c, input int s, input int m, input meta_row_t v);
    @(negedge clk);
    mode[c] = m; wval[c] = v; cli_set[c] = SB'(s); cli_req[c] = 1'b1;
  endtask
  task automatic wait_idle();
    while (cli_req != '0) @(posedge clk);
    repeat (4) @(posedge clk);
  endtask

  function automatic meta_row_t rnd_row();
    logic [ROW_BITS-1:0] r;
    for (int i = 0; i < ROW_BITS / 32; i++) r[i*32 +: 32] = $urandom;
    return r;
  endfunction

  int t0;
  meta_row_t pat;
  initial begin
    for (int i = 0; i < NC; i++) begin mode[i] = 0; wval[i] = '0; end
    repeat (2) @(posedge clk);
    @(negedge clk); rst_n = 1; t0 = cyc;
    while (!init_done) @(posedge clk);
    checks++;
    if (cyc - t0 != 2**SB) begin failures++; $display("FAIL sweep took %0d", cyc - t0); end
    // every row reads zero
    for (int s = 0; s < 2**SB; s++) begin
      op(0, s, 0, '0); wait_idle();
      checks++;
      if (got[0] != '0) begin failures++; $display("FAIL row %0d not cleared", s); end
    end
    // write then read back
    pat = rnd_row();
    op(0, 5, 1, pat); wait_idle();
    op(1, 5, 0, '0);  wait_idle();
    checks++;
    if (got[1] != pat) begin failures++; $display("FAIL write/read back"); end
    // same-set spacing and other-set overlap
    @(negedge clk);
    mode[0] = 0; mode[1] = 0; mode[2] = 0;
    cli_set[0] = 7; cli_set[1] = 7; cli_set[2] = 9;
    cli_req = 3'b111;
    wait_idle();
    checks++;
    if ((gcyc[0] > gcyc[1] ? gcyc[0] - gcyc[1] : gcyc[1] - gcyc[0]) != 3) begin
      failures++; $display("FAIL same-set grants %0d and %0d not 3 apart", gcyc[0], gcyc[1]);
    end
    checks++;
    if (gcyc[2] > (gcyc[0] < gcyc[1] ? gcyc[0] : gcyc[1]) + 1) begin
      failures++; $display("FAIL other set delayed to %0d", gcyc[2]);
    end
    // atomic increments
    op(0, 3, 1, '0); wait_idle();
    for (int k = 0; k < 20; k++) begin
      @(negedge clk);
      for (int i = 0; i < NC; i++) begin mode[i] = 2; cli_set[i] = 3; end
      cli_req = 3'b111;
      while (cli_req != '0) @(posedge clk);
    end
    wait_idle();
    op(0, 3, 0, '0); wait_idle();
    checks++;
    if (got_flat != ROW_BITS'(60)) begin failures++; $display("FAIL increments: %0d", got_flat[31:0]); end
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
