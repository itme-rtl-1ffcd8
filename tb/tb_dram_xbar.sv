// tb_dram_xbar: two slices send random reads and writes to four channel
// models with random stalls and latencies.
//  - every request reaches the channel named by the low address bits, with
//    the address shifted down and the right source and tag;
//  - every response returns to the slice that sent the request, with the
//    channel's data; nothing is lost or duplicated.
module tb_dram_xbar;
  import itme_pkg::*;
  localparam int unsigned DAW = 12;
  localparam int unsigned NCH = 4;
  localparam int unsigned CAW = DAW - 2;
  localparam int NREQ = 200;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst_n = 0;
  logic [1:0] in_valid = 0, in_ready, in_we = 0;
  logic [1:0][DAW-1:0] in_addr = 0;
  logic [1:0][DATA_W-1:0] in_wdata = 0;
  logic [1:0][HTAG_W-1:0] in_tag = 0;
  logic [NCH-1:0] ch_valid, ch_ready, ch_we;
  logic [NCH-1:0][CAW-1:0] ch_addr;
  logic [NCH-1:0][DATA_W-1:0] ch_wdata;
  logic [NCH-1:0][HTAG_W-1:0] ch_tag;
  logic [NCH-1:0][0:0] ch_src;
  logic [NCH-1:0] chr_valid, chr_ready, chr_we;
  logic [NCH-1:0][0:0] chr_src;
  logic [NCH-1:0][HTAG_W-1:0] chr_tag;
  logic [NCH-1:0][DATA_W-1:0] chr_rdata;
  logic [1:0] out_valid, out_ready, out_we;
  logic [1:0][HTAG_W-1:0] out_tag;
  logic [1:0][DATA_W-1:0] out_rdata;

  dram_xbar #(.DADDR_W(DAW), .N_IN(2), .N_CH(NCH)) dut (.*);

  function automatic logic [DATA_W-1:0] pat(input int ch, input int a);
    return {16{32'(ch * 1000003 + a * 7919 + 1)}};
  endfunction

  // per tag expectations (tags unique per slice)
  int exp_ch [2][256];
  int exp_a  [2][256];
  bit pend   [2][256];
  int n_rsp = 0, n_sent = 0;

  typedef struct { int src; int tag; int we; int a; int due; } rq_t;
  rq_t q [NCH][$];
  int cyc = 0;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    for (int c = 0; c < NCH; c++) begin
      ch_ready[c] <= ($urandom_range(0, 3) != 0);
      if (ch_valid[c] && ch_ready[c]) begin
        rq_t r;
        checks++;
        if (!pend[ch_src[c]][ch_tag[c]] || exp_ch[ch_src[c]][ch_tag[c]] != c ||
            exp_a[ch_src[c]][ch_tag[c]] != int'(ch_addr[c])) begin
          failures++; $display("FAIL request routing ch %0d", c);
        end
        r.src = int'(ch_src[c]); r.tag = int'(ch_tag[c]); r.we = int'(ch_we[c]);
        r.a = int'(ch_addr[c]); r.due = cyc + $urandom_range(1, 6);
        q[c].push_back(r);
      end
      if (chr_valid[c] && chr_ready[c]) void'(q[c].pop_front());
    end
    for (int s = 0; s < 2; s++) begin
      out_ready[s] <= ($urandom_range(0, 3) != 0);
      if (out_valid[s] && out_ready[s]) begin
        int t;
        t = int'(out_tag[s]);
        checks++;
        if (!pend[s][t] || out_rdata[s] != pat(exp_ch[s][t], exp_a[s][t])) begin
          failures++; $display("FAIL response slice %0d tag %0d", s, t);
        end
        pend[s][t] = 0;
        n_rsp++;
      end
    end
  end
  always_comb begin
    for (int c = 0; c < NCH; c++) begin
      chr_valid[c] = q[c].size() > 0 && q[c][0].due <= cyc;
      chr_src[c]   = q[c].size() > 0 ? 1'(q[c][0].src) : 1'b0;
      chr_tag[c]   = q[c].size() > 0 ? HTAG_W'(q[c][0].tag) : '0;
      chr_we[c]    = q[c].size() > 0 ? 1'(q[c][0].we) : 1'b0;
      chr_rdata[c] = q[c].size() > 0 ? pat(c, q[c][0].a) : '0;
    end
  end

  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk); rst_n = 1;
    fork
      for (int s = 0; s < 2; s++) begin
        automatic int ss = s;
        fork
          for (int k = 0; k < NREQ; k++) begin
            automatic int a = $urandom_range(0, (1 << DAW) - 1);
            automatic int t = k % 256;
            while (pend[ss][t]) @(posedge clk);
            @(negedge clk);
            in_valid[ss] = 1; in_addr[ss] = DAW'(a); in_we[ss] = 1'($urandom_range(0, 1));
            in_tag[ss] = HTAG_W'(t);
            exp_ch[ss][t] = a % NCH; exp_a[ss][t] = a / NCH; pend[ss][t] = 1;
            @(posedge clk); while (!in_ready[ss]) @(posedge clk);
            n_sent++;
            @(negedge clk); in_valid[ss] = 0;
          end
        join_none
      end
    join_none
    while (n_rsp < 2 * NREQ) @(posedge clk);
    repeat (10) @(posedge clk);
    checks++;
    if (n_rsp != 2 * NREQ || n_sent != 2 * NREQ) begin failures++; $display("FAIL counts"); end
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
