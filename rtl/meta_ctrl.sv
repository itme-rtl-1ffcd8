// meta_ctrl: metadata interface controller with per-set locking.
//
// Every metadata update is an atomic three-stage operation, one stage per
// cycle: (1) read the set's row and lock the set, (2) write the row back,
// (3) unlock. A client raises cli_req with cli_set; the cycle it sees
// cli_gnt is stage 1. In the next cycle (cli_s2 high for that client) the row
// is on rd_row and the client drives cli_wr_en / cli_wr_row, normally
// computed combinationally from rd_row; with cli_wr_en low the row is left as
// it is. The cycle after is stage 3, in which the lock is released, so a
// second update of the same set is granted three cycles after the first.
// Requests for sets not locked by stage 2 or 3 may be granted every cycle,
// one per cycle, picked round-robin. The three stages and the locking follow
// the paper; overlapping updates of different sets, the round-robin order
// and the clearing sweep are this design's choices.
//
// After reset the controller writes zero (all entries invalid) to every row,
// one row per cycle, and raises init_done; no grant is given before that.
module meta_ctrl
  import itme_pkg::*;
#(
  parameter int unsigned N_CLI    = 3,
  parameter int unsigned SET_BITS = itme_pkg::DEF_SET_BITS
) (
  input  logic                      clk,
  input  logic                      rst_n,
  output logic                      init_done,
  input  logic [N_CLI-1:0]          cli_req,
  input  logic [N_CLI-1:0][SET_BITS-1:0] cli_set,
  output logic [N_CLI-1:0]          cli_gnt,
  output logic [N_CLI-1:0]          cli_s2,
  output meta_row_t                 rd_row,
  input  logic [N_CLI-1:0]          cli_wr_en,
  input  meta_row_t [N_CLI-1:0]     cli_wr_row
);
  localparam int unsigned CW = (N_CLI > 1) ? $clog2(N_CLI) : 1;

  // init sweep
  logic [SET_BITS:0] init_cnt;
  assign init_done = init_cnt[SET_BITS];

  // pipeline registers: stage 2 (write) and stage 3 (unlock)
  logic                s2_v, s3_v;
  logic [CW-1:0]       s2_c;
  logic [SET_BITS-1:0] s2_set, s3_set;
  logic [CW-1:0]       rr;          // round-robin pointer

  // eligibility and round-robin grant
  logic [N_CLI-1:0] elig;
  logic             any_gnt;
  logic [CW-1:0]    gnt_idx;

  always_comb begin
    for (int i = 0; i < N_CLI; i++)
      elig[i] = init_done && cli_req[i]
                && !(s2_v && cli_set[i] == s2_set)
                && !(s3_v && cli_set[i] == s3_set);
    any_gnt = 1'b0;
    gnt_idx = '0;
    for (int k = 0; k < N_CLI; k++) begin
      int unsigned idx;
      idx = (int'(rr) + k) % N_CLI;
      if (!any_gnt && elig[idx]) begin
        any_gnt = 1'b1;
        gnt_idx = CW'(idx);
      end
    end
    cli_gnt = '0;
    if (any_gnt) cli_gnt[gnt_idx] = 1'b1;
    cli_s2 = '0;
    if (s2_v) cli_s2[s2_c] = 1'b1;
  end

  // SRAM ports
  logic                sram_wr_en;
  logic [SET_BITS-1:0] sram_wr_addr;
  meta_row_t           sram_wr_data;

  always_comb begin
    if (!init_done) begin
      sram_wr_en   = 1'b1;
      sram_wr_addr = init_cnt[SET_BITS-1:0];
      sram_wr_data = '0;
    end else begin
      sram_wr_en   = s2_v && cli_wr_en[s2_c];
      sram_wr_addr = s2_set;
      sram_wr_data = cli_wr_row[s2_c];
    end
  end

  meta_sram #(.SET_BITS(SET_BITS), .WIDTH(ROW_BITS)) u_sram (
    .clk    (clk),
    .rd_en  (any_gnt),
    .rd_addr(cli_set[gnt_idx]),
    .rd_data(rd_row),
    .wr_en  (sram_wr_en),
    .wr_addr(sram_wr_addr),
    .wr_data(sram_wr_data)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      init_cnt <= '0;
      s2_v     <= 1'b0;
      s3_v     <= 1'b0;
      s2_c     <= '0;
      s2_set   <= '0;
      s3_set   <= '0;
      rr       <= '0;
    end else begin
      if (!init_done) init_cnt <= init_cnt + 1'b1;
      s2_v   <= any_gnt;
      s2_c   <= gnt_idx;
      s2_set <= cli_set[gnt_idx];
      s3_v   <= s2_v;
      s3_set <= s2_set;
      if (any_gnt) rr <= (gnt_idx == CW'(N_CLI - 1)) ? '0 : gnt_idx + 1'b1;
    end
  end

  // A granted set is never already locked.
  property p_no_locked_grant;
    @(posedge clk) disable iff (!rst_n)
      any_gnt |-> !((s2_v && cli_set[gnt_idx] == s2_set) || (s3_v && cli_set[gnt_idx] == s3_set));
  endproperty
  a_no_locked_grant: assert property (p_no_locked_grant);
endmodule
