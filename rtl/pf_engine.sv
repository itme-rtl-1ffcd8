// pf_engine: hardware prefetch command queue and page walker.
//
// Prefetch commands {physical address, page count} from the register set are
// queued in a FIFO (the controller's prefetch buffer). The walker pops one
// command at a time, aligns the address down to a 4 KB page and offers
// `count` consecutive pages to the miss line handler as {set, tag}, one per
// accepted handshake; a count of zero is discarded. The handler stages each
// page from the SSD into the DRAM cache using its MSHRs, so successive pages
// overlap. The FIFO follows the paper; its depth and the page-by-page walk
// are this design's choices.
module pf_engine
  import itme_pkg::*;
#(
  parameter int unsigned SET_BITS   = itme_pkg::DEF_SET_BITS,
  parameter int unsigned FIFO_DEPTH = 16,
  localparam int unsigned ADDR_W    = TAG_BITS + SET_BITS + PAGE_BITS,
  localparam int unsigned PN_W      = TAG_BITS + SET_BITS,
  localparam int unsigned LW        = $clog2(FIFO_DEPTH)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                cmd_valid,
  output logic                cmd_ready,
  input  logic [ADDR_W-1:0]   cmd_pa,
  input  logic [31:0]         cmd_count,
  output logic                pg_valid,
  input  logic                pg_ready,
  output logic [SET_BITS-1:0] pg_set,
  output logic [TAG_BITS-1:0] pg_tag,
  output logic                busy,
  output logic [LW:0]         level
);
  logic                 q_valid, q_pop;
  logic [PN_W+32-1:0]   q_data;
  logic [PN_W-1:0]      page;
  logic [31:0]          left;
  logic                 active;

  sync_fifo #(.WIDTH(PN_W + 32), .DEPTH(FIFO_DEPTH)) u_q (
    .clk, .rst_n,
    .in_valid (cmd_valid),
    .in_ready (cmd_ready),
    .in_data  ({cmd_pa[ADDR_W-1:PAGE_BITS], cmd_count}),
    .out_valid(q_valid),
    .out_ready(q_pop),
    .out_data (q_data),
    .level    (level)
  );

  assign q_pop    = !active && q_valid;
  assign pg_valid = active;
  assign pg_set   = page[SET_BITS-1:0];
  assign pg_tag   = page[PN_W-1:SET_BITS];
  assign busy     = active || q_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0;
      page   <= '0;
      left   <= '0;
    end else if (q_pop) begin
      page   <= q_data[PN_W+32-1:32];
      left   <= q_data[31:0];
      active <= (q_data[31:0] != '0);
    end else if (active && pg_ready) begin
      page   <= page + 1'b1;
      left   <= left - 1'b1;
      active <= (left != 32'd1);
    end
  end
endmodule
