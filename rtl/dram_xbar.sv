// dram_xbar: interconnect between the two CXL slices and the DDR4 memory
// controllers.
//
// Each slice sends 64 B DRAM-cache accesses at a line address. The lowest
// log2(N_CH) bits of the line address pick the channel, so consecutive 64 B
// lines of a 4 KB page spread over all channels; the rest is the address
// inside the channel. Each channel takes one request per cycle, chosen
// round-robin between the slices. Each memory controller answers every
// request (read data or write acknowledge) with the source slice and host
// tag it was given; each slice takes one answer per cycle, chosen round-robin
// between channels. All handshakes are valid/ready. The paper shows the
// cache controller feeding four memory controllers; channel selection and
// arbitration are this design's choices.
module dram_xbar
  import itme_pkg::*;
#(
  parameter int unsigned DADDR_W = 29,
  parameter int unsigned N_IN    = 2,
  parameter int unsigned N_CH    = 4,
  localparam int unsigned CB     = $clog2(N_CH),
  localparam int unsigned SB     = (N_IN > 1) ? $clog2(N_IN) : 1,
  localparam int unsigned CADDR_W = DADDR_W - CB
) (
  input  logic clk,
  input  logic rst_n,
  // requests from slices
  input  logic [N_IN-1:0]                in_valid,
  output logic [N_IN-1:0]                in_ready,
  input  logic [N_IN-1:0][DADDR_W-1:0]   in_addr,
  input  logic [N_IN-1:0]                in_we,
  input  logic [N_IN-1:0][DATA_W-1:0]    in_wdata,
  input  logic [N_IN-1:0][HTAG_W-1:0]    in_tag,
  // requests to memory controllers
  output logic [N_CH-1:0]                ch_valid,
  input  logic [N_CH-1:0]                ch_ready,
  output logic [N_CH-1:0][CADDR_W-1:0]   ch_addr,
  output logic [N_CH-1:0]                ch_we,
  output logic [N_CH-1:0][DATA_W-1:0]    ch_wdata,
  output logic [N_CH-1:0][HTAG_W-1:0]    ch_tag,
  output logic [N_CH-1:0][SB-1:0]        ch_src,
  // responses from memory controllers
  input  logic [N_CH-1:0]                chr_valid,
  output logic [N_CH-1:0]                chr_ready,
  input  logic [N_CH-1:0][SB-1:0]        chr_src,
  input  logic [N_CH-1:0][HTAG_W-1:0]    chr_tag,
  input  logic [N_CH-1:0]                chr_we,
  input  logic [N_CH-1:0][DATA_W-1:0]    chr_rdata,
  // responses to slices
  output logic [N_IN-1:0]                out_valid,
  input  logic [N_IN-1:0]                out_ready,
  output logic [N_IN-1:0][HTAG_W-1:0]    out_tag,
  output logic [N_IN-1:0]                out_we,
  output logic [N_IN-1:0][DATA_W-1:0]    out_rdata
);
  logic [N_CH-1:0][SB-1:0] rq_rr;   // per-channel pointer over slices
  logic [N_IN-1:0][CB-1:0] rs_rr;   // per-slice pointer over channels
  logic [N_CH-1:0]         rq_any;
  logic [N_CH-1:0][SB-1:0] rq_sel;
  logic [N_IN-1:0]         rs_any;
  logic [N_IN-1:0][CB-1:0] rs_sel;

  always_comb begin
    in_ready  = '0;
    chr_ready = '0;
    for (int c = 0; c < N_CH; c++) begin
      rq_any[c] = 1'b0;
      rq_sel[c] = '0;
      for (int k = 0; k < N_IN; k++) begin
        int unsigned i;
        i = (int'(rq_rr[c]) + k) % N_IN;
        if (!rq_any[c] && in_valid[i] && int'(in_addr[i][CB-1:0]) == c) begin
          rq_any[c] = 1'b1;
          rq_sel[c] = SB'(i);
        end
      end
      ch_valid[c] = rq_any[c];
      ch_addr[c]  = in_addr[rq_sel[c]][DADDR_W-1:CB];
      ch_we[c]    = in_we[rq_sel[c]];
      ch_wdata[c] = in_wdata[rq_sel[c]];
      ch_tag[c]   = in_tag[rq_sel[c]];
      ch_src[c]   = rq_sel[c];
      if (rq_any[c] && ch_ready[c]) in_ready[rq_sel[c]] = 1'b1;
    end
    for (int s = 0; s < N_IN; s++) begin
      rs_any[s] = 1'b0;
      rs_sel[s] = '0;
      for (int k = 0; k < N_CH; k++) begin
        int unsigned c;
        c = (int'(rs_rr[s]) + k) % N_CH;
        if (!rs_any[s] && chr_valid[c] && int'(chr_src[c]) == s) begin
          rs_any[s] = 1'b1;
          rs_sel[s] = CB'(c);
        end
      end
      out_valid[s] = rs_any[s];
      out_tag[s]   = chr_tag[rs_sel[s]];
      out_we[s]    = chr_we[rs_sel[s]];
      out_rdata[s] = chr_rdata[rs_sel[s]];
      if (rs_any[s] && out_ready[s]) chr_ready[rs_sel[s]] = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rq_rr <= '0;
      rs_rr <= '0;
    end else begin
      for (int c = 0; c < N_CH; c++)
        if (rq_any[c] && ch_ready[c]) rq_rr[c] <= SB'((int'(rq_sel[c]) + 1) % N_IN);
      for (int s = 0; s < N_IN; s++)
        if (rs_any[s] && out_ready[s]) rs_rr[s] <= CB'((int'(rs_sel[s]) + 1) % N_CH);
    end
  end
endmodule
