// hm_checker: hit/miss checker for one CXL slice.
//
// Takes one host .mem request at a time (64 B read or write at a 41-bit byte
// address = {tag, set, page offset}). It asks the metadata interface
// controller for the set, and in the write stage compares the tag with the 16
// ways. On a hit it writes back the row with the way made most recently used
// and, for a write, the dirty bit set, then sends the access to DRAM at line
// address {set, way, 64 B index}. On a miss it leaves the row unchanged,
// passes {set, tag} to the miss line handler and waits for a fill broadcast
// of that line; then it looks the line up again. DRAM responses go back to the
// host directly through the DRAM interconnect, so the checker does not wait
// for them. While a write waits for DRAM to take it, the checker shows its
// page {set, way} on wr_pend/wr_pend_page, so the miss line handler can hold
// a write-back of that page until the write has reached DRAM.
//
// Timing: a hit takes grant + 1 cycle for the metadata stages, then the DRAM
// request is offered in the following cycle. The next host request is
// accepted in the cycle the DRAM request is taken, so back-to-back hits on
// one slice proceed at one 64 B access every three cycles. The lookup, age and dirty updates and
// one checker per slice follow the paper; the replay after a fill, the DRAM
// address layout and the one-request-at-a-time policy are this design's.
module hm_checker
  import itme_pkg::*;
#(
  parameter int unsigned SET_BITS = itme_pkg::DEF_SET_BITS,
  localparam int unsigned ADDR_W  = TAG_BITS + SET_BITS + PAGE_BITS,
  localparam int unsigned DADDR_W = SET_BITS + WAY_BITS + PAGE_BITS - LINE_BITS
) (
  input  logic                clk,
  input  logic                rst_n,
  // host request
  input  logic                req_valid,
  output logic                req_ready,
  input  logic [ADDR_W-1:0]   req_addr,
  input  logic                req_we,
  input  logic [DATA_W-1:0]   req_wdata,
  input  logic [HTAG_W-1:0]   req_tag,
  // metadata client
  output logic                m_req,
  output logic [SET_BITS-1:0] m_set,
  input  logic                m_gnt,
  input  logic                m_s2,
  input  meta_row_t           m_rd_row,
  output logic                m_wr_en,
  output meta_row_t           m_wr_row,
  // miss to the miss line handler
  output logic                miss_valid,
  input  logic                miss_ready,
  output logic [SET_BITS-1:0] miss_set,
  output logic [TAG_BITS-1:0] miss_tag,
  // fill broadcast from the miss line handler
  input  logic                fill_valid,
  input  logic [SET_BITS-1:0] fill_set,
  input  logic [TAG_BITS-1:0] fill_tag,
  // DRAM request
  output logic                d_valid,
  input  logic                d_ready,
  output logic [DADDR_W-1:0]  d_addr,
  output logic                d_we,
  output logic [DATA_W-1:0]   d_wdata,
  output logic [HTAG_W-1:0]   d_tag,
  // event pulses
  // pending DRAM write: committed in the metadata, not yet taken by DRAM
  output logic                wr_pend,
  output logic [SET_BITS+WAY_BITS-1:0] wr_pend_page,
  output logic                hit_pulse,
  output logic                miss_pulse
);
  typedef enum logic [2:0] {IDLE, LOOKUP, WSTAGE, MISS_PUSH, MISS_WAIT, DRAM_PUSH} state_e;
  state_e state;

  logic [ADDR_W-1:0]   a;
  logic                we;
  logic [DATA_W-1:0]   wdata;
  logic [HTAG_W-1:0]   htag;
  logic [WAY_BITS-1:0] hit_way, way_q;

  logic [SET_BITS-1:0] set_a;
  logic [TAG_BITS-1:0] tag_a;
  logic                hit;
  assign set_a = a[PAGE_BITS +: SET_BITS];
  assign tag_a = a[PAGE_BITS+SET_BITS +: TAG_BITS];

  always_comb begin
    hit = row_hit(m_rd_row, tag_a, hit_way);
    m_wr_row = lru_touch(m_rd_row, hit_way);
    if (we) m_wr_row[hit_way].dirty = 1'b1;
  end

  assign req_ready  = (state == IDLE) || (state == DRAM_PUSH && d_ready);
  assign m_req      = (state == LOOKUP);
  assign m_set      = set_a;
  assign m_wr_en    = (state == WSTAGE) && m_s2 && hit;
  assign miss_valid = (state == MISS_PUSH);
  assign miss_set   = set_a;
  assign miss_tag   = tag_a;
  assign d_valid    = (state == DRAM_PUSH);
  assign d_addr     = {set_a, way_q, a[LINE_BITS +: PAGE_BITS-LINE_BITS]};
  assign d_we       = we;
  assign d_wdata    = wdata;
  assign d_tag      = htag;
  assign wr_pend      = (state == DRAM_PUSH) && we;
  assign wr_pend_page = {set_a, way_q};
  assign hit_pulse  = (state == WSTAGE) && m_s2 && hit;
  assign miss_pulse = (state == WSTAGE) && m_s2 && !hit;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= IDLE;
      a     <= '0;
      we    <= 1'b0;
      wdata <= '0;
      htag  <= '0;
      way_q <= '0;
    end else begin
      unique case (state)
        IDLE: if (req_valid) begin
          a     <= req_addr;
          we    <= req_we;
          wdata <= req_wdata;
          htag  <= req_tag;
          state <= LOOKUP;
        end
        LOOKUP: if (m_gnt) state <= WSTAGE;
        WSTAGE: if (m_s2) begin
          if (hit) begin
            way_q <= hit_way;
            state <= DRAM_PUSH;
          end else begin
            state <= MISS_PUSH;
          end
        end
        MISS_PUSH: if (miss_ready) state <= MISS_WAIT;
        MISS_WAIT: if (fill_valid && fill_set == set_a && fill_tag == tag_a) state <= LOOKUP;
        DRAM_PUSH: if (d_ready) begin
          // the next request is taken in the same cycle
          if (req_valid) begin
            a     <= req_addr;
            we    <= req_we;
            wdata <= req_wdata;
            htag  <= req_tag;
            state <= LOOKUP;
          end else begin
            state <= IDLE;
          end
        end
        default: state <= IDLE;
      endcase
    end
  end

  a_s2_after_grant: assert property (@(posedge clk) disable iff (!rst_n)
                                     (state == LOOKUP && m_gnt) |=> m_s2);
endmodule
