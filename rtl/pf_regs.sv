// pf_regs: the memory-mapped prefetch register set reached over CXL.io.
//
// Software (the prefetch library on the memory server) maps these registers
// into user space, writes the physical address of the data to stage and then
// the number of 4 KB pages; the write of the count posts the command
// {address, count} to the prefetch queue. Register map (64-bit registers,
// io_addr is the register index):
//   0  PF_ADDR   physical byte address (read/write)
//   1  PF_COUNT  page count; a write posts the command (read gives last count)
//   2  STATUS    bit 0 overflow (sticky, any write clears), bit 1 engine busy,
//                bits 15:8 queue level (read only otherwise)
//   3  PF_PAGES  pages handed to the miss line handler since reset (read only)
// A command that finds the queue full is dropped and sets the overflow flag.
// Reads return io_rdata one cycle after io_valid with io_rvalid. The address
// and count registers and the doorbell behaviour follow the paper; the map,
// status and counter registers are this design's.
module pf_regs
  import itme_pkg::*;
#(
  parameter int unsigned SET_BITS = itme_pkg::DEF_SET_BITS,
  parameter int unsigned LW       = 4,
  localparam int unsigned ADDR_W  = TAG_BITS + SET_BITS + PAGE_BITS
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              io_valid,
  input  logic              io_we,
  input  logic [3:0]        io_addr,
  input  logic [63:0]       io_wdata,
  output logic              io_rvalid,
  output logic [63:0]       io_rdata,
  output logic              cmd_valid,
  input  logic              cmd_ready,
  output logic [ADDR_W-1:0] cmd_pa,
  output logic [31:0]       cmd_count,
  input  logic              eng_busy,
  input  logic [LW:0]       eng_level,
  input  logic              page_issued
);
  logic [ADDR_W-1:0] r_addr;
  logic [31:0]       r_count;
  logic              r_ovf;
  logic [63:0]       r_pages;
  logic              doorbell;

  assign doorbell  = io_valid && io_we && io_addr == 4'd1;
  assign cmd_valid = doorbell;
  assign cmd_pa    = r_addr;
  assign cmd_count = io_wdata[31:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r_addr    <= '0;
      r_count   <= '0;
      r_ovf     <= 1'b0;
      r_pages   <= '0;
      io_rvalid <= 1'b0;
      io_rdata  <= '0;
    end else begin
      io_rvalid <= io_valid && !io_we;
      if (page_issued) r_pages <= r_pages + 1'b1;
      if (io_valid && io_we) begin
        unique case (io_addr)
          4'd0: r_addr  <= io_wdata[ADDR_W-1:0];
          4'd1: begin
            r_count <= io_wdata[31:0];
            if (!cmd_ready) r_ovf <= 1'b1;
          end
          4'd2: r_ovf <= 1'b0;
          default: ;
        endcase
      end
      if (io_valid && !io_we) begin
        unique case (io_addr)
          4'd0:    io_rdata <= 64'(r_addr);
          4'd1:    io_rdata <= 64'(r_count);
          4'd2:    io_rdata <= {48'd0, 8'(eng_level), 6'd0, eng_busy, r_ovf};
          4'd3:    io_rdata <= r_pages;
          default: io_rdata <= '0;
        endcase
      end
    end
  end
endmodule
