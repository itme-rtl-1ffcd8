// meta_sram: the on-chip metadata buffer of the DRAM cache.
//
// One row per cache set holds the 16 metadata entries of that set
// (16 x 16 bits). One read port and one write port, both synchronous: a read
// issued in cycle t returns its row in cycle t+1. A read and a write of the
// same row in one cycle returns the old row; the metadata interface controller
// never does that because the set is locked. At the default size (512 K rows
// of 256 bits, 16 MB) this is the SRAM of the paper's main configuration; the
// row organisation and port count are this design's choice.
module meta_sram #(
  parameter int unsigned SET_BITS = itme_pkg::DEF_SET_BITS,
  parameter int unsigned WIDTH    = itme_pkg::ROW_BITS
) (
  input  logic                clk,
  input  logic                rd_en,
  input  logic [SET_BITS-1:0] rd_addr,
  output logic [WIDTH-1:0]    rd_data,
  input  logic                wr_en,
  input  logic [SET_BITS-1:0] wr_addr,
  input  logic [WIDTH-1:0]    wr_data
);
  logic [WIDTH-1:0] mem [2**SET_BITS];

  always_ff @(posedge clk) begin
    if (rd_en) rd_data <= mem[rd_addr];
    if (wr_en) mem[wr_addr] <= wr_data;
  end
endmodule
