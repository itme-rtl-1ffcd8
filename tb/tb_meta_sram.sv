// tb_meta_sram: writes random rows to the metadata SRAM and reads them back
// against a reference array; also checks that a read and a write of the same
// row in one cycle return the old row, and that a read takes one cycle.
module tb_meta_sram;
  localparam int unsigned SB = 4;
  localparam int unsigned W  = 256;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rd_en = 0, wr_en = 0;
  logic [SB-1:0] rd_addr = 0, wr_addr = 0;
  logic [W-1:0]  rd_data, wr_data = 0;
  logic [W-1:0]  ref_mem [2**SB];

  meta_sram #(.SET_BITS(SB), .WIDTH(W)) dut (.*);

  function automatic logic [W-1:0] rnd_row();
    logic [W-1:0] r;
    for (int i = 0; i < W / 32; i++) r[i*32 +: 32] = $urandom;
    return r;
  endfunction

  initial begin
    repeat (2) @(posedge clk);
    for (int i = 0; i < 2**SB; i++) begin
      ref_mem[i] = rnd_row();
      @(negedge clk); wr_en = 1; wr_addr = SB'(i); wr_data = ref_mem[i];
    end
    @(negedge clk); wr_en = 0;
    for (int k = 0; k < 40; k++) begin
      int a;
      a = $urandom_range(0, 2**SB - 1);
      @(negedge clk); rd_en = 1; rd_addr = SB'(a);
      if (k % 3 == 0) begin
        wr_en = 1; wr_addr = SB'(a); wr_data = rnd_row();
      end else wr_en = 0;
      @(posedge clk); #1;
      checks++;
      if (rd_data !== ref_mem[a]) begin
        failures++; $display("FAIL row %0d read mismatch", a);
      end
      if (wr_en) ref_mem[a] = wr_data;
    end
    @(negedge clk); rd_en = 0; wr_en = 0;
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
