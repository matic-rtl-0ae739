// tb_npu_imem: writes random 64-bit instructions in 16-bit pieces and reads
// them back as instr_t, comparing every field with the value assembled in
// the testbench.
module tb_npu_imem;
  import snnac_pkg::*;
  logic clk = 0, wr_en = 0;
  logic [3:0] wr_addr = 0, rd_addr = 0;
  logic [1:0] wr_piece = 0;
  logic [15:0] wr_data = 0;
  instr_t rd_instr;
  logic [63:0] model [16];
  int checks = 0, failures = 0;

  npu_imem dut (.*);
  always #5 clk = ~clk;

  initial begin
    for (int e = 0; e < 16; e++) begin
      model[e] = {$urandom, $urandom};
      for (int p = 0; p < 4; p++) begin
        @(negedge clk); wr_en = 1; wr_addr = 4'(e); wr_piece = 2'(p); wr_data = model[e][16*p +: 16];
      end
    end
    @(negedge clk); wr_en = 0;
    for (int e = 15; e >= 0; e--) begin
      rd_addr = 4'(e); #1;
      checks++;
      if (64'(rd_instr) != model[e]) begin failures++; $display("FAIL entry %0d", e); end
      checks++;
      if (rd_instr.n_in != model[e][59:51] || rd_instr.out_addr != model[e][10:0] || rd_instr.last != model[e][63]) begin
        failures++; $display("FAIL fields of entry %0d", e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
