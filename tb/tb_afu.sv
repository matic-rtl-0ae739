// tb_afu: programs bank 0 with ReLU and bank 1 with a sigmoid table, then
// feeds random partial sums (inside and outside the [-8, 8) range) and checks
// each output one cycle later: ReLU against floor(x/64) clamped to [0, 127],
// sigmoid against the real sigmoid within 3 LSB, and both against the PWL
// reference model exactly.
module tb_afu;
  import snnac_tb_pkg::*;
  logic clk = 0, rst_n = 0;
  logic lut_we = 0, lut_bank = 0, in_valid = 0, bank = 0, out_valid;
  logic [3:0] lut_seg = 0;
  logic signed [7:0] lut_slope = 0, lut_offset = 0, out_y;
  logic signed [21:0] in_x = 0;
  tab_t sl [2], of [2];
  int checks = 0, failures = 0;

  afu dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    relu_table(sl[0], of[0]);
    sigmoid_table(sl[1], of[1]);
    repeat (2) @(negedge clk); rst_n = 1;
    for (int b = 0; b < 2; b++)
      for (int s = 0; s < 16; s++) begin
        @(negedge clk); lut_we = 1; lut_bank = b[0]; lut_seg = 4'(s);
        lut_slope = 8'(sl[b][s]); lut_offset = 8'(of[b][s]);
      end
    @(negedge clk); lut_we = 0;
    for (int i = 0; i < 400; i++) begin
      int x, exp_ref, exp_ind;
      x = (i % 4 == 0) ? int'($urandom % 200000) - 100000 : int'($urandom % 70000) - 35000;
      @(negedge clk); in_valid = 1; bank = i[0]; in_x = 22'(x);
      @(negedge clk); in_valid = 0;
      check(out_valid, "valid one cycle later");
      exp_ref = afu_ref(sl[bank], of[bank], x);
      check(int'(out_y) == exp_ref, $sformatf("bank %0d x=%0d y=%0d ref=%0d", bank, x, out_y, exp_ref));
      if (bank == 0) begin
        exp_ind = (x < 0) ? 0 : ((x >>> 6) > 127 ? 127 : (x >>> 6));
        check(int'(out_y) == exp_ind, $sformatf("relu x=%0d y=%0d exp %0d", x, out_y, exp_ind));
      end else begin
        real s;
        s = sigmoid(real'(x) / 4096.0) * 64.0;
        check((real'(out_y) - s) <= 3.0 && (s - real'(out_y)) <= 3.0, $sformatf("sigmoid x=%0d y=%0d exp %f", x, out_y, s));
      end
    end
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
