// tb_shared_dmem: random writes and reads over the whole memory against an
// array model; read data is checked one cycle after the read.
module tb_shared_dmem;
  logic clk = 0, en = 0, we = 0;
  logic [10:0] addr = 0;
  logic [7:0] wdata = 0, rdata;
  logic [7:0] model [2048];
  int checks = 0, failures = 0;

  shared_dmem dut (.*);
  always #5 clk = ~clk;

  initial begin
    for (int a = 0; a < 2048; a++) model[a] = 8'h00;
    for (int i = 0; i < 6000; i++) begin
      int a;
      a = $urandom % 2048;
      @(negedge clk);
      en = 1; addr = 11'(a);
      we = ($urandom % 2) == 0;
      wdata = 8'($urandom);
      if (we) model[a] = wdata;
      else begin
        @(negedge clk); en = 0;
        checks++;
        if (rdata != model[a]) begin failures++; $display("FAIL addr %0d: %h vs %h", a, rdata, model[a]); end
      end
    end
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
