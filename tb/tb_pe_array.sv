// tb_pe_array: the 8-PE systolic ring with its bias SRAM. Fills all nine SRAMs
// through the direct port, then runs a 16-input, 5-output layer as two chunks:
// chunk 0 starts from the biases and its results are kept in a queue standing
// in for the ACCUM FIFO; chunk 1 starts from that queue and is tagged last.
// Checks every result against sum(w*x) computed here, that each result
// appears exactly 10 cycles after its item was issued (8 PEs + 2), that the
// ring accepts and delivers one item per cycle, and that tags travel along.
module tb_pe_array;
  import snnac_pkg::*;
  localparam int N = 8, NO = 5;
  logic clk = 0, rst_n = 0;
  logic [9:0] vdd_mv = 10'd900;
  logic [N-1:0] ld_en = '0;
  logic signed [7:0] ld_data = 0;
  logic issue_valid = 0;
  tag_t issue_tag = '0, out_tag;
  logic [9:0] issue_waddr = 0, issue_baddr = 0;
  logic acc_pop, out_valid;
  logic signed [21:0] acc_data, out_psum;
  logic ext_sel = 0, ext_we = 0;
  logic [N:0] ext_ce = '0;
  logic [9:0] ext_addr = 0;
  logic [7:0] ext_wdata = 0;
  logic [N:0][7:0] ext_rdata;
  logic signed [7:0] W [N][16];
  logic signed [7:0] Bias [NO];
  int x [2][N];
  int expv [2][NO];
  int checks = 0, failures = 0, cyc = 0;
  int issue_cyc [$];
  int accq [$];
  int outs [2];

  pe_array dut (.*);
  always #5 clk = ~clk;
  assign acc_data = (accq.size() > 0) ? 22'(accq[0]) : 22'd0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // pop after the DUT has sampled the head at this edge
  always @(posedge clk) if (acc_pop) begin #1; void'(accq.pop_front()); end

  // output side: latency, values, ACCUM queue
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && out_valid) begin
      int ch, n, ic;
      ch = out_tag.last ? 1 : 0;
      n  = outs[ch];
      ic = issue_cyc.pop_front();
      check(cyc - ic == 2 + N, $sformatf("latency %0d", cyc - ic));
      check(int'(out_psum) == expv[ch][n], $sformatf("chunk %0d neuron %0d: %0d exp %0d", ch, n, out_psum, expv[ch][n]));
      check(out_tag.bias == (ch == 0), "bias tag travels");
      if (ch == 0) accq.push_back(int'(out_psum));
      outs[ch]++;
    end
  end

  task automatic load(input int c);
    for (int k = 0; k < N; k++) begin
      @(negedge clk); ld_en = '0; ld_en[k] = 1'b1; ld_data = 8'(x[c][k]);
    end
    @(negedge clk); ld_en = '0;
  endtask

  task automatic issue(input int c);
    for (int n = 0; n < NO; n++) begin
      @(negedge clk);
      issue_valid = 1;
      issue_tag.first = (n == 0); issue_tag.bias = (c == 0); issue_tag.last = (c == 1);
      issue_waddr = 10'(c * NO + n); issue_baddr = 10'(n);
      issue_cyc.push_back(cyc);
    end
    @(negedge clk); issue_valid = 0;
  endtask

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int k = 0; k < N; k++)
      for (int a = 0; a < 16; a++) begin
        W[k][a] = 8'($urandom);
        @(negedge clk); ext_sel = 1; ext_ce = '0; ext_ce[k] = 1; ext_we = 1; ext_addr = 10'(a); ext_wdata = W[k][a];
      end
    for (int n = 0; n < NO; n++) begin
      Bias[n] = 8'($urandom);
      @(negedge clk); ext_ce = '0; ext_ce[N] = 1; ext_addr = 10'(n); ext_wdata = Bias[n];
    end
    // read back one word of each SRAM through the direct port
    for (int k = 0; k <= N; k++) begin
      @(negedge clk); ext_ce = '0; ext_ce[k] = 1; ext_we = 0; ext_addr = 10'd1;
      @(negedge clk); ext_ce = '0;
      check(ext_rdata[k] == ((k == N) ? Bias[1] : W[k][1]), $sformatf("direct read SRAM %0d", k));
    end
    ext_sel = 0;
    for (int c = 0; c < 2; c++) for (int k = 0; k < N; k++) x[c][k] = int'($urandom % 256) - 128;
    for (int n = 0; n < NO; n++) begin
      expv[0][n] = int'(Bias[n]) * 64;
      for (int k = 0; k < N; k++) expv[0][n] += int'(W[k][n]) * x[0][k];
      expv[1][n] = expv[0][n];
      for (int k = 0; k < N; k++) expv[1][n] += int'(W[k][NO + n]) * x[1][k];
    end
    load(0);
    issue(0);
    load(1);
    wait (accq.size() == NO);
    issue(1);
    repeat (20) @(negedge clk);
    check(outs[0] == NO && outs[1] == NO, "all results delivered");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
