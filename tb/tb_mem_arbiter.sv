// tb_mem_arbiter: drives random requests from both ports into the arbiter and
// a memory model. Checks: the microcontroller is always granted, the NPU only
// when the microcontroller is idle, never both; the memory port carries the
// winner's access; read data returned to the winner matches the model.
module tb_mem_arbiter;
  logic clk = 0, rst_n = 0;
  logic u_req = 0, u_we = 0, n_req = 0, n_we = 0;
  logic [10:0] u_addr = 0, n_addr = 0, m_addr;
  logic [7:0] u_wdata = 0, n_wdata = 0, u_rdata, n_rdata, m_wdata, m_rdata;
  logic u_gnt, n_gnt, m_en, m_we;
  logic [31:0] conflicts;
  logic [7:0] model [2048];
  int checks = 0, failures = 0, n_conf = 0;

  mem_arbiter dut (.*);
  shared_dmem mem (.clk, .en(m_en), .we(m_we), .addr(m_addr), .wdata(m_wdata), .rdata(m_rdata));
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    for (int a = 0; a < 2048; a++) model[a] = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      logic u_rd, n_rd;
      logic [10:0] ua, na;
      @(negedge clk);
      u_req = ($urandom % 3) == 0; u_we = $urandom % 2; u_addr = 11'($urandom % 64); u_wdata = 8'($urandom);
      n_req = ($urandom % 2) == 0; n_we = $urandom % 2; n_addr = 11'($urandom % 64); n_wdata = 8'($urandom);
      #1;
      check(u_gnt == u_req, "uC always granted");
      check(n_gnt == (n_req && !u_req), "NPU granted only when uC idle");
      check(!(u_gnt && n_gnt), "one grant");
      if (u_req && n_req) n_conf++;
      if (u_gnt) check(m_addr == u_addr && m_we == u_we, "uC access on memory port");
      else if (n_gnt) check(m_addr == n_addr && m_we == n_we, "NPU access on memory port");
      u_rd = u_gnt && !u_we; n_rd = n_gnt && !n_we; ua = u_addr; na = n_addr;
      if (u_gnt && u_we) model[u_addr] = u_wdata;
      if (n_gnt && n_we) model[n_addr] = n_wdata;
      @(negedge clk);
      u_req = 0; n_req = 0;
      #1;
      if (u_rd) check(u_rdata == model[ua], "uC read data");
      if (n_rd) check(n_rdata == model[na], "NPU read data");
    end
    check(conflicts == 32'(n_conf), "conflict counter");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
