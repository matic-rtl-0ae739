// tb_pe: one PE in isolation. Fills its SRAM through the direct port, loads
// an activation, sends a chunk of six items, loads the next activation while
// that chunk is still passing (double buffering), then sends a second chunk.
// Every partial sum must leave the PE exactly 3 cycles after its item entered
// the address stage, as psum_in + w[addr] * x of its own chunk; the address
// pipeline must be delayed by exactly one cycle.
module tb_pe;
  import snnac_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [9:0] vdd_mv = 10'd900;
  logic ld_en = 0;
  logic signed [7:0] ld_data = 0;
  logic a_valid_i = 0, a_valid_o, s_valid_i = 0, s_valid_o;
  tag_t a_tag_i = '0, a_tag_o, s_tag_i = '0, s_tag_o;
  logic [9:0] a_addr_i = 0, a_addr_o;
  logic signed [21:0] s_psum_i = 0, s_psum_o;
  logic ext_sel = 0, ext_ce = 0, ext_we = 0;
  logic [9:0] ext_addr = 0;
  logic [7:0] ext_wdata = 0, ext_rdata;
  logic signed [7:0] w [16];
  int checks = 0, failures = 0;
  int exp_psum [int];
  int in_psum  [int];
  int item_addr [int];

  pe dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    int x0, x1, T;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int a = 0; a < 16; a++) begin
      w[a] = 8'($urandom);
      @(negedge clk); ext_sel = 1; ext_ce = 1; ext_we = 1; ext_addr = 10'(a); ext_wdata = w[a];
    end
    @(negedge clk); ext_sel = 0; ext_ce = 0; ext_we = 0;
    x0 = int'($urandom % 256) - 128; x1 = int'($urandom % 256) - 128;
    @(negedge clk); ld_en = 1; ld_data = 8'(x0);
    @(negedge clk); ld_en = 0;
    // plan: chunk A items at 0..5 (addr 0..5), chunk B at 8..13 (addr 6..11)
    for (int n = 0; n < 6; n++) begin
      item_addr[n] = n; item_addr[8 + n] = 6 + n;
      in_psum[n + 2]     = int'($urandom % 20000) - 10000;
      in_psum[8 + n + 2] = int'($urandom % 20000) - 10000;
      exp_psum[n + 3]     = in_psum[n + 2] + int'(w[n]) * x0;
      exp_psum[8 + n + 3] = in_psum[8 + n + 2] + int'(w[6 + n]) * x1;
    end
    T = 0;
    for (int c = 0; c < 20; c++) begin
      @(negedge clk);
      a_valid_i = item_addr.exists(c);
      a_tag_i   = '0;
      a_tag_i.first = (c == 0 || c == 8);
      a_addr_i  = item_addr.exists(c) ? 10'(item_addr[c]) : 10'd0;
      s_valid_i = in_psum.exists(c);
      s_psum_i  = in_psum.exists(c) ? 22'(in_psum[c]) : 22'd0;
      ld_en     = (c == 2);          // next chunk's activation arrives early
      ld_data   = 8'(x1);
      @(posedge clk); #1;
      check(a_valid_o == item_addr.exists(c), $sformatf("address valid delay at %0d", c));
      if (item_addr.exists(c)) check(a_addr_o == 10'(item_addr[c]), "address pipeline");
      check(s_valid_o == exp_psum.exists(c + 1), $sformatf("sum valid at %0d", c));
      if (exp_psum.exists(c + 1))
        check(s_psum_o == 22'(exp_psum[c + 1]), $sformatf("psum at %0d: %0d exp %0d", c + 1, s_psum_o, exp_psum[c + 1]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
