// tb_weight_sram: checks the weight SRAM model. At nominal supply every word
// reads back as written. Below the lowest Vmin,read every cell reads as its
// preferred state, whatever was written (writing 0s and 1s must give the same
// word). At an intermediate supply each bit reads either as written or as the
// preferred state, some but not all non-preferred bits flip, and the flip
// persists when the word is read again at nominal supply, until rewritten.
// Above the highest Vmin,read nothing flips.
module tb_weight_sram;
  logic       clk = 0;
  logic       ce = 0, we = 0;
  logic [9:0] addr = 0;
  logic [7:0] wdata = 0, rdata;
  logic [9:0] vdd_mv = 10'd900;
  int checks = 0, failures = 0;
  logic [7:0] pref [64];
  logic [7:0] shadow [64];
  int flips, cand;

  weight_sram #(.SEED(32'h1234)) dut (.*);

  always #5 clk = ~clk;

  task automatic wr(input int a, input logic [7:0] d);
    @(negedge clk); ce = 1; we = 1; addr = 10'(a); wdata = d;
    @(negedge clk); ce = 0; we = 0;
  endtask
  task automatic rd(input int a, output logic [7:0] d);
    @(negedge clk); ce = 1; we = 0; addr = 10'(a);
    @(negedge clk); ce = 0; d = rdata;
  endtask
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    logic [7:0] r, r2;
    // nominal: read back
    for (int a = 0; a < 64; a++) begin shadow[a] = 8'($urandom); wr(a, shadow[a]); end
    for (int a = 0; a < 64; a++) begin rd(a, r); check(r == shadow[a], $sformatf("nominal read %0d", a)); end
    // above the highest Vmin,read: no flips
    vdd_mv = 10'd531;
    for (int a = 0; a < 64; a++) begin rd(a, r); check(r == shadow[a], $sformatf("531 mV read %0d", a)); end
    // below the lowest: preferred state, independent of content
    vdd_mv = 10'd390;
    for (int a = 0; a < 64; a++) begin
      wr(a, 8'h00); rd(a, r);
      wr(a, 8'hFF); rd(a, r2);
      pref[a] = r;
      check(r == r2, $sformatf("preferred state independent of content at %0d", a));
    end
    // intermediate supply: each bit is written value or preferred; persistence
    flips = 0; cand = 0;
    for (int a = 0; a < 64; a++) begin
      shadow[a] = 8'($urandom);
      vdd_mv = 10'd900; wr(a, shadow[a]);
      vdd_mv = 10'd465; rd(a, r);
      check(((r ^ shadow[a]) & ~(pref[a] ^ shadow[a])) == 0, $sformatf("flip only toward preferred at %0d", a));
      vdd_mv = 10'd900; rd(a, r2);
      check(r2 == r, $sformatf("flip persists at %0d", a));
      flips += $countones(r ^ shadow[a]);
      cand  += $countones(pref[a] ^ shadow[a]);
      wr(a, shadow[a]); rd(a, r2);
      check(r2 == shadow[a], $sformatf("rewrite restores %0d", a));
    end
    check(flips > cand / 5 && flips < cand * 4 / 5, $sformatf("mid-voltage flip share %0d of %0d", flips, cand));
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
