// tb_canary_ctrl: the canary voltage controller with nine SRAM models.
// The testbench first profiles the first 32 words of every SRAM the way the
// chip is profiled: at each supply on a 10 mV grid it writes 0s and 1s and
// reads them back, noting the highest supply at which each bit-cell fails and
// its preferred state. In each SRAM the eight cells that fail first become the
// canaries, stored with the complement of their preferred state. The
// controller is then started from V0 = 600 mV with an ideal regulator.
// Checks: it settles at (first failing grid voltage) + 2 steps, the number of
// steps down, one failure seen, and every profiled word (canaries restored
// included) reads back unchanged at nominal supply. A second run with the rail
// 30 mV below the requested voltage (a temperature shift) must settle 30 mV
// higher.
// Last comes a temperature sweep shaped like the chip's chamber test: from
// 25 C down to -15 C, then up to 90 C in 15 C steps, with the controller
// rerun from V0 = 650 mV at each point. The SRAM model has no temperature
// input, so temperature is applied as a rail offset: below the temperature
// inversion point a cold cell needs more voltage, modelled here as the rail
// being (25 - T) x 1 mV below the requested voltage. The 1 mV/C coefficient
// is this testbench's choice. Each point must settle within one step of
// where the offset puts the canaries, never lower when colder, and leave
// every word intact.
module tb_canary_ctrl;
  import snnac_pkg::*;
  localparam int NS = 9, NC = 8, WORDS = 32;
  logic clk = 0, rst_n = 0, start = 0, busy, done, tab_we = 0, tab_en = 0;
  logic [9:0] v0_mv = 10'd600, vreg_mv, v_mv;
  logic [3:0] tab_sram = 0;
  logic [2:0] tab_idx = 0, tab_bit = 0;
  logic [9:0] tab_addr = 0;
  logic [7:0] tab_word = 0;
  logic sram_sel, sram_we;
  logic [NS-1:0] sram_ce;
  logic [9:0] sram_addr;
  logic [7:0] sram_wdata;
  logic [NS-1:0][7:0] sram_rdata;
  logic [15:0] steps_down, failures_seen;

  // testbench side of the SRAM ports
  logic [NS-1:0] t_ce = '0;
  logic t_we = 0;
  logic [9:0] t_addr = 0;
  logic [7:0] t_wdata = 0;
  logic [9:0] rail = 10'd900;
  int rail_offset = 0;
  bit ideal = 0;

  int checks = 0, failures = 0;
  int failv [NS][WORDS][8];
  logic [7:0] pref [NS][WORDS];
  logic [7:0] data [NS][WORDS];
  int can_a [NS][NC], can_b [NS][NC];

  canary_ctrl #(.NUM_SRAM(NS)) dut (.*);
  always #5 clk = ~clk;

  for (genvar s = 0; s < NS; s++) begin : g_sram
    weight_sram #(.SEED(32'h5EED_0000 + s)) u (
      .clk, .ce(sram_sel ? sram_ce[s] : t_ce[s]), .we(sram_sel ? sram_we : t_we),
      .addr(sram_sel ? sram_addr : t_addr), .wdata(sram_sel ? sram_wdata : t_wdata),
      .rdata(sram_rdata[s]), .vdd_mv(ideal ? 10'(int'(vreg_mv) - rail_offset) : rail)
    );
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  task automatic wr(input int s, input int a, input logic [7:0] d);
    @(negedge clk); t_ce = '0; t_ce[s] = 1; t_we = 1; t_addr = 10'(a); t_wdata = d;
    @(negedge clk); t_ce = '0; t_we = 0;
  endtask
  task automatic rd(input int s, input int a, output logic [7:0] d);
    @(negedge clk); t_ce = '0; t_ce[s] = 1; t_we = 0; t_addr = 10'(a);
    @(negedge clk); t_ce = '0; d = sram_rdata[s];
  endtask

  task automatic run_and_check(input int offset, input int ufail);
    int expect_v, steps0;
    logic [7:0] r;
    steps0 = int'(steps_down);
    rail_offset = offset;
    ideal = 1;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    wait (done);
    @(negedge clk);
    expect_v = ufail + offset + 20;
    check(int'(vreg_mv) == expect_v, $sformatf("settled at %0d mV, expected %0d", vreg_mv, expect_v));
    check(int'(v_mv) == expect_v, "last good voltage");
    check(int'(steps_down) - steps0 == (600 - (ufail + offset)) / 10 - 1, $sformatf("steps down %0d", steps_down));
    ideal = 0; rail = 10'd900;
    for (int s = 0; s < NS; s++)
      for (int a = 0; a < WORDS; a++) begin
        rd(s, a, r);
        check(r == data[s][a], $sformatf("SRAM %0d word %0d after control: %h exp %h", s, a, r, data[s][a]));
      end
  endtask

  initial begin
    int ufail;
    logic [7:0] r0, r1;
    repeat (2) @(negedge clk); rst_n = 1;
    // profiling
    for (int s = 0; s < NS; s++)
      for (int a = 0; a < WORDS; a++) begin
        for (int b = 0; b < 8; b++) failv[s][a][b] = 0;
        for (int u = 540; u >= 400; u -= 10) begin
          rail = 10'd900; wr(s, a, 8'h00); rail = 10'(u); rd(s, a, r0);
          rail = 10'd900; wr(s, a, 8'hFF); rail = 10'(u); rd(s, a, r1);
          for (int b = 0; b < 8; b++)
            if ((r0[b] != 1'b0 || r1[b] != 1'b1) && failv[s][a][b] == 0) failv[s][a][b] = u;
        end
        rail = 10'd390; rd(s, a, pref[s][a]);
        rail = 10'd900;
      end
    // canary selection: the eight cells that fail first in each SRAM
    ufail = 0;
    for (int s = 0; s < NS; s++) begin
      for (int a = 0; a < WORDS; a++) data[s][a] = 8'($urandom);
      for (int c = 0; c < NC; c++) begin
        int best, ba, bb;
        best = -1; ba = 0; bb = 0;
        for (int a = 0; a < WORDS; a++)
          for (int b = 0; b < 8; b++) begin
            bit used;
            used = 0;
            for (int j = 0; j < c; j++) if (can_a[s][j] == a && can_b[s][j] == b) used = 1;
            if (!used && failv[s][a][b] > best) begin best = failv[s][a][b]; ba = a; bb = b; end
          end
        can_a[s][c] = ba; can_b[s][c] = bb;
        data[s][ba][bb] = ~pref[s][ba][bb];
        if (best > ufail) ufail = best;
      end
      for (int a = 0; a < WORDS; a++) wr(s, a, data[s][a]);
    end
    for (int s = 0; s < NS; s++)
      for (int c = 0; c < NC; c++) begin
        @(negedge clk); tab_we = 1; tab_sram = 4'(s); tab_idx = 3'(c); tab_en = 1;
        tab_addr = 10'(can_a[s][c]); tab_bit = 3'(can_b[s][c]); tab_word = data[s][can_a[s][c]];
      end
    @(negedge clk); tab_we = 0;
    $display("first canary failure on the grid at %0d mV", ufail);
    run_and_check(0, ufail);
    check(failures_seen == 16'd1, "one failure seen");
    run_and_check(30, ufail);
    check(failures_seen == 16'd2, "second failure seen");
    // temperature sweep
    begin
      int temps [11] = '{25, 15, 0, -15, 0, 15, 30, 45, 60, 75, 90};
      int settle [11];
      logic [7:0] r;
      v0_mv = 10'd650;
      for (int i = 0; i < 11; i++) begin
        int off, fs0;
        off = 25 - temps[i];
        fs0 = int'(failures_seen);
        rail_offset = off;
        ideal = 1;
        @(negedge clk); start = 1;
        @(negedge clk); start = 0;
        wait (done);
        @(negedge clk);
        settle[i] = int'(vreg_mv);
        $display("T = %0d C: SRAM supply settles at %0d mV", temps[i], settle[i]);
        check(settle[i] >= ufail + off + 10 && settle[i] <= ufail + off + 30,
              $sformatf("T %0d: settled at %0d mV, canaries fail near %0d", temps[i], settle[i], ufail + off));
        check(int'(failures_seen) == fs0 + 1, "one failure per run");
        ideal = 0; rail = 10'd900;
        for (int s = 0; s < NS; s++)
          for (int a = 0; a < WORDS; a++) begin
            rd(s, a, r);
            check(r == data[s][a], $sformatf("T %0d: SRAM %0d word %0d: %h exp %h", temps[i], s, a, r, data[s][a]));
          end
      end
      for (int i = 1; i < 11; i++)
        if (temps[i] < temps[i - 1]) check(settle[i] >= settle[i - 1], $sformatf("colder at step %0d but lower supply", i));
        else check(settle[i] <= settle[i - 1], $sformatf("warmer at step %0d but higher supply", i));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
