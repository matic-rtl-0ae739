// tb_snnac_top: end-to-end test of the chip at its default size, driven
// through the microcontroller bus as firmware would drive it.
//
// 1. Runs the four benchmark topologies (inversek2j 2-16-2, bscholes 6-16-1,
//    facedet 400-8-1, mnist 100-32-10) with deterministic pseudo-random
//    weights: weights, biases, LUTs and microcode are written over the bus,
//    the inputs into the shared data memory; the NPU is started, and while it
//    runs the bus keeps reading the data memory, so the NPU must wait at the
//    arbiter. Hidden layers use the sigmoid bank and pass through the AFU_OUT
//    FIFO, output layers use the ReLU bank and are written back to memory.
//    Outputs are compared with the reference model and the run time with a
//    budget of one item per cycle plus per-chunk and per-layer overhead.
// 2. Profiles the first 32 words of every SRAM with the mnist weights in place
//    (which stored bits fail first as the supply drops), selects the eight
//    first-failing bits per SRAM as canaries, programs them and runs the canary
//    voltage control from 600 mV with a regulator whose rail sits 10 mV below
//    the request. It must settle two steps above the first failing grid
//    voltage and leave every weight intact. An NPU start during the control
//    must be refused.
// 3. Runs mnist with the rail overscaled to 480 mV. Weight bits flip to their
//    preferred state and stay flipped, so the outputs must equal the reference
//    computed from the weights read back afterwards at nominal supply, and some
//    bits must have flipped.
// Every mechanism (arbiter stall, ACCUM accumulation and wait, zero padding,
// FIFO-fed layer, write-back, bank switch, canary step, canary failure and
// restore, refused start, faulty weights) is counted and must occur.
module tb_snnac_top;
  import snnac_pkg::*;
  import snnac_tb_pkg::*;
  localparam int N = 8;

  logic clk = 0, rst_n = 0;
  logic uc_req = 0, uc_we = 0;
  logic [15:0] uc_addr = 0, uc_wdata = 0, uc_rdata;
  logic [9:0] vreg_mv, sram_vdd_mv;
  logic npu_done, canary_done;
  bit   reg_follow = 0;
  int   reg_offset = 0;
  logic [9:0] rail_forced = 10'd900;

  int checks = 0, failures = 0;
  tab_t sl [2], of [2];
  int wt [2][32][400];
  int bs [2][32];
  int xin [400], hid [32], yref [32];
  int nin [2], nout [2];
  int ev_arb = 0, ev_accum = 0, ev_accwait = 0, ev_pad = 0, ev_fifo = 0, ev_wb = 0,
      ev_bank = 0, ev_step = 0, ev_fail = 0, ev_refused = 0, ev_faulty = 0;

  snnac_top dut (.*);
  always #5 clk = ~clk;
  assign sram_vdd_mv = reg_follow ? 10'(int'(vreg_mv) - reg_offset) : rail_forced;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic bus_wr(input int a, input int d);
    @(negedge clk); uc_req = 1; uc_we = 1; uc_addr = 16'(a); uc_wdata = 16'(d);
    @(negedge clk); uc_req = 0; uc_we = 0;
  endtask
  task automatic bus_rd(input int a, output int d);
    @(negedge clk); uc_req = 1; uc_we = 0; uc_addr = 16'(a);
    @(negedge clk); uc_req = 0; d = int'(uc_rdata);
  endtask
  function automatic int sram_a(input int s, input int a);
    return 16'h8000 + s * 1024 + a;
  endfunction

  task automatic write_instr(input int e, input instr_t ins);
    for (int p = 0; p < 4; p++) bus_wr(16'h1000 + e * 4 + p, int'(16'(64'(ins) >> (16 * p))));
  endtask

  // weight word of layer l for PE k, chunk c, neuron n
  function automatic int wword(input int l, input int c, input int n, input int k);
    return (c * N + k < nin[l]) ? wt[l][n][c * N + k] : 0;
  endfunction

  task automatic load_net(input int i_n, input int h_n, input int o_n, input int seed);
    int wb;
    nin[0] = i_n; nout[0] = h_n; nin[1] = h_n; nout[1] = o_n;
    for (int l = 0; l < 2; l++)
      for (int n = 0; n < nout[l]; n++) begin
        bs[l][n] = prand(seed + 1000 * l + n, 20);
        for (int i = 0; i < nin[l]; i++) wt[l][n][i] = prand(seed + 7 + 100000 * l + 400 * n + i, 40);
      end
    wb = 0;
    for (int l = 0; l < 2; l++) begin
      int nch;
      nch = (nin[l] + N - 1) / N;
      for (int c = 0; c < nch; c++)
        for (int n = 0; n < nout[l]; n++)
          for (int k = 0; k < N; k++) bus_wr(sram_a(k, wb + c * nout[l] + n), wword(l, c, n, k) & 255);
      for (int n = 0; n < nout[l]; n++) bus_wr(sram_a(N, 64 * l + n), bs[l][n] & 255);
      wb += nch * nout[l];
    end
  endtask

  task automatic program_net();
    instr_t ins;
    int nch0;
    nch0 = (nin[0] + N - 1) / N;
    ins = '0; ins.act = 1; ins.n_in = 9'(nin[0]); ins.n_out = 9'(nout[0]);
    ins.w_base = 10'd0; ins.b_base = 10'd0; ins.in_addr = 11'd0;
    write_instr(0, ins);
    ins = '0; ins.last = 1; ins.src_fifo = 1; ins.dst_dmem = 1; ins.act = 0;
    ins.n_in = 9'(nout[0]); ins.n_out = 9'(nout[1]);
    ins.w_base = 10'(nch0 * nout[0]); ins.b_base = 10'd64; ins.out_addr = 11'd1024;
    write_instr(1, ins);
  endtask

  // reference with the weights as the SRAMs hold them (read back at nominal)
  task automatic reference(input bit from_hw);
    int wb, d;
    if (from_hw) begin
      wb = 0;
      for (int l = 0; l < 2; l++) begin
        int nch;
        nch = (nin[l] + N - 1) / N;
        for (int c = 0; c < nch; c++)
          for (int n = 0; n < nout[l]; n++)
            for (int k = 0; k < N; k++)
              if (c * N + k < nin[l]) begin
                bus_rd(sram_a(k, wb + c * nout[l] + n), d);
                if (8'(d) != 8'(wt[l][n][c * N + k])) ev_faulty += $countones(8'(d) ^ 8'(wt[l][n][c * N + k]));
                wt[l][n][c * N + k] = int'($signed(8'(d)));
              end
        for (int n = 0; n < nout[l]; n++) begin
          bus_rd(sram_a(N, 64 * l + n), d);
          if (8'(d) != 8'(bs[l][n])) ev_faulty += $countones(8'(d) ^ 8'(bs[l][n]));
          bs[l][n] = int'($signed(8'(d)));
        end
        wb += nch * nout[l];
      end
    end
    for (int n = 0; n < nout[0]; n++) begin
      int acc;
      acc = bs[0][n] * 64;
      for (int i = 0; i < nin[0]; i++) acc += wt[0][n][i] * xin[i];
      hid[n] = afu_ref(sl[1], of[1], acc);
    end
    for (int n = 0; n < nout[1]; n++) begin
      int acc;
      acc = bs[1][n] * 64;
      for (int i = 0; i < nin[1]; i++) acc += wt[1][n][i] * hid[i];
      yref[n] = afu_ref(sl[0], of[0], acc);
    end
  endtask

  task automatic run_net(input string name, input int seed, input bit check_now, output int outs [32]);
    int st, cyc, budget, d, a0, acc0, conf0, accw0;
    for (int i = 0; i < nin[0]; i++) begin xin[i] = prand(seed + 555 + i, 64); bus_wr(i, xin[i] & 255); end
    program_net();
    bus_rd(16'h1412, conf0); bus_rd(16'h1410, acc0); bus_rd(16'h140A, accw0);
    bus_wr(16'h1400, 1);
    cyc = 0;
    do begin
      bus_rd(16'h0700 + (cyc % 64), d);   // keep the data memory busy
      bus_rd(16'h1400, st);
      cyc += 4;
    end while (st[0] && cyc < 400000);
    for (int n = 0; n < nout[1]; n++) begin bus_rd(1024 + n, d); outs[n] = int'($signed(8'(d))); end
    if (check_now) begin
      reference(0);
      for (int n = 0; n < nout[1]; n++)
        check(outs[n] == yref[n], $sformatf("%s output %0d: %0d exp %0d", name, n, outs[n], yref[n]));
    end
    budget = 0;
    for (int l = 0; l < 2; l++) budget += ((nin[l] + N - 1) / N) * (nout[l] + 3 * N + 12) + 40;
    check(cyc <= budget, $sformatf("%s took %0d cycles, budget %0d", name, cyc, budget));
    bus_rd(16'h1412, d); if (d != conf0) ev_arb++;
    bus_rd(16'h1410, d); if (d != acc0)  ev_accum++;
    bus_rd(16'h140A, d); if (d != accw0) ev_accwait++;
    if (nin[0] % N != 0 || nin[1] % N != 0) ev_pad++;
    ev_fifo++; ev_wb++; ev_bank++;
    $display("%s %0d-%0d-%0d: about %0d cycles (budget %0d)", name, nin[0], nout[0], nout[1], cyc, budget);
  endtask

  initial begin
    int outs [32];
    int d, ufail, st, v;
    int fv [9][32][8];
    int pref_bit [9][32][8];
    int orig [9][32];
    int can_a [9][8], can_b [9][8];
    relu_table(sl[0], of[0]);
    sigmoid_table(sl[1], of[1]);
    repeat (3) @(negedge clk); rst_n = 1;
    for (int b = 0; b < 2; b++)
      for (int s = 0; s < 16; s++) bus_wr(16'h1100 + 16 * b + s, ((sl[b][s] & 255) << 8) | (of[b][s] & 255));

    // ---- 1. the four benchmark topologies --------------------------------
    load_net(2, 16, 2, 100);   run_net("inversek2j", 100, 1, outs);
    load_net(6, 16, 1, 200);   run_net("bscholes", 200, 1, outs);
    load_net(400, 8, 1, 300);  run_net("facedet", 300, 1, outs);
    load_net(100, 32, 10, 400); run_net("mnist", 400, 1, outs);

    // ---- 2. profiling and canary control ----------------------------------
    ufail = 0;
    for (int s = 0; s < 9; s++)
      for (int a = 0; a < 32; a++) begin
        bus_rd(sram_a(s, a), orig[s][a]);
        for (int b = 0; b < 8; b++) begin fv[s][a][b] = 0; pref_bit[s][a][b] = -1; end
        for (int u = 540; u >= 400; u -= 10) begin
          rail_forced = 10'(u); bus_rd(sram_a(s, a), d);
          rail_forced = 10'd900; bus_wr(sram_a(s, a), orig[s][a]);
          for (int b = 0; b < 8; b++)
            if (d[b] != orig[s][a][b] && fv[s][a][b] == 0) fv[s][a][b] = u;
        end
      end
    for (int s = 0; s < 9; s++)
      for (int c = 0; c < 8; c++) begin
        int best, ba, bb;
        best = -1; ba = 0; bb = 0;
        for (int a = 0; a < 32; a++)
          for (int b = 0; b < 8; b++) begin
            bit used;
            used = 0;
            for (int j = 0; j < c; j++) if (can_a[s][j] == a && can_b[s][j] == b) used = 1;
            if (!used && fv[s][a][b] > best) begin best = fv[s][a][b]; ba = a; bb = b; end
          end
        can_a[s][c] = ba; can_b[s][c] = bb;
        if (best > ufail) ufail = best;
        bus_wr(16'h1300, (1 << 11) | (bb << 8) | orig[s][ba]);
        bus_wr(16'h1200 + s * 8 + c, ba);
      end
    $display("first canary failure on the grid at %0d mV", ufail);
    bus_wr(16'h1402, 600);
    reg_offset = 10; reg_follow = 1;
    bus_wr(16'h1400, 2);
    bus_wr(16'h1400, 1);                // NPU start while the control runs
    bus_rd(16'h1400, st);
    if (st == 2) ev_refused++;
    check(st == 2, "NPU start refused during canary control");
    wait (canary_done);
    bus_rd(16'h1404, v);
    check(v == ufail + 10 + 20, $sformatf("canary control settled at %0d, expected %0d", v, ufail + 30));
    check(int'(vreg_mv) == v, "regulator request equals settled voltage");
    bus_rd(16'h140C, d); if (d > 0) ev_step++;
    check(d == (600 - (ufail + 10)) / 10 - 1, $sformatf("steps down %0d", d));
    bus_rd(16'h140E, d); if (d > 0) ev_fail++;
    reg_follow = 0; rail_forced = 10'd900;
    for (int s = 0; s < 9; s++)
      for (int a = 0; a < 32; a++) begin
        bus_rd(sram_a(s, a), d);
        check(d == orig[s][a], $sformatf("SRAM %0d word %0d intact after control", s, a));
      end

    // ---- 3. mnist at an overscaled rail ------------------------------------
    rail_forced = 10'd480;
    run_net("mnist@480mV", 400, 0, outs);
    rail_forced = 10'd900;
    reference(1);
    for (int n = 0; n < nout[1]; n++)
      check(outs[n] == yref[n], $sformatf("mnist@480mV output %0d: %0d exp %0d", n, outs[n], yref[n]));
    $display("faulty weight bits after the overscaled run: %0d", ev_faulty);

    // ---- mechanisms ---------------------------------------------------------
    check(ev_arb > 0, "arbiter stall");
    check(ev_accum > 0, "ACCUM accumulation");
    check(ev_accwait > 0, "ACCUM wait");
    check(ev_pad > 0, "zero padding");
    check(ev_fifo > 0 && ev_wb > 0 && ev_bank > 0, "FIFO-fed layer, write-back, bank switch");
    check(ev_step > 0, "canary step down");
    check(ev_fail > 0, "canary failure and restore");
    check(ev_refused > 0, "refused start");
    check(ev_faulty > 0, "faulty weight bits at low voltage");
    $display("events: arb %0d accum %0d accwait %0d pad %0d fifo %0d wb %0d bank %0d step %0d fail %0d refused %0d faulty %0d",
             ev_arb, ev_accum, ev_accwait, ev_pad, ev_fifo, ev_wb, ev_bank, ev_step, ev_fail, ev_refused, ev_faulty);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
