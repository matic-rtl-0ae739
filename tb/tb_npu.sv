// tb_npu: runs a two-layer network (20-12-3) on the NPU. Layer 1 reads its
// inputs from the data memory, uses the sigmoid bank and leaves its outputs in
// the AFU_OUT FIFO; layer 2 takes them from the FIFO, uses the ReLU bank and
// writes its outputs back to the data memory. The data memory is a model in
// the testbench whose grant is refused at random, so the NPU must stall.
// Checks every output against the reference model, the number of items issued
// and ACCUM pushes, that the arbiter and ACCUM stalls happened, and that the
// run fits a cycle budget of one issued item per cycle plus per-chunk load and
// per-layer drain overhead.
module tb_npu;
  import snnac_pkg::*;
  import snnac_tb_pkg::*;
  localparam int N = 8;
  localparam int NIN [2]  = '{20, 12};
  localparam int NOUT [2] = '{12, 3};
  localparam int WB [2]   = '{0, 40};
  localparam int BB [2]   = '{0, 16};
  localparam int OUTA = 100;

  logic clk = 0, rst_n = 0;
  logic [9:0] vdd_mv = 10'd900;
  logic start = 0, busy, done;
  logic dm_req, dm_we, dm_gnt;
  logic [10:0] dm_addr;
  logic [7:0] dm_wdata, dm_rdata;
  logic imem_we = 0, lut_we = 0, lut_bank = 0, sram_sel = 0, sram_we = 0;
  logic [3:0] imem_addr = 0, lut_seg = 0;
  logic [1:0] imem_piece = 0;
  logic [15:0] imem_wdata = 0;
  logic signed [7:0] lut_slope = 0, lut_offset = 0;
  logic [8:0] sram_ce = '0;
  logic [9:0] sram_addr = 0;
  logic [7:0] sram_wdata = 0;
  logic [8:0][7:0] sram_rdata;
  logic [31:0] stall_arb, stall_acc, accum_pushes;

  logic [7:0] dmem [2048];
  bit deny;
  int checks = 0, failures = 0, cycles = 0, issued = 0;
  tab_t sl [2], of [2];
  int wt [2][32][32];
  int bs [2][32];
  int xin [20], y1 [12], y2 [3];

  npu dut (.*);
  always #5 clk = ~clk;

  // data memory model with random refusals
  assign dm_gnt = dm_req && !deny;
  always @(posedge clk) begin
    deny <= ($urandom % 4) == 0;
    if (dm_gnt && dm_we) dmem[dm_addr] <= dm_wdata;
    if (dm_gnt && !dm_we) dm_rdata <= dmem[dm_addr];
    if (rst_n && busy) cycles++;
    if (rst_n && dut.issue_valid) issued++;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic sram_write(input int s, input int a, input int d);
    @(negedge clk); sram_sel = 1; sram_ce = '0; sram_ce[s] = 1; sram_we = 1; sram_addr = 10'(a); sram_wdata = 8'(d);
    @(negedge clk); sram_sel = 0; sram_ce = '0; sram_we = 0;
  endtask

  task automatic write_instr(input int e, input instr_t ins);
    for (int p = 0; p < 4; p++) begin
      @(negedge clk); imem_we = 1; imem_addr = 4'(e); imem_piece = 2'(p); imem_wdata = 16'(64'(ins) >> (16 * p));
    end
    @(negedge clk); imem_we = 0;
  endtask

  initial begin
    instr_t ins;
    int budget;
    for (int a = 0; a < 2048; a++) dmem[a] = 0;
    relu_table(sl[0], of[0]);
    sigmoid_table(sl[1], of[1]);
    repeat (2) @(negedge clk); rst_n = 1;
    for (int b = 0; b < 2; b++)
      for (int s = 0; s < 16; s++) begin
        @(negedge clk); lut_we = 1; lut_bank = b[0]; lut_seg = 4'(s);
        lut_slope = 8'(sl[b][s]); lut_offset = 8'(of[b][s]);
      end
    @(negedge clk); lut_we = 0;
    // network
    for (int l = 0; l < 2; l++)
      for (int n = 0; n < NOUT[l]; n++) begin
        bs[l][n] = prand(1000 * l + n, 20);
        for (int i = 0; i < NIN[l]; i++) wt[l][n][i] = prand(7 + 100000 * l + 100 * n + i, 40);
      end
    for (int i = 0; i < 20; i++) begin xin[i] = prand(555 + i, 64); dmem[i] = 8'(xin[i]); end
    // reference
    for (int n = 0; n < 12; n++) begin
      int acc;
      acc = bs[0][n] * 64;
      for (int i = 0; i < 20; i++) acc += wt[0][n][i] * xin[i];
      y1[n] = afu_ref(sl[1], of[1], acc);
    end
    for (int n = 0; n < 3; n++) begin
      int acc;
      acc = bs[1][n] * 64;
      for (int i = 0; i < 12; i++) acc += wt[1][n][i] * y1[i];
      y2[n] = afu_ref(sl[0], of[0], acc);
    end
    // weights: PE k, word w_base + c*n_out + n holds w[n][c*8+k]
    for (int l = 0; l < 2; l++) begin
      int nch;
      nch = (NIN[l] + N - 1) / N;
      for (int c = 0; c < nch; c++)
        for (int n = 0; n < NOUT[l]; n++)
          for (int k = 0; k < N; k++)
            sram_write(k, WB[l] + c * NOUT[l] + n, (c * N + k < NIN[l]) ? wt[l][n][c * N + k] : 0);
      for (int n = 0; n < NOUT[l]; n++) sram_write(N, BB[l] + n, bs[l][n]);
    end
    // microcode
    ins = '0; ins.src_fifo = 0; ins.dst_dmem = 0; ins.act = 1; ins.n_in = 9'(20); ins.n_out = 9'(12);
    ins.w_base = 10'(WB[0]); ins.b_base = 10'(BB[0]); ins.in_addr = 11'd0;
    write_instr(0, ins);
    ins = '0; ins.last = 1; ins.src_fifo = 1; ins.dst_dmem = 1; ins.act = 0; ins.n_in = 9'(12); ins.n_out = 9'(3);
    ins.w_base = 10'(WB[1]); ins.b_base = 10'(BB[1]); ins.out_addr = 11'(OUTA);
    write_instr(1, ins);
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    wait (done);
    @(negedge clk);
    for (int n = 0; n < 3; n++)
      check(int'($signed(dmem[OUTA + n])) == y2[n], $sformatf("output %0d: %0d exp %0d", n, $signed(dmem[OUTA + n]), y2[n]));
    check(issued == 3 * 12 + 2 * 3, $sformatf("items issued %0d", issued));
    check(accum_pushes == 32'(2 * 12 + 1 * 3), $sformatf("ACCUM pushes %0d", accum_pushes));
    check(stall_arb > 0, "arbiter stalls happened");
    check(stall_acc > 0, "ACCUM waits happened");
    // budget: issue cycles + per chunk (load N, +1 pending, +10 ring) + per layer 30
    budget = 0;
    for (int l = 0; l < 2; l++) begin
      int nch;
      nch = (NIN[l] + N - 1) / N;
      budget += nch * (NOUT[l] + 2 * N + 12) + 30;
    end
    check(cycles <= budget, $sformatf("cycles %0d within %0d", cycles, budget));
    $display("npu: %0d cycles, %0d arbiter stalls, %0d ACCUM waits", cycles, stall_arb, stall_acc);
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
