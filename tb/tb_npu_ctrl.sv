// tb_npu_ctrl: the control core alone, with the ring, the FIFOs and the data
// memory modelled in the testbench. One layer of 9 inputs and 1 output is
// run from the data memory (refusing grants at random during the first
// chunk) back to the data memory. Checks: the activations put on the bus for each PE in each chunk
// (memory contents, zero past input 9), the weight and bias addresses and tags
// of every issued item, that chunk 2 never pops a partial sum the ACCUM FIFO
// does not hold yet, that the AFU
// outputs are written to out_addr in order, and that done pulses once.
module tb_npu_ctrl;
  import snnac_pkg::*;
  localparam int N = 8, NIN = 9, NOUT = 1, INA = 200, OUTA = 300, WB = 5, BB = 7;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  logic [3:0] pc;
  instr_t instr;
  logic dm_req, dm_we, dm_gnt;
  logic [10:0] dm_addr;
  logic [7:0] dm_wdata, dm_rdata;
  logic ao_empty, ao_pop;
  logic [7:0] ao_rdata;
  logic [6:0] acc_count;
  logic [N-1:0] ld_en;
  logic signed [7:0] ld_data;
  logic issue_valid, retire, act_bank;
  tag_t issue_tag;
  logic [9:0] issue_waddr, issue_baddr;
  logic [31:0] stall_arb, stall_acc;

  logic [7:0] dmem [2048];
  bit deny;
  int checks = 0, failures = 0, dones = 0, chunk_seen = 0, items = 0, writes = 0;
  int ld_seen [2][N];
  int acc_n = 0;
  logic [7:0] aoq [$];
  logic [10:0] ring_v;
  tag_t ring_t [11];

  npu_ctrl dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always_comb begin
    instr = '0;
    instr.last = 1; instr.src_fifo = 0; instr.dst_dmem = 1; instr.act = 1;
    instr.n_in = 9'(NIN); instr.n_out = 9'(NOUT); instr.w_base = 10'(WB); instr.b_base = 10'(BB);
    instr.in_addr = 11'(INA); instr.out_addr = 11'(OUTA);
  end
  assign dm_gnt    = dm_req && !deny;
  assign ao_empty  = (aoq.size() == 0);
  assign ao_rdata  = ao_empty ? 8'd0 : aoq[0];
  assign acc_count = 7'(acc_n);
  assign retire    = ring_v[10];

  always @(posedge clk) begin
    deny <= (chunk_seen == 0) && (($urandom % 3) == 0);   // refusals in chunk 0 only
    if (dm_gnt && !dm_we) dm_rdata <= dmem[dm_addr];
    if (dm_gnt && dm_we) begin
      check(dm_addr == 11'(OUTA + writes) && dm_wdata == 8'(8'h40 + writes), $sformatf("write-back %0d", writes));
      writes++;
    end
    if (done) dones++;
    // loads: attribute to the chunk whose first item has not been issued yet
    for (int k = 0; k < N; k++) if (ld_en[k] && chunk_seen < 2) ld_seen[chunk_seen][k] = int'(ld_data);
    if (issue_valid) begin
      int c, n;
      if (issue_tag.first) chunk_seen++;
      c = items / NOUT; n = items % NOUT;
      check(issue_waddr == 10'(WB + items) && issue_baddr == 10'(BB + n), $sformatf("addresses of item %0d", items));
      check(issue_tag.first == (n == 0) && issue_tag.bias == (c == 0) && issue_tag.last == (c == 1), $sformatf("tags of item %0d", items));
      if (c == 1) check(acc_n >= 1, "ACCUM holds the sum being popped");
      items++;
    end
    // ring model: 10 cycles, ACCUM for non-last, AFU (+1) for last
    ring_v <= {ring_v[9:0], issue_valid};
    for (int i = 10; i > 0; i--) ring_t[i] <= ring_t[i - 1];
    ring_t[0] <= issue_tag;
    acc_n <= acc_n + ((ring_v[9] && !ring_t[9].last) ? 1 : 0) - ((issue_valid && !issue_tag.bias) ? 1 : 0);
  end
  // the AFU output of a last-chunk item enters the AFU_OUT FIFO (after the edge)
  always @(posedge clk) begin
    automatic bit p = ao_pop && !ao_empty;
    automatic bit q = ring_v[10] && ring_t[10].last;
    #1;
    if (p) void'(aoq.pop_front());
    if (q) aoq.push_back(8'(8'h40 + items_out()));
  end
  int pushed = 0;
  function automatic int items_out();
    return pushed++;
  endfunction

  initial begin
    for (int a = 0; a < 2048; a++) dmem[a] = 8'(a * 3 + 1);
    ring_v = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    wait (!busy);
    repeat (3) @(negedge clk);
    for (int c = 0; c < 2; c++)
      for (int k = 0; k < N; k++) begin
        int idx, e;
        idx = c * N + k;
        e = (idx < NIN) ? int'($signed(dmem[INA + idx])) : 0;
        check(ld_seen[c][k] == e, $sformatf("chunk %0d PE %0d loaded %0d exp %0d", c, k, ld_seen[c][k], e));
      end
    check(items == 2 * NOUT, "items issued");
    check(writes == NOUT, "outputs written");
    check(dones == 1, "done pulsed once");
    check(stall_arb > 0, "arbiter refusals stalled the loads");
    check(act_bank == 1'b1, "AFU bank from the instruction");
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
