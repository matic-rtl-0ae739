// tb_sync_fifo: random push/pop traffic against a queue model; checks data
// order, empty/full and count every cycle, and that a full FIFO holds exactly
// DEPTH entries.
module tb_sync_fifo;
  localparam int DEPTH = 8;
  logic clk = 0, rst_n = 0, push = 0, pop = 0;
  logic [21:0] wdata = 0, rdata;
  logic empty, full;
  logic [3:0] count;
  int checks = 0, failures = 0;
  logic [21:0] q [$];

  sync_fifo #(.DEPTH(DEPTH), .WIDTH(22)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      checks++;
      if (count != 4'(q.size()) || empty != (q.size() == 0) || full != (q.size() == DEPTH)) begin
        failures++; $display("FAIL status at %0d: count %0d model %0d", i, count, q.size());
      end
      if (q.size() != 0) begin
        checks++;
        if (rdata != q[0]) begin failures++; $display("FAIL data %h vs %h", rdata, q[0]); end
      end
      // bias toward filling in the first half, emptying in the second
      push = !full  && ($urandom % 100 < (i < 1000 ? 70 : 30));
      pop  = !empty && ($urandom % 100 < (i < 1000 ? 30 : 70));
      wdata = 22'($urandom);
      @(posedge clk);
      #1;
      if (pop) void'(q.pop_front());
      if (push) q.push_back(wdata);
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
