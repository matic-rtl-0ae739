// shared_dmem: the data memory shared by the microcontroller and the NPU, which
// holds the NPU's input and output buffers memory-mapped in the
// microcontroller's data space. Single port, DEPTH x 8 bit, synchronous: a read
// (en=1, we=0) returns data in the next cycle; a write stores at the clock
// edge. Size and port arrangement are this design's choice.
module shared_dmem #(
  parameter int unsigned DEPTH = 2048,
  parameter int unsigned WIDTH = 8,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             en,
  input  logic             we,
  input  logic [AW-1:0]    addr,
  input  logic [WIDTH-1:0] wdata,
  output logic [WIDTH-1:0] rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  initial for (int i = 0; i < DEPTH; i++) mem[i] = '0;

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) mem[addr] <= wdata;
      else    rdata     <= mem[addr];
    end
  end
endmodule
