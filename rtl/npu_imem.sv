// npu_imem: microcode memory of the NPU control core. Each entry is one
// 64-bit instr_t (one layer). The microcontroller writes it 16 bits at a time
// (wr_piece 0 = bits 15:0); the control core reads a whole entry
// combinationally. Depth 16 and the piecewise write are this design's choice.
module npu_imem
  import snnac_pkg::*;
#(
  parameter int unsigned DEPTH = IMEM_DEPTH
) (
  input  logic                     clk,
  input  logic                     wr_en,
  input  logic [$clog2(DEPTH)-1:0] wr_addr,
  input  logic [1:0]               wr_piece,
  input  logic [15:0]              wr_data,
  input  logic [$clog2(DEPTH)-1:0] rd_addr,
  output instr_t                   rd_instr
);
  logic [3:0][15:0] mem [DEPTH];

  initial for (int i = 0; i < DEPTH; i++) mem[i] = '0;

  always_ff @(posedge clk)
    if (wr_en) mem[wr_addr][wr_piece] <= wr_data;

  assign rd_instr = instr_t'(mem[rd_addr]);
endmodule
