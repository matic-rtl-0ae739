// npu: the Neural Processing Unit. It holds the systolic ring of NUM_PE PEs
// with their weight SRAMs (pe_array), the activation function unit (afu), the
// AFU_OUT and ACCUM FIFOs, the microcode memory (npu_imem) and the control core
// (npu_ctrl), wired as in the accelerator's block drawing:
//
//   bus (DMEM_OUT or AFU_OUT) --> PE activations
//   bias SRAM / ACCUM --> PE0 ... PE7 --> last chunk:  AFU --> AFU_OUT FIFO
//                                         other chunks: ACCUM FIFO
//   AFU_OUT FIFO --> next layer's inputs, or written back to the data memory
//
// Interface: start/busy/done run the microcode from IMEM address 0. dm_* is the
// NPU side of the shared data memory arbiter. imem_*, lut_* and sram_* are the
// microcontroller's configuration paths; sram_sel hands all SRAM ports to the
// sram_* path (weight loading, canary polling) and must only be raised while
// the NPU is idle. vdd_mv is the SRAM rail. The stall counters and item
// counters are for observation only.
module npu
  import snnac_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 64
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [9:0]             vdd_mv,
  input  logic                   start,
  output logic                   busy,
  output logic                   done,
  // shared data memory (through the arbiter)
  output logic                   dm_req,
  output logic                   dm_we,
  output logic [DMEM_AW-1:0]     dm_addr,
  output logic [D_W-1:0]         dm_wdata,
  input  logic                   dm_gnt,
  input  logic [D_W-1:0]         dm_rdata,
  // configuration
  input  logic                   imem_we,
  input  logic [IMEM_AW-1:0]     imem_addr,
  input  logic [1:0]             imem_piece,
  input  logic [15:0]            imem_wdata,
  input  logic                   lut_we,
  input  logic                   lut_bank,
  input  logic [3:0]             lut_seg,
  input  logic signed [D_W-1:0]  lut_slope,
  input  logic signed [D_W-1:0]  lut_offset,
  // direct SRAM port
  input  logic                   sram_sel,
  input  logic [NUM_PE:0]        sram_ce,
  input  logic                   sram_we,
  input  logic [SRAM_AW-1:0]     sram_addr,
  input  logic [W_W-1:0]         sram_wdata,
  output logic [NUM_PE:0][W_W-1:0] sram_rdata,
  // observation
  output logic [31:0]            stall_arb,
  output logic [31:0]            stall_acc,
  output logic [31:0]            accum_pushes
);
  localparam int unsigned CW = $clog2(FIFO_DEPTH + 1);

  logic [IMEM_AW-1:0]      pc;
  instr_t                  instr;
  logic [NUM_PE-1:0]       ld_en;
  logic signed [D_W-1:0]   ld_data;
  logic                    issue_valid;
  tag_t                    issue_tag, out_tag;
  logic [SRAM_AW-1:0]      issue_waddr, issue_baddr;
  logic                    acc_pop, out_valid;
  logic signed [ACC_W-1:0] acc_data, out_psum;
  logic                    acc_empty, acc_full, acc_push;
  logic [CW-1:0]           acc_count;
  logic                    ao_push, ao_pop, ao_empty, ao_full;
  logic [D_W-1:0]          ao_rdata;
  logic [CW-1:0]           ao_count;
  logic                    afu_valid, act_bank, retire;
  logic signed [D_W-1:0]   afu_y;

  npu_imem u_imem (
    .clk, .wr_en(imem_we), .wr_addr(imem_addr), .wr_piece(imem_piece), .wr_data(imem_wdata),
    .rd_addr(pc), .rd_instr(instr)
  );

  npu_ctrl #(.N(NUM_PE), .FIFO_CW(CW)) u_ctrl (
    .clk, .rst_n, .start, .busy, .done, .pc, .instr,
    .dm_req, .dm_we, .dm_addr, .dm_wdata, .dm_gnt, .dm_rdata,
    .ao_empty, .ao_rdata, .ao_pop, .acc_count,
    .ld_en, .ld_data, .issue_valid, .issue_tag, .issue_waddr, .issue_baddr,
    .retire, .act_bank, .stall_arb, .stall_acc
  );

  pe_array u_array (
    .clk, .rst_n, .vdd_mv, .ld_en, .ld_data,
    .issue_valid, .issue_tag, .issue_waddr, .issue_baddr,
    .acc_pop, .acc_data, .out_valid, .out_tag, .out_psum,
    .ext_sel(sram_sel), .ext_ce(sram_ce), .ext_we(sram_we), .ext_addr(sram_addr),
    .ext_wdata(sram_wdata), .ext_rdata(sram_rdata)
  );

  // Route the ring's output: last chunk to the AFU, others to ACCUM.
  assign acc_push = out_valid && !out_tag.last;

  sync_fifo #(.DEPTH(FIFO_DEPTH), .WIDTH(ACC_W)) u_accum (
    .clk, .rst_n, .push(acc_push), .wdata(out_psum), .pop(acc_pop), .rdata(acc_data),
    .empty(acc_empty), .full(acc_full), .count(acc_count)
  );

  afu u_afu (
    .clk, .rst_n, .lut_we, .lut_bank, .lut_seg, .lut_slope, .lut_offset,
    .in_valid(out_valid && out_tag.last), .bank(act_bank), .in_x(out_psum),
    .out_valid(afu_valid), .out_y(afu_y)
  );

  assign ao_push = afu_valid;
  assign retire  = acc_push || afu_valid;

  sync_fifo #(.DEPTH(FIFO_DEPTH), .WIDTH(D_W)) u_afu_out (
    .clk, .rst_n, .push(ao_push), .wdata(afu_y), .pop(ao_pop), .rdata(ao_rdata),
    .empty(ao_empty), .full(ao_full), .count(ao_count)
  );

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) accum_pushes <= '0;
    else if (acc_push) accum_pushes <= accum_pushes + 1;

  a_sram_sel_idle: assert property (@(posedge clk) disable iff (!rst_n) sram_sel |-> !busy);
  a_no_acc_pop_empty: assert property (@(posedge clk) disable iff (!rst_n) acc_pop |-> !acc_empty);
endmodule
