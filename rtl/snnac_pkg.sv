// snnac_pkg: shared widths, fixed-point formats and the microcode instruction
// format of the SNNAC accelerator.
//
// Number formats (this design's choice inside the 8-22 bit operand range the
// accelerator is built for): weights and activations are 8-bit signed Q1.6,
// products are Q3.12 and partial sums are 22-bit signed with 12 fraction bits.
// One microcode instruction describes one fully-connected layer; the format is
// this design's own, the paper says only that the control core runs
// statically compiled microcode.
package snnac_pkg;
  localparam int unsigned NUM_PE    = 8;      // PEs in the systolic ring
  localparam int unsigned W_W       = 8;      // weight width
  localparam int unsigned D_W       = 8;      // activation width
  localparam int unsigned ACC_W     = 22;     // partial-sum width
  localparam int unsigned FRAC_D    = 6;      // fraction bits of weights/activations
  localparam int unsigned FRAC_ACC  = 12;     // fraction bits of partial sums
  localparam int unsigned SRAM_DEPTH = 1024;  // words per SRAM macro (1 KB)
  localparam int unsigned SRAM_AW   = 10;
  localparam int unsigned DMEM_DEPTH = 2048;  // shared data memory, bytes
  localparam int unsigned DMEM_AW   = 11;
  localparam int unsigned IMEM_DEPTH = 16;    // microcode instructions
  localparam int unsigned IMEM_AW   = 4;
  localparam int unsigned VDD_W     = 10;     // supply voltages in mV

  // One layer of work. 64 bits, written by the microcontroller as four
  // 16-bit pieces (piece 0 = bits 15:0).
  typedef struct packed {
    logic                last;      // stop after this layer
    logic                src_fifo;  // inputs from the AFU_OUT FIFO (else DMEM)
    logic                dst_dmem;  // outputs to DMEM (else stay in the AFU_OUT FIFO)
    logic                act;       // AFU LUT bank
    logic [8:0]          n_in;      // layer inputs  (1..511)
    logic [8:0]          n_out;     // layer outputs (1..511)
    logic [SRAM_AW-1:0]  w_base;    // first weight word in every PE SRAM
    logic [SRAM_AW-1:0]  b_base;    // first bias word in the bias SRAM
    logic [DMEM_AW-1:0]  in_addr;   // DMEM address of input 0 (src_fifo = 0)
    logic [DMEM_AW-1:0]  out_addr;  // DMEM address of output 0 (dst_dmem = 1)
  } instr_t;

  // Tag that travels down the systolic chain with every partial sum.
  typedef struct packed {
    logic first;   // first neuron of a chunk: PEs switch to the new activation
    logic bias;    // first chunk: start from the bias SRAM (else from ACCUM)
    logic last;    // last chunk: result goes to the AFU (else to ACCUM)
  } tag_t;
endpackage
