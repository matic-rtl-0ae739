// weight_sram: behavioural model of one voltage-scalable 6T weight SRAM macro
// (1 KB, 1024 x 8 bit), including the read-disturb failure that the voltage
// control relies on. This is a behavioural model of a compiled SRAM macro and of
// its analog behaviour, not logic to be synthesized.
//
// Behaviour: a synchronous single-port memory. A read (ce=1, we=0) returns the
// word one cycle later. Every bit-cell has a fixed Vmin,read and a preferred
// state, both derived from a hash of (SEED, address, bit). When a cell is read
// while the supply vdd_mv is below its Vmin,read, the cell flips to its
// preferred state and stays there: later reads return the flipped value even at
// a higher supply, until the word is written again. Writes always succeed.
// Vmin,read is spread uniformly between VMIN_LO_MV and VMIN_HI_MV, after the
// measured 0.53 V first failure and about 0.4 V where all reads fail; the
// uniform spread and the hash are this model's own choices.
//
// Interface: clk, ce, we, addr, wdata, rdata (registered), vdd_mv (the SRAM rail
// in millivolts). Timing: rdata valid the cycle after a read; write-through is
// not modelled (rdata keeps its value during writes).
module weight_sram #(
  parameter int unsigned DEPTH      = 1024,
  parameter int unsigned WIDTH      = 8,
  parameter int unsigned AW         = $clog2(DEPTH),
  parameter int unsigned VMIN_LO_MV = 400,
  parameter int unsigned VMIN_HI_MV = 530,
  parameter logic [31:0] SEED       = 32'h1
) (
  input  logic             clk,
  input  logic             ce,
  input  logic             we,
  input  logic [AW-1:0]    addr,
  input  logic [WIDTH-1:0] wdata,
  output logic [WIDTH-1:0] rdata,
  input  logic [9:0]       vdd_mv
);
  logic [WIDTH-1:0] mem [DEPTH];

  // 32-bit integer hash (xorshift-multiply) of seed, address and bit index.
  function automatic logic [31:0] cell_hash(input logic [AW-1:0] a, input int unsigned b);
    logic [31:0] h;
    h = SEED ^ (32'(a) * 32'h9E37_79B1) ^ (32'(b) * 32'h85EB_CA6B);
    h = h ^ (h >> 16);
    h = h * 32'h7FEB_352D;
    h = h ^ (h >> 15);
    h = h * 32'h846C_A68B;
    h = h ^ (h >> 16);
    return h;
  endfunction

  function automatic int unsigned cell_vmin(input logic [AW-1:0] a, input int unsigned b);
    return VMIN_LO_MV + (cell_hash(a, b) % (VMIN_HI_MV - VMIN_LO_MV + 1));
  endfunction

  function automatic logic cell_pref(input logic [AW-1:0] a, input int unsigned b);
    logic [31:0] h;
    h = cell_hash(a, b);
    return h[31];
  endfunction

  // Word as it reads (and is left) at the given supply.
  function automatic logic [WIDTH-1:0] disturbed(input logic [AW-1:0] a,
                                                 input logic [WIDTH-1:0] w,
                                                 input logic [9:0] v);
    logic [WIDTH-1:0] r;
    r = w;
    for (int unsigned b = 0; b < WIDTH; b++)
      if (int'(v) < int'(cell_vmin(a, b))) r[b] = cell_pref(a, b);
    return r;
  endfunction

  initial for (int i = 0; i < DEPTH; i++) mem[i] = '0;

  always_ff @(posedge clk) begin
    if (ce) begin
      if (we) begin
        mem[addr] <= wdata;
      end else begin
        mem[addr] <= disturbed(addr, mem[addr], vdd_mv);
        rdata     <= disturbed(addr, mem[addr], vdd_mv);
      end
    end
  end
endmodule
