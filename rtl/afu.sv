// afu: activation function unit. Approximates the activation function
// (sigmoid, ReLU, ...) piecewise-linearly: a lookup table gives a slope and an
// offset for the segment the input falls in, then one multiply and one add
// produce the output, as in the LUT / + / x blocks of the AFU drawing.
//
// Details (this design's choice): the input x is a partial sum with FRAC_ACC
// fraction bits. It is clamped to [-8, 8) and split into SEGS = 16 unit-wide
// segments, seg = floor(x) + 8. y = offset[seg] + slope[seg] * x, with slope and
// offset in Q1.6, and y saturated to the signed 8-bit Q1.6 activation range.
// Two LUT banks hold two functions; `bank` picks one per layer. The LUT is
// written through lut_we/lut_bank/lut_seg/lut_slope/lut_offset and resets to
// zero.
//
// Timing: in_valid/in_x/bank in cycle t -> out_valid/out_y in t+1.
module afu
  import snnac_pkg::*;
#(
  parameter int unsigned SEGS  = 16,
  parameter int unsigned BANKS = 2
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       lut_we,
  input  logic [$clog2(BANKS)-1:0]   lut_bank,
  input  logic [$clog2(SEGS)-1:0]    lut_seg,
  input  logic signed [D_W-1:0]      lut_slope,
  input  logic signed [D_W-1:0]      lut_offset,
  input  logic                       in_valid,
  input  logic [$clog2(BANKS)-1:0]   bank,
  input  logic signed [ACC_W-1:0]    in_x,
  output logic                       out_valid,
  output logic signed [D_W-1:0]      out_y
);
  localparam int SW = $clog2(SEGS);
  localparam int signed HALF = SEGS / 2;
  localparam logic signed [ACC_W-1:0] X_MAX = ACC_W'(HALF <<< FRAC_ACC) - 1;
  localparam logic signed [ACC_W-1:0] X_MIN = -ACC_W'(HALF <<< FRAC_ACC);
  localparam int PW = ACC_W + D_W;

  logic signed [D_W-1:0] slope  [BANKS][SEGS];
  logic signed [D_W-1:0] offset [BANKS][SEGS];

  logic signed [ACC_W-1:0] xc;
  logic [SW-1:0]           seg;
  logic signed [PW-1:0]    prod, y_full;
  logic signed [D_W-1:0]   y_sat;

  always_comb begin
    if (in_x > X_MAX)      xc = X_MAX;
    else if (in_x < X_MIN) xc = X_MIN;
    else                   xc = in_x;
    seg    = SW'((xc >>> FRAC_ACC) + ACC_W'(HALF));
    prod   = PW'(slope[bank][seg]) * PW'(xc);
    y_full = (prod >>> FRAC_ACC) + PW'(offset[bank][seg]);
    if (y_full > PW'(2**(D_W-1) - 1))   y_sat = D_W'(2**(D_W-1) - 1);
    else if (y_full < -PW'(2**(D_W-1))) y_sat = D_W'(-(2**(D_W-1)));
    else                                 y_sat = D_W'(y_full);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int b = 0; b < BANKS; b++)
        for (int s = 0; s < SEGS; s++) begin
          slope[b][s]  <= '0;
          offset[b][s] <= '0;
        end
      out_valid <= 1'b0;
      out_y     <= '0;
    end else begin
      if (lut_we) begin
        slope[lut_bank][lut_seg]  <= lut_slope;
        offset[lut_bank][lut_seg] <= lut_offset;
      end
      out_valid <= in_valid;
      if (in_valid) out_y <= y_sat;
    end
  end
endmodule
