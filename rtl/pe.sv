// pe: one processing element of the systolic ring: a weight SRAM and one
// multiply-accumulate stage.
//
// Structure (after the PE systolic array drawing): the SRAM output and the
// activation held in the PE are multiplied, the product is registered, and the
// registered product is added to the partial sum arriving from the previous PE;
// the sum is registered and passed on. Two pipelines run side by side: the
// address pipeline (a_*) is one cycle ahead of the sum pipeline (s_*), so that
// the SRAM read started for an item lines up with that item's partial sum.
//
// Activations are double-buffered (this design's choice): during a load phase
// the control pulses ld_en and the PE captures ld_data into a shadow register;
// when an item tagged `first` (first neuron of a new chunk) passes the address
// stage, the shadow is copied into the working register. The next chunk can
// therefore be loaded while the last items of the current chunk are still in
// the ring.
//
// Timing: item at a_* in cycle t -> SRAM read in t -> product registered at the
// end of t+1 -> partial sum must be at s_* in t+2 -> s_psum_o valid in t+3.
// a_*_o is a_*_i delayed by one cycle. The ext_* port (path (2) of the SRAM
// port mux: weight loading and canary polling) overrides the SRAM port when
// ext_sel is high; ext_rdata is the SRAM output.
module pe
  import snnac_pkg::*;
#(
  parameter logic [31:0] SEED = 32'h1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [9:0]             vdd_mv,
  // activation load
  input  logic                   ld_en,
  input  logic signed [D_W-1:0]  ld_data,
  // address pipeline
  input  logic                   a_valid_i,
  input  tag_t                   a_tag_i,
  input  logic [SRAM_AW-1:0]     a_addr_i,
  output logic                   a_valid_o,
  output tag_t                   a_tag_o,
  output logic [SRAM_AW-1:0]     a_addr_o,
  // sum pipeline
  input  logic                   s_valid_i,
  input  tag_t                   s_tag_i,
  input  logic signed [ACC_W-1:0] s_psum_i,
  output logic                   s_valid_o,
  output tag_t                   s_tag_o,
  output logic signed [ACC_W-1:0] s_psum_o,
  // direct SRAM access
  input  logic                   ext_sel,
  input  logic                   ext_ce,
  input  logic                   ext_we,
  input  logic [SRAM_AW-1:0]     ext_addr,
  input  logic [W_W-1:0]         ext_wdata,
  output logic [W_W-1:0]         ext_rdata
);
  logic signed [D_W-1:0]   x_shadow, x_cur;
  logic                    sram_ce, sram_we;
  logic [SRAM_AW-1:0]      sram_addr;
  logic [W_W-1:0]          sram_rdata;
  logic signed [2*W_W-1:0] prod_q;

  always_comb begin
    if (ext_sel) begin
      sram_ce = ext_ce; sram_we = ext_we; sram_addr = ext_addr;
    end else begin
      sram_ce = a_valid_i; sram_we = 1'b0; sram_addr = a_addr_i;
    end
  end

  weight_sram #(.DEPTH(SRAM_DEPTH), .WIDTH(W_W), .SEED(SEED)) u_sram (
    .clk, .ce(sram_ce), .we(sram_we), .addr(sram_addr), .wdata(ext_wdata),
    .rdata(sram_rdata), .vdd_mv
  );
  assign ext_rdata = sram_rdata;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x_shadow  <= '0;
      x_cur     <= '0;
      a_valid_o <= 1'b0;
      a_tag_o   <= '0;
      a_addr_o  <= '0;
      prod_q    <= '0;
      s_valid_o <= 1'b0;
      s_tag_o   <= '0;
      s_psum_o  <= '0;
    end else begin
      if (ld_en) x_shadow <= ld_data;
      if (a_valid_i && a_tag_i.first) x_cur <= x_shadow;
      a_valid_o <= a_valid_i;
      a_tag_o   <= a_tag_i;
      a_addr_o  <= a_addr_i;
      prod_q    <= $signed(sram_rdata) * x_cur;
      s_valid_o <= s_valid_i;
      s_tag_o   <= s_tag_i;
      s_psum_o  <= s_psum_i + ACC_W'(prod_q);
    end
  end
endmodule
