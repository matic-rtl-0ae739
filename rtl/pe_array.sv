// pe_array: the 1D systolic ring of NUM_PE processing elements, with the extra
// SRAM of PE0 and the multiplexer that starts every partial sum.
//
// Each issued item is one output neuron of one chunk (NUM_PE inputs) of a
// layer. The item enters PE0's address stage and walks one PE per cycle; every
// PE reads its weight for that neuron and adds weight*activation to the partial
// sum walking one cycle behind. The sum is started by the multiplexer in front
// of the chain: for the first chunk of a layer it takes the neuron's bias from
// PE0's second SRAM (the bias SRAM, SRAM index NUM_PE), for later chunks it pops
// the neuron's running sum from the ACCUM FIFO. Using that SRAM for biases is
// this design's choice; the drawing shows only an SRAM and ACCUM meeting at a
// mux in front of the adders.
//
// Timing: issue in cycle t; bias read in t; acc_pop in t+1 (acc_data must be
// the FIFO head then, show-ahead); out_* valid in t + 2 + NUM_PE, i.e. 10
// cycles for 8 PEs. One item per cycle can be issued.
// ext_* gives direct access to all NUM_PE+1 SRAMs (weight loading and canary
// polling); ext_ce selects the SRAM.
module pe_array
  import snnac_pkg::*;
#(
  parameter int unsigned N = NUM_PE
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [9:0]              vdd_mv,
  input  logic [N-1:0]            ld_en,
  input  logic signed [D_W-1:0]   ld_data,
  input  logic                    issue_valid,
  input  tag_t                    issue_tag,
  input  logic [SRAM_AW-1:0]      issue_waddr,
  input  logic [SRAM_AW-1:0]      issue_baddr,
  output logic                    acc_pop,
  input  logic signed [ACC_W-1:0] acc_data,
  output logic                    out_valid,
  output tag_t                    out_tag,
  output logic signed [ACC_W-1:0] out_psum,
  input  logic                    ext_sel,
  input  logic [N:0]              ext_ce,
  input  logic                    ext_we,
  input  logic [SRAM_AW-1:0]      ext_addr,
  input  logic [W_W-1:0]          ext_wdata,
  output logic [N:0][W_W-1:0]     ext_rdata
);
  logic [N:0]                    a_valid;
  tag_t [N:0]                    a_tag;
  logic [N:0][SRAM_AW-1:0]       a_addr;
  logic [N:0]                    s_valid;
  tag_t [N:0]                    s_tag;
  logic [N:0][ACC_W-1:0]         s_psum;

  // ---- head: bias SRAM and the bias/ACCUM mux --------------------------
  logic                 b_ce, b_we;
  logic [SRAM_AW-1:0]   b_addr;
  logic [W_W-1:0]       b_rdata;
  logic                 h_valid;
  tag_t                 h_tag;

  always_comb begin
    if (ext_sel) begin
      b_ce = ext_ce[N]; b_we = ext_we; b_addr = ext_addr;
    end else begin
      b_ce = issue_valid && issue_tag.bias; b_we = 1'b0; b_addr = issue_baddr;
    end
  end

  weight_sram #(.DEPTH(SRAM_DEPTH), .WIDTH(W_W), .SEED(32'hB1A5_0000)) u_bias_sram (
    .clk, .ce(b_ce), .we(b_we), .addr(b_addr), .wdata(ext_wdata), .rdata(b_rdata), .vdd_mv
  );
  assign ext_rdata[N] = b_rdata;

  assign acc_pop = h_valid && !h_tag.bias;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      h_valid    <= 1'b0;
      h_tag      <= '0;
      s_valid[0] <= 1'b0;
      s_tag[0]   <= '0;
      s_psum[0]  <= '0;
    end else begin
      h_valid    <= issue_valid;
      h_tag      <= issue_tag;
      s_valid[0] <= h_valid;
      s_tag[0]   <= h_tag;
      // bias is Q1.6, partial sums carry FRAC_ACC fraction bits
      s_psum[0]  <= h_tag.bias ? (ACC_W'($signed(b_rdata)) <<< (FRAC_ACC - FRAC_D)) : acc_data;
    end
  end

  assign a_valid[0] = issue_valid;
  assign a_tag[0]   = issue_tag;
  assign a_addr[0]  = issue_waddr;

  // ---- the ring --------------------------------------------------------
  for (genvar k = 0; k < N; k++) begin : g_pe
    pe #(.SEED(32'h5EED_0000 + k)) u_pe (
      .clk, .rst_n, .vdd_mv,
      .ld_en(ld_en[k]), .ld_data,
      .a_valid_i(a_valid[k]), .a_tag_i(a_tag[k]), .a_addr_i(a_addr[k]),
      .a_valid_o(a_valid[k+1]), .a_tag_o(a_tag[k+1]), .a_addr_o(a_addr[k+1]),
      .s_valid_i(s_valid[k]), .s_tag_i(s_tag[k]), .s_psum_i(s_psum[k]),
      .s_valid_o(s_valid[k+1]), .s_tag_o(s_tag[k+1]), .s_psum_o(s_psum[k+1]),
      .ext_sel, .ext_ce(ext_ce[k]), .ext_we, .ext_addr, .ext_wdata,
      .ext_rdata(ext_rdata[k])
    );
  end

  assign out_valid = s_valid[N];
  assign out_tag   = s_tag[N];
  assign out_psum  = s_psum[N];
endmodule
