// snnac_top: the SNNAC accelerator chip with MATIC's in-situ canary voltage
// control. It contains the NPU (systolic ring of 8 PEs with weight SRAMs, AFU,
// FIFOs, microcode memory and control), the shared data memory and its
// arbiter, the canary controller, and the SRAM port multiplexer of the voltage
// control scheme: the SRAMs are driven by the accelerator control during normal
// operation (path 1) and by the canary controller or the microcontroller during
// canary polling and weight loading (path 2).
//
// The microcontroller (OpenMSP430 on the chip) is not part of this RTL: its
// memory bus is the uc_* port. The external SRAM regulator is not part of it
// either: vreg_mv is the voltage requested from it and sram_vdd_mv the voltage
// actually on the SRAM rail.
//
// Microcontroller address map (16-bit addresses, this design's choice):
//   0x0000-0x07FF  shared data memory, one byte per address (R/W)
//   0x1000-0x103F  microcode: entry = addr[5:2], 16-bit piece = addr[1:0] (W)
//   0x1100-0x111F  AFU LUT: bank = addr[4], segment = addr[3:0];
//                  wdata[15:8] slope, wdata[7:0] offset (W)
//   0x1300         canary staging: wdata[11] enable, [10:8] bit, [7:0] word (W)
//   0x1200-0x127F  canary commit: SRAM = addr[6:3], slot = addr[2:0],
//                  wdata[9:0] address; takes the staging word (W)
//   0x1400         W: bit0 starts the NPU, bit1 starts canary control
//                  R: {canary busy, NPU busy}
//   0x1402         V0, safe initial SRAM voltage in mV (R/W)
//   0x1404..0x1412 R: last good canary voltage, arbiter stalls, (0x1408
//                  reads 0), ACCUM stalls, canary steps down, canary failures,
//                  ACCUM pushes, arbiter conflicts
//   0x8000-0xA3FF  SRAM s = addr[14:10] (8 = bias SRAM), word = addr[9:0] (R/W,
//                  only while the NPU and the canary controller are idle)
// Reads return uc_rdata in the cycle after the request; all accesses complete
// in one cycle (the microcontroller has priority at the arbiter).
module snnac_top
  import snnac_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  // microcontroller bus
  input  logic              uc_req,
  input  logic              uc_we,
  input  logic [15:0]       uc_addr,
  input  logic [15:0]       uc_wdata,
  output logic [15:0]       uc_rdata,
  // SRAM supply
  output logic [VDD_W-1:0]  vreg_mv,
  input  logic [VDD_W-1:0]  sram_vdd_mv,
  // interrupts to the microcontroller
  output logic              npu_done,
  output logic              canary_done
);
  localparam int unsigned NS = NUM_PE + 1;

  // ---- address decode -----------------------------------------------------
  logic sel_dmem, sel_imem, sel_lut, sel_cstage, sel_ccommit, sel_reg, sel_sram;
  assign sel_dmem    = uc_req && (uc_addr < 16'h0800);
  assign sel_imem    = uc_req && (uc_addr[15:8] == 8'h10);
  assign sel_lut     = uc_req && (uc_addr[15:8] == 8'h11);
  assign sel_ccommit = uc_req && (uc_addr[15:8] == 8'h12);
  assign sel_cstage  = uc_req && (uc_addr[15:8] == 8'h13);
  assign sel_reg     = uc_req && (uc_addr[15:8] == 8'h14);
  assign sel_sram    = uc_req && uc_addr[15] && (uc_addr[14:10] < 5'(NS));

  // ---- NPU ----------------------------------------------------------------
  logic                   npu_start, npu_busy;
  logic                   n_req, n_we, n_gnt;
  logic [DMEM_AW-1:0]     n_addr;
  logic [D_W-1:0]         n_wdata, n_rdata;
  logic                   sram_sel;
  logic [NUM_PE:0]        sram_ce;
  logic                   sram_we;
  logic [SRAM_AW-1:0]     sram_addr;
  logic [W_W-1:0]         sram_wdata;
  logic [NUM_PE:0][W_W-1:0] sram_rdata;
  logic [31:0]            stall_arb, stall_acc, accum_pushes, conflicts;

  // ---- canary controller ---------------------------------------------------
  logic                   can_start, can_busy;
  logic [VDD_W-1:0]       v0_mv, v_mv;
  logic [15:0]            steps_down, failures_seen;
  logic [11:0]            can_stage;
  logic                   c_sel, c_we;
  logic [NS-1:0]          c_ce;
  logic [SRAM_AW-1:0]     c_addr;
  logic [W_W-1:0]         c_wdata;

  // ---- control registers ---------------------------------------------------
  logic uc_sram_ok;
  assign uc_sram_ok = sel_sram && !npu_busy && !can_busy;
  assign npu_start  = sel_reg && uc_we && uc_addr[7:0] == 8'h00 && uc_wdata[0] && !can_busy;
  assign can_start  = sel_reg && uc_we && uc_addr[7:0] == 8'h00 && uc_wdata[1] && !npu_busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v0_mv     <= VDD_W'(900);
      can_stage <= '0;
    end else begin
      if (sel_reg && uc_we && uc_addr[7:0] == 8'h02) v0_mv <= uc_wdata[VDD_W-1:0];
      if (sel_cstage && uc_we) can_stage <= uc_wdata[11:0];
    end
  end

  // ---- SRAM port mux: path 2 (canary controller, else microcontroller) -----
  always_comb begin
    sram_sel = c_sel || uc_sram_ok;
    if (c_sel) begin
      sram_ce = c_ce; sram_we = c_we; sram_addr = c_addr; sram_wdata = c_wdata;
    end else begin
      sram_ce    = '0;
      if (uc_sram_ok) sram_ce[uc_addr[13:10]] = 1'b1;
      sram_we    = uc_we;
      sram_addr  = uc_addr[SRAM_AW-1:0];
      sram_wdata = uc_wdata[W_W-1:0];
    end
  end

  npu u_npu (
    .clk, .rst_n, .vdd_mv(sram_vdd_mv), .start(npu_start), .busy(npu_busy), .done(npu_done),
    .dm_req(n_req), .dm_we(n_we), .dm_addr(n_addr), .dm_wdata(n_wdata), .dm_gnt(n_gnt),
    .dm_rdata(n_rdata),
    .imem_we(sel_imem && uc_we), .imem_addr(uc_addr[5:2]), .imem_piece(uc_addr[1:0]),
    .imem_wdata(uc_wdata),
    .lut_we(sel_lut && uc_we), .lut_bank(uc_addr[4]), .lut_seg(uc_addr[3:0]),
    .lut_slope(uc_wdata[15:8]), .lut_offset(uc_wdata[7:0]),
    .sram_sel, .sram_ce, .sram_we, .sram_addr, .sram_wdata, .sram_rdata,
    .stall_arb, .stall_acc, .accum_pushes
  );

  canary_ctrl #(.NUM_SRAM(NS)) u_canary (
    .clk, .rst_n, .start(can_start), .v0_mv, .busy(can_busy), .done(canary_done), .vreg_mv,
    .tab_we(sel_ccommit && uc_we), .tab_sram(uc_addr[6:3]), .tab_idx(uc_addr[2:0]),
    .tab_en(can_stage[11]), .tab_addr(uc_wdata[SRAM_AW-1:0]), .tab_bit(can_stage[10:8]),
    .tab_word(can_stage[7:0]),
    .sram_sel(c_sel), .sram_ce(c_ce), .sram_we(c_we), .sram_addr(c_addr), .sram_wdata(c_wdata),
    .sram_rdata,
    .v_mv, .steps_down, .failures_seen
  );

  // ---- shared data memory ----------------------------------------------------
  logic               u_gnt, m_en, m_we;
  logic [DMEM_AW-1:0] m_addr;
  logic [D_W-1:0]     m_wdata, m_rdata, u_rdata;

  mem_arbiter #(.AW(DMEM_AW), .DW(D_W)) u_arb (
    .clk, .rst_n,
    .u_req(sel_dmem), .u_we(uc_we), .u_addr(uc_addr[DMEM_AW-1:0]), .u_wdata(uc_wdata[D_W-1:0]),
    .u_gnt, .u_rdata,
    .n_req, .n_we, .n_addr, .n_wdata, .n_gnt, .n_rdata,
    .m_en, .m_we, .m_addr, .m_wdata, .m_rdata, .conflicts
  );

  shared_dmem #(.DEPTH(DMEM_DEPTH), .WIDTH(D_W)) u_dmem (
    .clk, .en(m_en), .we(m_we), .addr(m_addr), .wdata(m_wdata), .rdata(m_rdata)
  );

  // ---- microcontroller read data --------------------------------------------
  typedef enum logic [1:0] {R_NONE, R_DMEM, R_SRAM, R_REG} rsrc_t;
  rsrc_t       rsrc;
  logic [3:0]  rsram;
  logic [15:0] rreg;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rsrc <= R_NONE; rsram <= '0; rreg <= '0;
    end else begin
      rsrc <= R_NONE;
      if (uc_req && !uc_we) begin
        if (sel_dmem)        rsrc <= R_DMEM;
        else if (uc_sram_ok) begin rsrc <= R_SRAM; rsram <= uc_addr[13:10]; end
        else if (sel_reg) begin
          rsrc <= R_REG;
          case (uc_addr[7:0])
            8'h00: rreg <= {14'd0, can_busy, npu_busy};
            8'h02: rreg <= 16'(v0_mv);
            8'h04: rreg <= 16'(v_mv);
            8'h06: rreg <= stall_arb[15:0];
            8'h0A: rreg <= stall_acc[15:0];
            8'h0C: rreg <= steps_down;
            8'h0E: rreg <= failures_seen;
            8'h10: rreg <= accum_pushes[15:0];
            8'h12: rreg <= conflicts[15:0];
            default: rreg <= '0;
          endcase
        end
      end
    end
  end

  always_comb begin
    case (rsrc)
      R_DMEM:  uc_rdata = {8'd0, u_rdata};
      R_SRAM:  uc_rdata = {8'd0, sram_rdata[rsram]};
      R_REG:   uc_rdata = rreg;
      default: uc_rdata = '0;
    endcase
  end
endmodule
