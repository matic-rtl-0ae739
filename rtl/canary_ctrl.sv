// canary_ctrl: in-situ canary voltage control. A few marginal bit-cells of
// every weight SRAM (NUM_CANARY per SRAM) are used as canaries: they are the
// first cells to fail a read as the SRAM supply drops, so while they still read
// back correctly the cells the network depends on are safe.
//
// On `start` (the controller wakes between inferences) it runs this loop:
//   set the supply to V0 (the safe initial voltage) and let it settle
//   repeat
//     set the supply to v - DV, settle, read every enabled canary
//     if a canary bit differs from its stored value:
//        set the supply to v + DV, settle, rewrite the correct word of every
//        canary (reads at low voltage are destructive), finish
//     else v <= v - DV
// It also stops, without a failure, if v - DV would fall below V_FLOOR_MV; the
// floor is this design's guard, the loop itself is the paper's.
//
// On the test chip this routine is firmware of the on-chip microcontroller; here
// it is a state machine, which the paper names as a possible implementation.
// The canary table (SRAM, address, bit, correct word, enable) is written through
// tab_*. DV, the settle time and the table layout are this design's choices.
//
// Interface: vreg_mv is the code sent to the external SRAM regulator, in mV.
// sram_sel is high while the controller runs; it then owns all SRAM ports
// (sram_ce one-hot, one read or write per cycle, read data one cycle later).
// Timing: each voltage change waits SETTLE cycles; a check takes 2 cycles per
// enabled canary.
module canary_ctrl
  import snnac_pkg::*;
#(
  parameter int unsigned NUM_SRAM   = NUM_PE + 1,
  parameter int unsigned NUM_CANARY = 8,
  parameter int unsigned DV_MV      = 10,
  parameter int unsigned SETTLE     = 16,
  parameter int unsigned V_FLOOR_MV = 300,
  parameter int unsigned SW         = $clog2(NUM_SRAM),
  parameter int unsigned CIW        = $clog2(NUM_CANARY)
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         start,
  input  logic [VDD_W-1:0]             v0_mv,
  output logic                         busy,
  output logic                         done,
  output logic [VDD_W-1:0]             vreg_mv,
  // canary table
  input  logic                         tab_we,
  input  logic [SW-1:0]                tab_sram,
  input  logic [CIW-1:0]               tab_idx,
  input  logic                         tab_en,
  input  logic [SRAM_AW-1:0]           tab_addr,
  input  logic [2:0]                   tab_bit,
  input  logic [W_W-1:0]               tab_word,
  // SRAM access
  output logic                         sram_sel,
  output logic [NUM_SRAM-1:0]          sram_ce,
  output logic                         sram_we,
  output logic [SRAM_AW-1:0]           sram_addr,
  output logic [W_W-1:0]               sram_wdata,
  input  logic [NUM_SRAM-1:0][W_W-1:0] sram_rdata,
  // observation
  output logic [VDD_W-1:0]             v_mv,        // last voltage that passed
  output logic [15:0]                  steps_down,
  output logic [15:0]                  failures_seen
);
  typedef struct packed {
    logic               en;
    logic [SRAM_AW-1:0] addr;
    logic [2:0]         bitpos;
    logic [W_W-1:0]     word;
  } canary_t;

  typedef enum logic [2:0] {C_IDLE, C_SETTLE, C_READ, C_CMP, C_RESTORE, C_DONE} cstate_t;
  typedef enum logic [1:0] {N_CHECK, N_RESTORE, N_FINISH} next_t;
  localparam int unsigned TOTAL = NUM_SRAM * NUM_CANARY;
  localparam int TW = $clog2(TOTAL + 1);

  canary_t       tab [NUM_SRAM][NUM_CANARY];
  cstate_t       state;
  next_t         after_settle;
  logic [15:0]   timer;
  logic [TW-1:0] ci;            // canary being handled
  logic          any_failed;
  logic [SW-1:0] cs, cs_q;
  logic [CIW-1:0] cc;
  canary_t       cur, cur_q;

  assign cs  = SW'(ci / NUM_CANARY);
  assign cc  = CIW'(ci % NUM_CANARY);
  assign cur = tab[cs][cc];
  assign busy = (state != C_IDLE);
  assign sram_sel = busy;

  always_comb begin
    sram_ce = '0; sram_we = 1'b0; sram_addr = cur.addr; sram_wdata = cur.word;
    if (state == C_READ && ci < TW'(TOTAL) && cur.en) sram_ce[cs] = 1'b1;
    if (state == C_RESTORE && ci < TW'(TOTAL) && cur.en) begin
      sram_ce[cs] = 1'b1;
      sram_we     = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < NUM_SRAM; s++)
        for (int c = 0; c < NUM_CANARY; c++) tab[s][c] <= '0;
    end else if (tab_we && !busy) begin
      tab[tab_sram][tab_idx] <= '{en: tab_en, addr: tab_addr, bitpos: tab_bit, word: tab_word};
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= C_IDLE; after_settle <= N_CHECK; timer <= '0; ci <= '0;
      any_failed <= 1'b0; vreg_mv <= '0; v_mv <= '0; done <= 1'b0;
      cs_q <= '0; cur_q <= '0;
      steps_down <= '0; failures_seen <= '0;
    end else begin
      done <= 1'b0;
      case (state)
        C_IDLE: if (start) begin
          // SetSRAMVoltage(v0), then the first step down
          vreg_mv      <= v0_mv;
          v_mv         <= v0_mv;
          timer        <= 16'(SETTLE);
          after_settle <= N_CHECK;
          state        <= C_SETTLE;
        end
        C_SETTLE: begin
          if (timer != 0) timer <= timer - 1'b1;
          else begin
            case (after_settle)
              N_CHECK: begin
                if (32'(v_mv) < 32'(V_FLOOR_MV + DV_MV)) begin
                  state <= C_DONE;
                end else begin
                  // SetSRAMVoltage(v - dv)
                  vreg_mv      <= v_mv - VDD_W'(DV_MV);
                  timer        <= 16'(SETTLE);
                  after_settle <= N_RESTORE;   // next settle ends in a check
                  state        <= C_SETTLE;
                end
              end
              N_RESTORE: begin   // supply now at v - dv: CheckStates(C)
                ci         <= '0;
                any_failed <= 1'b0;
                state      <= C_READ;
              end
              default: begin     // supply now at v + dv: RestoreStates(C)
                ci    <= '0;
                state <= C_RESTORE;
              end
            endcase
          end
        end
        C_READ: begin
          if (ci == TW'(TOTAL)) begin
            if (any_failed) begin
              vreg_mv       <= v_mv + VDD_W'(DV_MV);
              v_mv          <= v_mv + VDD_W'(DV_MV);
              failures_seen <= failures_seen + 1'b1;
              timer         <= 16'(SETTLE);
              after_settle  <= N_FINISH;
              state         <= C_SETTLE;
            end else begin
              v_mv         <= v_mv - VDD_W'(DV_MV);
              steps_down   <= steps_down + 1'b1;
              timer        <= '0;
              after_settle <= N_CHECK;
              state        <= C_SETTLE;
            end
          end else if (!cur.en) begin
            ci <= ci + 1'b1;
          end else begin
            cs_q  <= cs;
            cur_q <= cur;
            state <= C_CMP;
          end
        end
        C_CMP: begin
          if (sram_rdata[cs_q][cur_q.bitpos] != cur_q.word[cur_q.bitpos]) any_failed <= 1'b1;
          ci    <= ci + 1'b1;
          state <= C_READ;
        end
        C_RESTORE: begin
          if (ci == TW'(TOTAL)) state <= C_DONE;
          else ci <= ci + 1'b1;
        end
        C_DONE: begin
          done  <= 1'b1;
          state <= C_IDLE;
        end
        default: state <= C_IDLE;
      endcase
    end
  end
endmodule
