// npu_ctrl: the NPU's control core. It runs the microcode in the IMEM, one
// instruction (one fully-connected layer) after another from address 0, and
// time-multiplexes each layer onto the NUM_PE PEs of the systolic ring.
//
// A layer with n_in inputs and n_out outputs is cut into chunks of NUM_PE
// inputs. For every chunk c:
//   LOAD  - the chunk's inputs are put on the broadcast bus one per cycle and
//           PE k latches input c*NUM_PE+k (from the shared data memory through
//           the arbiter, pipelined, or popped from the AFU_OUT FIFO; inputs past
//           n_in load zero).
//   ISSUE - one item per output neuron n enters the ring, with weight address
//           w_base + c*n_out + n (so PE k must hold w[n][c*NUM_PE+k] there) and
//           bias address b_base + n. The first chunk starts from the bias SRAM
//           and later chunks from the ACCUM FIFO; before a later chunk is issued
//           the control waits until the ACCUM FIFO holds all n_out sums of the
//           previous chunk. The last chunk's sums go to the AFU.
// DRAIN  - wait for every item to leave the ring and the AFU; if dst_dmem, the
//          AFU_OUT FIFO is written to the data memory at out_addr + n.
// The instruction format, the weight layout, the per-chunk load phase and the
// drain between layers are this design's choices; the paper states that wide
// layers are time-multiplexed onto the PEs and partial results accumulated.
//
// Interface: start/busy/done (done pulses when the `last` instruction has
// finished); dm_* is a request/grant port to the data memory (read data the
// cycle after a granted read); stall counters report cycles lost waiting on the
// arbiter and on the ACCUM FIFO.
module npu_ctrl
  import snnac_pkg::*;
#(
  parameter int unsigned N      = NUM_PE,
  parameter int unsigned FIFO_CW = 7
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   start,
  output logic                   busy,
  output logic                   done,
  // microcode
  output logic [IMEM_AW-1:0]     pc,
  input  instr_t                 instr,
  // data memory
  output logic                   dm_req,
  output logic                   dm_we,
  output logic [DMEM_AW-1:0]     dm_addr,
  output logic [D_W-1:0]         dm_wdata,
  input  logic                   dm_gnt,
  input  logic [D_W-1:0]         dm_rdata,
  // AFU_OUT FIFO
  input  logic                   ao_empty,
  input  logic [D_W-1:0]         ao_rdata,
  output logic                   ao_pop,
  // ACCUM FIFO occupancy
  input  logic [FIFO_CW-1:0]     acc_count,
  // PE array
  output logic [N-1:0]           ld_en,
  output logic signed [D_W-1:0]  ld_data,
  output logic                   issue_valid,
  output tag_t                   issue_tag,
  output logic [SRAM_AW-1:0]     issue_waddr,
  output logic [SRAM_AW-1:0]     issue_baddr,
  input  logic                   retire,     // one item left the ring (ACCUM push or AFU output)
  output logic                   act_bank,
  // event counters
  output logic [31:0]            stall_arb,
  output logic [31:0]            stall_acc
);
  typedef enum logic [2:0] {S_IDLE, S_FETCH, S_LOAD, S_ISSUE, S_DRAIN} state_t;
  localparam int KW = $clog2(N + 1);

  state_t              state;
  instr_t              ir;
  logic [8:0]          chunk, n_chunks, n_idx, o_idx;
  logic [KW-1:0]       k;          // next PE to load
  logic                rd_pend;
  logic [KW-1:0]       rd_k;
  logic [SRAM_AW-1:0]  wa;
  logic [15:0]         inflight;
  logic [15:0]         in_idx;
  logic                issue_now, acc_ready;

  assign busy     = (state != S_IDLE);
  assign act_bank = ir.act;
  assign in_idx   = 16'(chunk) * 16'(N) + 16'(k);
  assign acc_ready = (chunk == 9'd0) || (n_idx != 9'd0) || (acc_count >= FIFO_CW'(ir.n_out));
  assign issue_now = (state == S_ISSUE) && acc_ready;

  // ---- combinational outputs ---------------------------------------------
  always_comb begin
    dm_req = 1'b0; dm_we = 1'b0; dm_addr = '0; dm_wdata = '0;
    ao_pop = 1'b0;
    ld_en = '0; ld_data = '0;
    issue_valid = 1'b0; issue_tag = '0;
    issue_waddr = wa; issue_baddr = ir.b_base + SRAM_AW'(n_idx);
    case (state)
      S_LOAD: begin
        if (rd_pend) begin
          ld_en[rd_k[$clog2(N)-1:0]] = 1'b1;
          ld_data     = dm_rdata;
        end
        if (k < KW'(N)) begin
          if (in_idx >= 16'(ir.n_in)) begin
            if (!rd_pend) ld_en[k[$clog2(N)-1:0]] = 1'b1;          // zero padding
          end else if (ir.src_fifo) begin
            if (!ao_empty) begin
              ao_pop   = 1'b1;
              ld_en[k[$clog2(N)-1:0]] = 1'b1;
              ld_data  = ao_rdata;
            end
          end else begin
            dm_req  = 1'b1;
            dm_addr = ir.in_addr + DMEM_AW'(in_idx);
          end
        end
      end
      S_ISSUE: begin
        issue_valid     = acc_ready;
        issue_tag.first = (n_idx == 9'd0);
        issue_tag.bias  = (chunk == 9'd0);
        issue_tag.last  = (chunk == n_chunks - 9'd1);
      end
      S_DRAIN: begin
        if (ir.dst_dmem && o_idx < ir.n_out && !ao_empty) begin
          dm_req   = 1'b1;
          dm_we    = 1'b1;
          dm_addr  = ir.out_addr + DMEM_AW'(o_idx);
          dm_wdata = ao_rdata;
          ao_pop   = dm_gnt;
        end
      end
      default: ;
    endcase
  end

  // ---- sequencing ---------------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; ir <= '0; pc <= '0;
      chunk <= '0; n_chunks <= '0; n_idx <= '0; o_idx <= '0; k <= '0;
      rd_pend <= 1'b0; rd_k <= '0; wa <= '0; inflight <= '0; done <= 1'b0;
      stall_arb <= '0; stall_acc <= '0;
    end else begin
      done <= 1'b0;
      inflight <= inflight + 16'(issue_now) - 16'(retire);
      case (state)
        S_IDLE: if (start) begin pc <= '0; state <= S_FETCH; end
        S_FETCH: begin
          ir       <= instr;
          n_chunks <= 9'((32'(instr.n_in) + N - 1) / N);
          chunk    <= '0;
          k        <= '0;
          n_idx    <= '0;
          o_idx    <= '0;
          wa       <= instr.w_base;
          state    <= S_LOAD;
        end
        S_LOAD: begin
          rd_pend <= 1'b0;
          if (k < KW'(N)) begin
            if (in_idx >= 16'(ir.n_in)) begin
              if (!rd_pend) k <= k + 1'b1;
            end else if (ir.src_fifo) begin
              if (!ao_empty) k <= k + 1'b1;
            end else if (dm_gnt) begin
              rd_pend <= 1'b1;
              rd_k    <= k;
              k       <= k + 1'b1;
            end else begin
              stall_arb <= stall_arb + 1;
            end
          end else if (!rd_pend) begin
            state <= S_ISSUE;
            n_idx <= '0;
          end
        end
        S_ISSUE: begin
          if (!acc_ready) stall_acc <= stall_acc + 1;
          if (issue_now) begin
            wa <= wa + 1'b1;
            if (n_idx == ir.n_out - 9'd1) begin
              n_idx <= '0;
              k     <= '0;
              if (chunk == n_chunks - 9'd1) state <= S_DRAIN;
              else begin
                chunk <= chunk + 1'b1;
                state <= S_LOAD;
              end
            end else begin
              n_idx <= n_idx + 1'b1;
            end
          end
        end
        S_DRAIN: begin
          if (ir.dst_dmem && o_idx < ir.n_out && !ao_empty) begin
            if (dm_gnt) o_idx <= o_idx + 1'b1;
            else        stall_arb <= stall_arb + 1;
          end
          if (inflight == 16'd0 && !issue_now && (!ir.dst_dmem || o_idx == ir.n_out)) begin
            if (ir.last) begin
              state <= S_IDLE;
              done  <= 1'b1;
            end else begin
              pc    <= pc + 1'b1;
              state <= S_FETCH;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_acc_no_issue_short: assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_FETCH) |-> (instr.n_out != 0 && instr.n_in != 0));
endmodule
