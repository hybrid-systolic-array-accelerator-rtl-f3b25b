// hsa_ctrl: the sequencer that runs one array operation.
// A start_i pulse with mode, k_len (number of reduction steps K), SRAM base
// addresses and drain direction runs:
//   CLEAR  1 cycle: zero PE accumulators and MVM combiners
//   ISSUE  K cycles: one SRAM read per step (activation, weight, Sw)
//            MMM: act word k (16 batch rows), weight word k (16 INT8)
//            MVM: act word k/16 lane k%16, weight word k/2 half k%2, Sw k
//   WAIT   pipeline fill of the skewed array: 31 (MMM) / 19 (MVM) cycles
//   DRAIN  MMM: 16 shift cycles, out_valid_o each cycle; out_idx_o = the
//            column (H) or row (V) of the tile leaving the array, 15 first
//          MVM: 4 vertical shift cycles (no output)
//   EMIT   MVM only: 4 cycles, out_idx_o = PC index whose 16 results are out
// then done_o pulses. A reduction longer than the SRAMs hold is split into
// several operations: keep_i skips the clear, so the output-stationary PEs
// keep accumulating, and defer_drain_i ends an operation after WAIT without
// draining (K + 33 cycles for MMM, K + 21 for MVM). An MMM tile of K steps thus takes K + 49 cycles and an
// MVM pass K + 29 cycles (64 outputs). Read-side signals (valid, lane) are
// delayed one cycle to line up with the SRAM data. Sequencing and timing are
// this design's own; the paper only names the control block.
module hsa_ctrl
  import hsa_pkg::*;
#(
  parameter int unsigned AAW = 13,   // activation SRAM address bits
  parameter int unsigned WAW = 10,   // weight SRAM address bits
  parameter int unsigned SAW = 11,   // Sw buffer address bits
  parameter int unsigned KW  = 13    // k_len width
)(
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start_i,
  input  mode_e           mode_i,
  input  drain_e          drain_dir_i,
  input  logic [KW-1:0]   k_len_i,
  input  logic [AAW-1:0]  act_base_i,
  input  logic [WAW-1:0]  wgt_base_i,
  input  logic [SAW-1:0]  sw_base_i,
  input  logic            keep_i,        // accumulate onto the PEs' contents (no clear)
  input  logic            defer_drain_i, // end after the pipeline wait, no drain
  output logic            busy_o,
  output logic            done_o,
  output mode_e           mode_o,
  output drain_e          drain_dir_o,
  // SRAM reads
  output logic            rd_en_o,
  output logic [AAW-1:0]  act_addr_o,
  output logic [WAW-1:0]  wgt_addr_o,
  output logic            wgt_half_o,
  output logic [SAW-1:0]  sw_addr_o,
  // aligned with read data
  output logic            valid_o,
  output logic [3:0]      bc_lane_o,
  // array control
  output logic            clear_o,
  output logic            shift_o,
  output logic            mvm_clr_o,
  output logic            out_valid_o,
  output logic [3:0]      out_idx_o
);
  typedef enum logic [2:0] {IDLE, CLEAR, ISSUE, WAIT, DRAIN, EMIT} st_e;
  st_e st_q;
  logic [KW-1:0] k_q, klen_q;
  logic [5:0]    cnt_q;
  logic [AAW-1:0] abase_q; logic [WAW-1:0] wbase_q; logic [SAW-1:0] sbase_q;
  mode_e mode_q; drain_e dir_q;
  logic keep_q, defer_q;
  logic [3:0] lane_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q <= IDLE; k_q <= '0; klen_q <= '0; cnt_q <= '0; abase_q <= '0; wbase_q <= '0;
      sbase_q <= '0; keep_q <= 1'b0; defer_q <= 1'b0; mode_q <= MODE_MMM; dir_q <= DRAIN_H; valid_o <= 1'b0; lane_q <= '0;
      done_o <= 1'b0;
    end else begin
      done_o  <= 1'b0;
      valid_o <= (st_q == ISSUE);
      lane_q  <= k_q[3:0];
      unique case (st_q)
        IDLE: if (start_i && k_len_i != '0) begin
          mode_q <= mode_i; dir_q <= (mode_i == MODE_MVM) ? DRAIN_V : drain_dir_i;
          klen_q <= k_len_i; abase_q <= act_base_i; wbase_q <= wgt_base_i;
          sbase_q <= sw_base_i; k_q <= '0; st_q <= CLEAR;
          keep_q <= keep_i; defer_q <= defer_drain_i;
        end
        CLEAR: st_q <= ISSUE;
        ISSUE: begin
          if (k_q == klen_q - 1'b1) begin
            st_q  <= WAIT;
            cnt_q <= (mode_q == MODE_MMM) ? 6'd30 : 6'd18;
          end
          k_q <= k_q + 1'b1;
        end
        WAIT: if (cnt_q == '0) begin
          if (defer_q) begin st_q <= IDLE; done_o <= 1'b1; end
          else begin st_q <= DRAIN; cnt_q <= (mode_q == MODE_MMM) ? 6'd15 : 6'd3; end
        end else cnt_q <= cnt_q - 1'b1;
        DRAIN: if (cnt_q == '0) begin
          if (mode_q == MODE_MVM) begin st_q <= EMIT; cnt_q <= 6'd0; end
          else begin st_q <= IDLE; done_o <= 1'b1; end
        end else cnt_q <= cnt_q - 1'b1;
        EMIT: if (cnt_q == 6'd3) begin st_q <= IDLE; done_o <= 1'b1; end
              else cnt_q <= cnt_q + 1'b1;
        default: st_q <= IDLE;
      endcase
    end
  end

  assign busy_o      = (st_q != IDLE);
  assign mode_o      = mode_q;
  assign drain_dir_o = dir_q;
  assign rd_en_o     = (st_q == ISSUE);
  assign act_addr_o  = (mode_q == MODE_MMM) ? abase_q + AAW'(k_q) : abase_q + AAW'(k_q >> 4);
  assign wgt_addr_o  = (mode_q == MODE_MMM) ? wbase_q + WAW'(k_q) : wbase_q + WAW'(k_q >> 1);
  assign wgt_half_o  = k_q[0];
  assign sw_addr_o   = sbase_q + SAW'(k_q);
  assign bc_lane_o   = lane_q;
  assign clear_o     = (st_q == CLEAR) && !keep_q;
  assign mvm_clr_o   = (st_q == CLEAR) && !keep_q;
  assign shift_o     = (st_q == DRAIN);
  assign out_valid_o = (st_q == DRAIN && mode_q == MODE_MMM) || (st_q == EMIT);
  assign out_idx_o   = cnt_q[3:0];
endmodule
