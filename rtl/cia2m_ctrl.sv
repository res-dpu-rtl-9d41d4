// cia2m_ctrl: cycle-controlled iterative approximate-accurate multiplication
// (CIA2M) sequencer of the macro.
//
// A MAC multiplies the activations, fed one bit per step most significant first,
// by weights stored as w_nib 4-bit nibbles in cell rows slot .. slot+w_nib-1 of
// every DPU. start (accepted in IDLE while pim_en is high) clears the
// accumulators and latches the command. The first input bit is the leading one
// reported by the CIM driver (lead-1). Each RUN cycle is one step: input bit
// bit_idx times weight nibble nib_idx, accumulated with shift = bit_idx +
// 4*nib_idx. After the last nibble of a bit the next lower bit follows. The run
// ends after all input bits (MODE_EXACT), four (MODE_ACCURATE) or three
// (MODE_APPROX) bits, or bit 0, whichever is first; the dropped low input bits
// are the approximation. done pulses for one cycle after the last accumulate,
// when the accumulators hold the result; cycles then gives the RUN cycle count.
// Cycle limits 3/4 and MSB-first order are the paper's; the per-nibble stepping
// and the handshake are this design's choice.
module cia2m_ctrl
  import resdpu_pkg::*;
#(
  parameter int unsigned PREC = 16,
  parameter int unsigned CELLS    = 8,
  localparam int unsigned BW = $clog2(PREC),
  localparam int unsigned LW = $clog2(PREC + 1),
  localparam int unsigned CW = $clog2(CELLS)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          pim_en,
  input  logic          start,
  input  cia2m_mode_e   mode,
  input  logic [2:0]    w_nib,     // 1..4 nibbles (4..16-bit weights)
  input  logic [CW-1:0] slot,      // first cell row of the weight
  input  logic [LW-1:0] lead,
  output logic          busy,
  output logic          step_en,
  output logic [BW-1:0] bit_idx,
  output logic [1:0]    nib_idx,
  output logic [CW-1:0] row_sel,
  output logic [4:0]    shift,
  output logic          acc_clr,
  output logic          acc_en,
  output logic          done,
  output logic [7:0]    cycles
);
  typedef enum logic { S_IDLE, S_RUN } state_e;
  state_e        state;
  logic [2:0]    nib_cnt;
  logic [CW-1:0] slot_q;
  logic [LW-1:0] steps_left, steps_total;
  logic          last_nib, last_step, accept;

  assign accept = (state == S_IDLE) && start && pim_en;

  always_comb begin
    case (mode)
      MODE_ACCURATE: steps_total = (lead > LW'(ACCURATE_STEPS)) ? LW'(ACCURATE_STEPS) : lead;
      MODE_APPROX:   steps_total = (lead > LW'(APPROX_STEPS))   ? LW'(APPROX_STEPS)   : lead;
      default:       steps_total = lead;
    endcase
  end

  assign last_nib  = (nib_idx == 2'(nib_cnt - 3'd1));
  assign last_step = (steps_left == LW'(1));

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      state      <= S_IDLE;
      nib_cnt    <= 3'd1;
      slot_q     <= '0;
      bit_idx    <= '0;
      nib_idx    <= '0;
      steps_left <= '0;
      done       <= 1'b0;
      cycles     <= '0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (accept) begin
          nib_cnt <= w_nib;
          slot_q  <= slot;
          nib_idx <= '0;
          cycles  <= '0;
          if (lead == '0) begin
            done <= 1'b1;                    // all activations zero: result 0
          end else begin
            bit_idx    <= BW'(lead - LW'(1));
            steps_left <= steps_total;
            state      <= S_RUN;
          end
        end
        S_RUN: begin
          cycles <= cycles + 8'd1;
          if (!last_nib) begin
            nib_idx <= nib_idx + 2'd1;
          end else begin
            nib_idx <= '0;
            if (last_step) begin
              state <= S_IDLE;
              done  <= 1'b1;
            end else begin
              bit_idx    <= bit_idx - BW'(1);
              steps_left <= steps_left - LW'(1);
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end

  assign busy    = (state == S_RUN);
  assign step_en = busy;
  assign acc_en  = busy;
  assign acc_clr = accept;
  assign row_sel = slot_q + CW'(nib_idx);
  assign shift   = 5'(bit_idx) + {1'b0, nib_idx, 2'b00};

  a_cmd_legal: assert property (@(posedge clk) disable iff (!rst_n)
      accept |-> (w_nib >= 3'd1 && w_nib <= 3'd4 && (int'(slot) + int'(w_nib)) <= CELLS))
    else $error("cia2m_ctrl: weight nibbles do not fit the DPU rows");
  a_no_start_busy: assert property (@(posedge clk) disable iff (!rst_n) busy |-> !start)
    else $error("cia2m_ctrl: start while busy");
endmodule
