// gis_scheduler: sequencer of the gradient-interleaved backward pass of one
// layer tile on the configurable systolic array.
//
// OP_TRAIN with batch size B runs four phases back to back:
//   LOAD   Q cycles   shift_en: P new weights enter per cycle (w_req), the
//                     previous (updated) weights leave at the north edge.
//   ISSUE  2*B cycles  sample n occupies two cycles, OS step then WS step
//                     (issue_os = 1, 0); delta and a are requested on the OS step.
//   DRAIN  P+Q-2 cycles  the last wavefront crosses to PE(P-1,Q-1).
//   UPDATE 1 cycle    update_en: every PE applies w -= G * 2^-lr_shift, G = 0.
// OP_SHIFT runs only the LOAD phase (to unload the final weights, or to load
// weights without training). busy is high from the cycle after start through
// the last phase; done pulses for one cycle right after it (busy already low).
// start is taken only when idle; op, batch and lr_shift are captured with it.
// A full OP_TRAIN therefore takes Q + 2B + (P+Q-2) + 1 cycles from start to
// done (plus the start cycle itself).
// Follows the source: Q-cycle loading of P words per cycle, per-cycle mode
// switching, in-place update after the batch. This design's own choices: the
// start/done handshake, the drain length derived from the skew, SGD with a
// power-of-two learning rate.
module gis_scheduler
  import gis_pkg::*;
#(
  parameter int unsigned P = 128,
  parameter int unsigned Q = 128
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  op_e         op,
  input  logic [15:0] batch,       // B, samples in the mini-batch
  input  logic [4:0]  lr_shift_in,
  output logic        busy,
  output logic        done,
  output logic        shift_en,    // also: P weights are consumed this cycle
  output logic        issue_valid,
  output logic        issue_os,    // 1: OS step (delta and a are consumed)
  output logic        update_en,
  output logic [4:0]  lr_shift
);

  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_ISSUE, S_DRAIN, S_UPDATE} state_e;

  localparam int unsigned DRAIN = P + Q - 2;

  state_e      state;
  op_e         op_q;
  logic [15:0] batch_q;
  logic [31:0] cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      op_q     <= OP_TRAIN;
      batch_q  <= '0;
      lr_shift <= '0;
      cnt      <= '0;
      done     <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          op_q     <= op;
          batch_q  <= batch;
          lr_shift <= lr_shift_in;
          cnt      <= '0;
          state    <= S_LOAD;
        end
        S_LOAD: begin
          cnt <= cnt + 1;
          if (cnt == 32'(Q - 1)) begin
            cnt <= '0;
            if (op_q == OP_SHIFT) begin
              state <= S_IDLE;
              done  <= 1'b1;
            end else if (batch_q != 0) begin
              state <= S_ISSUE;
            end else begin
              state <= (DRAIN != 0) ? S_DRAIN : S_UPDATE;
            end
          end
        end
        S_ISSUE: begin
          cnt <= cnt + 1;
          if (cnt == 2 * 32'(batch_q) - 1) begin
            cnt   <= '0;
            state <= (DRAIN != 0) ? S_DRAIN : S_UPDATE;
          end
        end
        S_DRAIN: begin
          cnt <= cnt + 1;
          if (cnt == 32'(DRAIN) - 1) begin
            cnt   <= '0;
            state <= S_UPDATE;
          end
        end
        S_UPDATE: begin
          state <= S_IDLE;
          done  <= 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    busy        = (state != S_IDLE);
    shift_en    = (state == S_LOAD);
    issue_valid = (state == S_ISSUE);
    issue_os    = (state == S_ISSUE) && !cnt[0];
    update_en   = (state == S_UPDATE);
  end

  // Exactly one phase drives the array in any cycle.
  a_one_phase: assert property (@(posedge clk) disable iff (!rst_n)
    $onehot0({shift_en, issue_valid, update_en}));

endmodule
