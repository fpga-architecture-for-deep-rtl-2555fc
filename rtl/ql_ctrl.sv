// Controller of one Q-value update (the "control signals" of the accelerators).
//
// It walks through the Q-learning state flow:
//   IDLE    : waits for start; latch_cur tells the datapath to capture s_t.
//   FF_CUR  : for every action a = 0..A-1 runs FF_STAGES cycles of feed-forward;
//             stage counts 0..FF_STAGES-1 and aidx holds a.
//   WAIT    : action_valid is high (the datapath shows a_t); waits for next_valid,
//             on which latch_next tells the datapath to capture s_t+1.
//   FF_NEXT : as FF_CUR, for s_t+1.
//   SCAN    : A cycles, aidx = 0..A-1, reading both Q buffers in parallel.
//   BP      : BP_STAGES cycles of error generation and back-propagation; the
//             weights are written in the last one, and done pulses in the cycle after.
// busy is high in FF_CUR, FF_NEXT, SCAN and BP, so one update keeps the core busy for
// 2*A*FF_STAGES + A + BP_STAGES cycles (7A+1 for the single neuron with 3 and 1
// stages, 15A+7 for the MLP with 7 and 7). A = num_actions is sampled at start and must
// lie in 1..A_MAX. The phase sequence follows the paper's five-step state flow; the
// handshake and stage counts are this design's choices. Assertions flag a start
// outside IDLE and a next_valid outside WAIT; both would otherwise be ignored.
module ql_ctrl
  import ql_pkg::*;
#(
  parameter int unsigned A_MAX     = 40,
  parameter int unsigned FF_STAGES = 3,
  parameter int unsigned BP_STAGES = 1
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  input  logic       next_valid,
  input  aidx_t      num_actions,
  output phase_e     phase,
  output logic [2:0] stage,
  output aidx_t      aidx,
  output aidx_t      n_act,        // A latched at start
  output logic       latch_cur,
  output logic       latch_next,
  output logic       action_valid,
  output logic       busy,
  output logic       done
);
  logic last_stage_ff, last_stage_bp, last_action;

  assign last_stage_ff = (stage == 3'(FF_STAGES - 1));
  assign last_stage_bp = (stage == 3'(BP_STAGES - 1));
  assign last_action   = (aidx == n_act - 1'b1);

  assign latch_cur    = (phase == PH_IDLE) && start;
  assign latch_next   = (phase == PH_WAIT) && next_valid;
  assign action_valid = (phase == PH_WAIT);
  assign busy         = (phase == PH_FF_CUR) || (phase == PH_FF_NEXT) ||
                        (phase == PH_SCAN)   || (phase == PH_BP);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase <= PH_IDLE;
      stage <= '0;
      aidx  <= '0;
      n_act <= aidx_t'(1);
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      // Handshake rules: start only while idle, next_valid only while an action is offered.
      assert (!(start && phase != PH_IDLE)) else $error("ql_ctrl: start while not idle");
      assert (!(next_valid && phase != PH_WAIT)) else $error("ql_ctrl: next_valid while no action offered");
      unique case (phase)
        PH_IDLE: if (start) begin
          assert (num_actions != '0 && 32'(num_actions) <= A_MAX)
            else $error("ql_ctrl: num_actions out of range");
          n_act <= num_actions;
          phase <= PH_FF_CUR;
          stage <= '0;
          aidx  <= '0;
        end
        PH_FF_CUR, PH_FF_NEXT: begin
          if (!last_stage_ff) stage <= stage + 1'b1;
          else begin
            stage <= '0;
            if (!last_action) aidx <= aidx + 1'b1;
            else begin
              aidx  <= '0;
              phase <= (phase == PH_FF_CUR) ? PH_WAIT : PH_SCAN;
            end
          end
        end
        PH_WAIT: if (next_valid) phase <= PH_FF_NEXT;
        PH_SCAN: begin
          if (!last_action) aidx <= aidx + 1'b1;
          else begin
            aidx  <= '0;
            stage <= '0;
            phase <= PH_BP;
          end
        end
        PH_BP: begin
          if (!last_stage_bp) stage <= stage + 1'b1;
          else begin
            stage <= '0;
            phase <= PH_IDLE;
            done  <= 1'b1;
          end
        end
        default: phase <= PH_IDLE;
      endcase
    end
  end
endmodule
