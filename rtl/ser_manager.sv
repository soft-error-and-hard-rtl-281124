// ser_manager: temporal redundancy for one pipeline-stage result (soft-error
// resilience of the next-port computation and of switch allocation).
//
// The stage's combinational logic is evaluated in three phases that repeat:
//   C1  first computation: the result is stored (r1);
//   C2  redundant computation: the fresh result is compared with r1; if
//       they agree the result is committed in this cycle;
//   C3  only after a disagreement: a third computation, and the bitwise
//       majority of the three results is committed.
// This is the scheme of the original design (NPC/SA, then RNPC/RSA with
// the crossbar traversal in the same cycle when equal, roll-back and
// majority voting otherwise). A soft error lasting one cycle is therefore
// either masked at C2 or out-voted at C3.
//
// Several instances in one router run in lock step: each reports
// mismatch_o in C2 and all receive retry_i, the OR of all mismatches, so
// the whole router halts for the correction cycle together ("the whole
// pipeline is halted for correction"). A standalone instance ties retry_i
// to its own mismatch_o. phase_o tells the stage which inputs to use: in C1
// the live ones (and a snapshot is taken), in C2 and C3 the snapshot, so
// the repeated computations see the same operands.
//
// Timing: commit_o is a combinational pulse in C2 or C3, with result_o.
module ser_manager #(
  parameter int W = 8
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [W-1:0] result_i,   // combinational result of the stage
  input  logic         retry_i,    // go to the voting phase
  output logic [1:0]   phase_o,    // 1, 2 or 3
  output logic         mismatch_o,
  output logic         commit_o,
  output logic [W-1:0] result_o
);
  typedef enum logic [1:0] {C1 = 2'd1, C2 = 2'd2, C3 = 2'd3} phase_e;

  phase_e       phase;
  logic [W-1:0] r1, r2;

  assign phase_o    = phase;
  assign mismatch_o = (phase == C2) && (result_i != r1);

  always_comb begin
    commit_o = 1'b0;
    result_o = r1;
    case (phase)
      C2: begin
        commit_o = !retry_i;
        result_o = r1;
      end
      C3: begin
        commit_o = 1'b1;
        result_o = (r1 & r2) | (r1 & result_i) | (r2 & result_i);
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      phase <= C1;
      r1    <= '0;
      r2    <= '0;
    end else begin
      case (phase)
        C1: begin
          r1    <= result_i;
          phase <= C2;
        end
        C2: begin
          r2    <= result_i;
          phase <= retry_i ? C3 : C1;
        end
        default: phase <= C1;
      endcase
    end
  end
endmodule
