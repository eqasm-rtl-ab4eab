// fast_cond_exec: fast conditional execution of triggered device operations.
//
// For every qubit it keeps the last two finished measurement results and
// derives four execution flags:
//   flag 0: always '1' (unconditional operations)
//   flag 1: '1' iff the last finished measurement result is |1>
//   flag 2: '1' iff the last finished measurement result is |0>
//   flag 3: '1' iff the last two finished measurements agree
// The flags follow every returned result at once, whether or not the
// measurement result register is valid. A device operation triggered by the
// timing controller is released to the analog-digital interface only if the
// flag it selects for its qubit is '1'; otherwise it is cancelled. A
// cancelled measurement is reported on meas_cancel so that the pending
// measurement counter of the qubit can be released.
// Timing: works on tick (50 MHz). Results are sampled on tick; the released
// operations are registered and held for one tick period. A result sampled
// on the same tick as an operation is used by that operation.
// exec_flags[q][0] is the constant '1' of flag 0 and is exported only so the
// four flags can be observed together; a synthesis report lists those seven
// output bits as constant.
// Flags and rules follow the paper. Reset state (both results |0>) and the
// cancelled-measurement report are this design's choices.
module fast_cond_exec
  import eqasm_pkg::*;
(
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          tick,
  input  logic   [NDEV-1:0][NQ-1:0]     trig_valid,
  input  devop_t [NDEV-1:0][NQ-1:0]     trig_op,
  input  logic   [NQ-1:0]               res_valid,
  input  logic   [NQ-1:0]               res_value,
  output logic   [NDEV-1:0][NQ-1:0]     adi_valid,
  output logic   [NDEV-1:0][NQ-1:0][CW_W-1:0] adi_cw,
  output logic   [NQ-1:0]               meas_cancel,
  output logic   [NQ-1:0][3:0]          exec_flags,
  output logic                          cancelled
);
  logic [NQ-1:0] last_q, prev_q;
  logic [NQ-1:0] last_n, prev_n;

  always_comb begin
    for (int q = 0; q < NQ; q++) begin
      last_n[q] = (tick && res_valid[q]) ? res_value[q] : last_q[q];
      prev_n[q] = (tick && res_valid[q]) ? last_q[q]    : prev_q[q];
      exec_flags[q][EF_ALWAYS] = 1'b1;
      exec_flags[q][EF_LAST1]  = last_n[q];
      exec_flags[q][EF_LAST0]  = !last_n[q];
      exec_flags[q][EF_SAME]   = last_n[q] == prev_n[q];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      last_q      <= '0;
      prev_q      <= '0;
      adi_valid   <= '0;
      adi_cw      <= '0;
      meas_cancel <= '0;
      cancelled   <= 1'b0;
    end else if (tick) begin
      last_q    <= last_n;
      prev_q    <= prev_n;
      cancelled <= 1'b0;
      meas_cancel <= '0;
      for (int d = 0; d < NDEV; d++) begin
        for (int q = 0; q < NQ; q++) begin
          adi_cw[d][q]    <= trig_op[d][q].cw;
          adi_valid[d][q] <= trig_valid[d][q] && exec_flags[q][trig_op[d][q].cond];
          if (trig_valid[d][q] && !exec_flags[q][trig_op[d][q].cond]) begin
            cancelled <= 1'b1;
            if (d == int'(DEV_MEAS) - 1) meas_cancel[q] <= 1'b1;
          end
        end
      end
    end
  end
endmodule
