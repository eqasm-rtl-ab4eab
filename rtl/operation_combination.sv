// operation_combination: merges the two VLIW lanes and collects all
// micro-operations of one timing point.
//
// Step 1: the per-qubit micro-operations of lane 0 and lane 1 are merged; if
// both lanes act on the same qubit, error is raised.
// Step 2: the merged operations are added to a buffer that holds the current
// timing point (its label and its interval from the previous point). A
// record that opens a new timing point (or a STOP record) first sends the
// buffered point on (out_valid, one clock later) and then starts a new
// buffer; so a bundle split over several instructions with PI = 0 leaves as
// one timing point. If an instruction adds an operation to a qubit that the
// buffered point already uses, error is raised. Timing points without
// operations are sent on too: the timing controller needs every interval.
// The buffer starts as label 0, interval 0, empty.
// Behaviour follows the paper, which suggests detecting the end of a bundle
// by a new timing point; the STOP flush and the sticky error are this
// design's choices. meas_inc reports, per qubit, a measurement entering the
// timeline (used by the measurement result counters).
module operation_combination
  import eqasm_pkg::*;
(
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  qts_t          in,
  input  uop_t [NQ-1:0] uop0,
  input  uop_t [NQ-1:0] uop1,
  output logic          out_valid,
  output tpoint_t       out,
  output logic [NQ-1:0] meas_inc,
  output logic          error,
  output logic          lane_conflict,
  output logic          bundle_conflict
);
  tpoint_t       buf_q;
  uop_t [NQ-1:0] merged;
  logic [NQ-1:0] used0, used1, used_buf;
  logic          start_new;

  always_comb begin
    for (int q = 0; q < NQ; q++) begin
      used0[q]    = uop0[q].dev != DEV_NONE;
      used1[q]    = uop1[q].dev != DEV_NONE;
      used_buf[q] = buf_q.uop[q].dev != DEV_NONE;
      merged[q]   = used0[q] ? uop0[q] : uop1[q];
      meas_inc[q] = in_valid && merged[q].dev == DEV_MEAS;
    end
    start_new       = in.new_point || in.d.stop;
    lane_conflict   = in_valid && |(used0 & used1);
    bundle_conflict = in_valid && !start_new && |(used_buf & (used0 | used1));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      buf_q     <= '0;
      out_valid <= 1'b0;
      out       <= '0;
      error     <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      if (lane_conflict || bundle_conflict) error <= 1'b1;
      if (in_valid && !error) begin
        if (start_new) begin
          out_valid <= 1'b1;
          out       <= buf_q;
          buf_q.label    <= in.label;
          buf_q.interval <= in.d.stop ? '0 : in.d.interval;
          buf_q.uop      <= merged;
        end else begin
          for (int q = 0; q < NQ; q++)
            if (used0[q] || used1[q]) buf_q.uop[q] <= merged[q];
        end
      end
    end
  end
endmodule
