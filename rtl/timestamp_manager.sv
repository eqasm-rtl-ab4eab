// timestamp_manager: builds the timeline from the waiting intervals.
//
// Each record from the decoder carries an interval (QWAIT Imm, QWAITR Rs or
// the PI field of a bundle). A non-zero interval creates a new timing point:
// the timing label is incremented and the record is marked new_point, with
// the interval measured from the previous timing point. An interval of zero
// keeps the last timing point, so the operations of a bundle with PI = 0
// join the previous point. Every record leaves tagged with the label of the
// last timing point, which the VLIW lanes and operation combination use to
// group operations. Label 0 is the first timing point of the timeline, which
// the timing controller fires when the timeline is started.
// The label counter (8 bits, wrapping) is this design's choice; the rules
// for intervals, PI and zero waits follow the paper. One clock latency.
module timestamp_manager
  import eqasm_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  qdec_t in,
  output logic  out_valid,
  output qts_t  out
);
  logic [LABEL_W-1:0] label_q;
  logic               np;

  assign np = in_valid && in.wait_op && (in.interval != '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      label_q   <= '0;
      out_valid <= 1'b0;
      out       <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        out.d         <= in;
        out.new_point <= np;
        out.label     <= np ? label_q + 1'b1 : label_q;
      end
      if (np) label_q <= label_q + 1'b1;
    end
  end
endmodule
