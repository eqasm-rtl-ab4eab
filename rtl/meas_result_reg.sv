// meas_result_reg: qubit measurement result registers Q0..Q6 with their
// pending-measurement counters C0..C6.
//
// Ci starts at 0, counts up by one when a measurement of qubit i enters the
// quantum pipeline's timeline (inc) and down by one when the measurement
// discrimination unit writes a result for qubit i back (res_valid, which
// also stores the result in Qi) or when fast conditional execution cancelled
// that measurement (cancel). Qi is valid exactly when Ci is 0; FMR Rd, Qi
// waits for that. Up and down in the same clock leave Ci unchanged.
// Behaviour from the paper; the 4-bit counter width and the cancel input are
// this design's choices (an assertion flags counter overflow).
// Lint note: rst_n is an asynchronous reset everywhere in the logic; its
// only synchronous use is the "disable iff (!rst_n)" of the assertions, which
// is why a lint tool may report it as both a synchronous and an asynchronous
// signal. No flip-flop uses it synchronously.
module meas_result_reg
  import eqasm_pkg::*;
#(
  parameter int CNT_W = 4
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [NQ-1:0]       inc,
  input  logic [NQ-1:0]       res_valid,
  input  logic [NQ-1:0]       res_value,
  input  logic [NQ-1:0]       cancel,
  output logic [NQ-1:0]       q_value,
  output logic [NQ-1:0]       q_valid,
  output logic [NQ-1:0][CNT_W-1:0] count
);
  function automatic logic [CNT_W-1:0] next_count(input logic [CNT_W-1:0] c,
      input logic up, input logic dn_res, input logic dn_cancel);
    int n;
    n = int'(c) + int'(up) - int'(dn_res) - int'(dn_cancel);
    return (n < 0) ? '0 : CNT_W'(n);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      count   <= '0;
      q_value <= '0;
    end else begin
      for (int q = 0; q < NQ; q++) begin
        if (res_valid[q]) q_value[q] <= res_value[q];
        count[q] <= next_count(count[q], inc[q], res_valid[q], cancel[q]);
      end
    end
  end

  for (genvar q = 0; q < NQ; q++) begin : g_chk
    assign q_valid[q] = count[q] == '0;
    a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
      !(inc[q] && &count[q]));
  end
endmodule
