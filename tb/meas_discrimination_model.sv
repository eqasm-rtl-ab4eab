// meas_discrimination_model: behavioural stand-in for the measurement
// discrimination unit of the analog-digital interface (in the real setup
// a commercial readout instrument). Not synthesizable logic of the design.
//
// Every measurement operation released on adi_valid[MEAS][q] (sampled once
// per 20 ns tick) returns a result for qubit q MEAS_TICKS ticks later on
// res_valid/res_value, held for one tick period. Results are taken from a
// per-qubit script loaded by the testbench (set_script); when the script
// runs out the result alternates 0, 1, 0, ... like mock results.
module meas_discrimination_model
  import eqasm_pkg::*;
#(
  parameter int MEAS_TICKS = 15
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    tick,
  input  logic [NDEV-1:0][NQ-1:0] adi_valid,
  output logic [NQ-1:0]           res_valid,
  output logic [NQ-1:0]           res_value
);
  int unsigned ticks = 0;
  int unsigned due [NQ][$];
  bit          script [NQ][$];
  bit          alt [NQ];
  int          n_meas = 0;

  function automatic void set_script(input int q, input bit vals[$]);
    script[q] = vals;
  endfunction

  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      res_valid <= '0;
      res_value <= '0;
      ticks = 0;
      for (int q = 0; q < NQ; q++) begin due[q].delete(); alt[q] = 0; end
    end else if (tick) begin
      ticks++;
      for (int q = 0; q < NQ; q++) begin
        if (adi_valid[int'(DEV_MEAS) - 1][q]) begin
          due[q].push_back(ticks + MEAS_TICKS - 1);
          n_meas++;
        end
        res_valid[q] <= 1'b0;
        if (due[q].size() > 0 && due[q][0] <= ticks) begin
          void'(due[q].pop_front());
          res_valid[q] <= 1'b1;
          if (script[q].size() > 0) res_value[q] <= script[q].pop_front();
          else begin res_value[q] <= alt[q]; alt[q] = !alt[q]; end
        end
      end
    end
  end
endmodule
