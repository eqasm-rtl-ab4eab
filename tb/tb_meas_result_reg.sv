// tb_meas_result_reg: random increments (measurements issued), result
// write-backs and cancels per qubit; a reference counter per qubit checks
// Ci, the validity of Qi (valid iff Ci == 0) and the stored result.
module tb_meas_result_reg;
  import eqasm_pkg::*;
  logic clk = 0, rst_n = 1;
  logic [NQ-1:0] inc = '0, res_valid = '0, res_value = '0, cancel = '0;
  logic [NQ-1:0] q_value, q_valid;
  logic [NQ-1:0][3:0] count;
  int checks = 0, failures = 0, n_wait = 0;
  int c [NQ];
  logic [NQ-1:0] v_ref = '0;

  meas_result_reg dut (.*);
  always #5 clk = ~clk;

  initial begin
    for (int q = 0; q < NQ; q++) c[q] = 0;
    #1 rst_n = 0; repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 1000; i++) begin
      @(negedge clk);
      for (int q = 0; q < NQ; q++) begin
        inc[q] = (c[q] < 10) && $urandom_range(0, 2) == 0;
        res_valid[q] = (c[q] > 0) && $urandom_range(0, 2) == 0;
        cancel[q] = (c[q] > 1) && !res_valid[q] && $urandom_range(0, 5) == 0;
        res_value[q] = $urandom_range(0, 1);
        c[q] = c[q] + int'(inc[q]) - int'(res_valid[q]) - int'(cancel[q]);
        if (res_valid[q]) v_ref[q] = res_value[q];
      end
      @(negedge clk);
      inc = '0; res_valid = '0; cancel = '0;
      for (int q = 0; q < NQ; q++) begin
        checks++;
        if (int'(count[q]) != c[q] || q_valid[q] !== (c[q] == 0) || q_value[q] !== v_ref[q]) begin
          failures++; $display("FAIL q%0d: count %0d/%0d valid %b value %b/%b", q, count[q], c[q], q_valid[q], q_value[q], v_ref[q]);
        end
        if (c[q] != 0) n_wait++;
      end
    end
    checks++;
    if (n_wait < 100) begin failures++; $display("FAIL: counters rarely non-zero"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
