// tb_fast_cond_exec: random measurement results and triggered operations
// with random flag selects; a reference keeps the last two results per
// qubit and decides release or cancel by the four flag rules. Checks every
// ADI output, the codeword, the cancel flag and the cancelled-measurement
// report, one tick after the trigger.
module tb_fast_cond_exec;
  import eqasm_pkg::*;
  logic clk = 0, rst_n = 1, tick = 0;
  logic [NDEV-1:0][NQ-1:0] trig_valid = '0;
  devop_t [NDEV-1:0][NQ-1:0] trig_op = '0;
  logic [NQ-1:0] res_valid = '0, res_value = '0;
  logic [NDEV-1:0][NQ-1:0] adi_valid;
  logic [NDEV-1:0][NQ-1:0][CW_W-1:0] adi_cw;
  logic [NQ-1:0] meas_cancel;
  logic [NQ-1:0][3:0] exec_flags;
  logic cancelled;
  int checks = 0, failures = 0, n_rel = 0, n_can = 0;

  fast_cond_exec dut (.*);
  always #5 clk = ~clk;

  logic [NQ-1:0] last = '0, prev = '0;

  initial begin
    #1 rst_n = 0; repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 400; i++) begin
      logic [NDEV-1:0][NQ-1:0] exp_v;
      logic [NQ-1:0] exp_mc;
      logic exp_c;
      // one tick: present results and triggers
      @(negedge clk);
      tick = 1;
      for (int q = 0; q < NQ; q++) begin
        res_valid[q] = $urandom_range(0, 2) == 0;
        res_value[q] = $urandom_range(0, 1);
        if (res_valid[q]) begin prev[q] = last[q]; last[q] = res_value[q]; end
      end
      exp_c = 0; exp_mc = '0;
      for (int d = 0; d < NDEV; d++)
        for (int q = 0; q < NQ; q++) begin
          logic f;
          trig_valid[d][q] = $urandom_range(0, 1);
          trig_op[d][q].cw = 8'($urandom);
          trig_op[d][q].cond = exec_flag_e'($urandom_range(0, 3));
          case (trig_op[d][q].cond)
            EF_ALWAYS: f = 1;
            EF_LAST1:  f = last[q];
            EF_LAST0:  f = !last[q];
            default:   f = last[q] == prev[q];
          endcase
          exp_v[d][q] = trig_valid[d][q] && f;
          if (trig_valid[d][q] && !f) begin exp_c = 1; if (d == 2) exp_mc[q] = 1; end
        end
      @(negedge clk);
      tick = 0; res_valid = '0; trig_valid = '0;
      checks++;
      if (adi_valid !== exp_v || cancelled !== exp_c || meas_cancel !== exp_mc) begin
        failures++; $display("FAIL %0d: adi %h/%h cancel %b/%b mc %b/%b", i, adi_valid, exp_v, cancelled, exp_c, meas_cancel, exp_mc);
      end
      for (int d = 0; d < NDEV; d++)
        for (int q = 0; q < NQ; q++)
          if (exp_v[d][q]) begin
            checks++; n_rel++;
            if (adi_cw[d][q] !== trig_op[d][q].cw) begin failures++; $display("FAIL codeword"); end
          end
      if (exp_c) n_can++;
      // outputs must hold until the next tick
      @(negedge clk); checks++;
      if (adi_valid !== exp_v) begin failures++; $display("FAIL: output not held for a tick"); end
    end
    checks++;
    if (n_rel < 100 || n_can < 100) begin failures++; $display("FAIL: coverage %0d %0d", n_rel, n_can); end
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
