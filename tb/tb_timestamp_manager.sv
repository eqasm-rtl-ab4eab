// tb_timestamp_manager: drives a random stream of waits and bundles and
// checks, against a reference counter, that every non-zero interval opens a
// new timing point with the next label, that zero intervals (PI = 0,
// QWAIT 0) and non-waiting records keep the last label, and that the
// record itself passes unchanged with one clock of latency.
module tb_timestamp_manager;
  import eqasm_pkg::*;
  logic clk = 0, rst_n = 1, in_valid = 0, out_valid;
  qdec_t in = '0;
  qts_t out;
  int checks = 0, failures = 0;
  int ref_label = 0, new_points = 0;

  timestamp_manager dut (.*);
  always #5 clk = ~clk;

  initial begin
    #1 rst_n = 0; repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 300; i++) begin
      qdec_t d;
      logic exp_np;
      d = '0;
      case ($urandom_range(0, 4))
        0: begin d.wait_op = 1; d.interval = WAIT_W'($urandom_range(0, 3) == 0 ? 0 : $urandom_range(1, 100000)); end
        1, 2: begin d.wait_op = 1; d.bundle = 1; d.interval = WAIT_W'($urandom_range(0, 7)); end
        3: begin d.smis = 1; d.treg = 5'($urandom); d.mask = 16'($urandom); end
        default: d.stop = 0;
      endcase
      exp_np = d.wait_op && d.interval != 0;
      if (exp_np) begin ref_label++; new_points++; end
      @(negedge clk); in_valid = 1; in = d;
      @(negedge clk); in_valid = $urandom_range(0, 1) == 1 ? 0 : 0;
      checks++;
      if (!out_valid || out.d !== d || out.new_point !== exp_np ||
          out.label !== LABEL_W'(ref_label)) begin
        failures++;
        $display("FAIL %0d: np=%b/%b label=%0d/%0d", i, out.new_point, exp_np, out.label, ref_label % 256);
      end
    end
    checks++;
    if (new_points < 50) begin failures++; $display("FAIL: too few timing points"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
