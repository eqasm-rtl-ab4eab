// tb_device_event_distributor: sends random timing points and checks, one
// clock later, that the timing queue receives {label, interval} and that
// each qubit's micro-operation lands in exactly the event queue of its
// device type with label, codeword and flag select, and nowhere else.
module tb_device_event_distributor;
  import eqasm_pkg::*;
  logic clk = 0, rst_n = 1, in_valid = 0;
  tpoint_t in = '0;
  logic tq_push;
  tq_entry_t tq_data;
  logic [NDEV-1:0][NQ-1:0] eq_push;
  devop_t [NDEV-1:0][NQ-1:0] eq_data;
  int checks = 0, failures = 0;

  device_event_distributor dut (.*);
  always #5 clk = ~clk;

  initial begin
    #1 rst_n = 0; repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 200; i++) begin
      tpoint_t t;
      t.label = 8'($urandom); t.interval = 20'($urandom);
      for (int q = 0; q < NQ; q++) begin
        t.uop[q].dev = dev_type_e'($urandom_range(0, 3));
        t.uop[q].cw = 8'($urandom); t.uop[q].cond = exec_flag_e'($urandom_range(0, 3));
      end
      @(negedge clk); in_valid = 1; in = t;
      @(negedge clk); in_valid = 0;
      checks++;
      if (!tq_push || tq_data.label !== t.label || tq_data.interval !== t.interval) begin
        failures++; $display("FAIL timing queue entry %0d", i);
      end
      for (int d = 0; d < NDEV; d++)
        for (int q = 0; q < NQ; q++) begin
          logic e;
          e = (int'(t.uop[q].dev) == d + 1);
          checks++;
          if (eq_push[d][q] !== e ||
              (e && (eq_data[d][q].label !== t.label || eq_data[d][q].cw !== t.uop[q].cw ||
                     eq_data[d][q].cond !== t.uop[q].cond))) begin
            failures++; $display("FAIL event queue dev %0d q %0d", d, q);
          end
        end
      @(negedge clk);
      checks++;
      if (tq_push || |eq_push) begin failures++; $display("FAIL: push without input"); end
    end
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
