// tb_timing_control_unit: pushes a timeline of timing points (random
// intervals, some without events) and device operations, starts it, and
// checks that each device operation is triggered exactly at its absolute
// time (sum of intervals, in ticks) on its own channel, for one tick period.
// Then checks almost_full back-pressure and the underrun flag when a point
// arrives after its time. tick is every second clock, as in the design.
module tb_timing_control_unit;
  import eqasm_pkg::*;
  logic clk = 0, rst_n = 1, tick = 0, tl_start = 0, tq_push = 0;
  tq_entry_t tq_data = '0;
  logic [NDEV-1:0][NQ-1:0] eq_push = '0;
  devop_t [NDEV-1:0][NQ-1:0] eq_data = '0;
  logic [NDEV-1:0][NQ-1:0] trig_valid;
  devop_t [NDEV-1:0][NQ-1:0] trig_op;
  logic fired, started, almost_full, idle, underrun;
  logic [LABEL_W-1:0] fired_label;
  logic [31:0] now;
  int checks = 0, failures = 0;

  timing_control_unit #(.TQ_DEPTH(64), .EQ_DEPTH(32), .MARGIN(8)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) tick <= !tick;

  // expected triggers: absolute tick index, channel, codeword
  typedef struct { int t; int d; int q; int cw; } ev_t;
  ev_t exp_ev[$];
  int n_trig = 0;
  int tick_idx = -1;   // ticks since start, counted by the testbench

  always @(posedge clk) if (tick && started) tick_idx <= tick_idx + 1;

  // observe on the clock after each tick (outputs registered on tick)
  logic tick_d = 0;
  always @(posedge clk) tick_d <= tick;
  always @(negedge clk) if (tick_d) begin
    for (int d = 0; d < NDEV; d++)
      for (int q = 0; q < NQ; q++)
        if (trig_valid[d][q]) begin
          int k; k = -1;
          foreach (exp_ev[i]) if (k < 0 && exp_ev[i].d == d && exp_ev[i].q == q) k = i;
          checks++; n_trig++;
          if (k < 0) begin failures++; $display("FAIL: unexpected trigger d%0d q%0d", d, q); end
          else begin
            if (exp_ev[k].t != tick_idx || exp_ev[k].cw != int'(trig_op[d][q].cw)) begin
              failures++;
              $display("FAIL: d%0d q%0d at %0d exp %0d cw %0d/%0d", d, q, tick_idx, exp_ev[k].t, trig_op[d][q].cw, exp_ev[k].cw);
            end
            exp_ev.delete(k);
          end
        end
  end

  task automatic push_point(input int label, input int interval, input int abs_t, input int nev);
    @(negedge clk);
    tq_push = 1; tq_data.label = 8'(label); tq_data.interval = 20'(interval);
    eq_push = '0;
    for (int j = 0; j < nev; j++) begin
      int d, q;
      d = $urandom_range(0, NDEV-1); q = $urandom_range(0, NQ-1);
      if (!eq_push[d][q]) begin
        eq_push[d][q] = 1;
        eq_data[d][q].label = 8'(label); eq_data[d][q].cw = 8'($urandom);
        eq_data[d][q].cond = EF_ALWAYS;
        exp_ev.push_back('{abs_t, d, q, int'(eq_data[d][q].cw)});
      end
    end
    @(negedge clk); tq_push = 0; eq_push = '0;
  endtask

  initial begin
    int t, n_pts;
    #1 rst_n = 0; repeat (2) @(negedge clk); rst_n = 1;
    // point 0 at time 0 with events, then 40 more points
    push_point(0, 0, 0, 2);
    t = 0;
    for (int i = 1; i <= 58; i++) begin
      int iv;
      iv = ($urandom_range(0, 3) == 0) ? $urandom_range(20, 60) : $urandom_range(1, 4);
      t += iv;
      push_point(i, iv, t, $urandom_range(0, 4));
    end
    checks++;
    if (!almost_full) begin failures++; $display("FAIL: almost_full not set at 59 points"); end
    @(negedge clk); tl_start = 1;
    @(negedge clk); tl_start = 0;
    wait (idle);
    repeat (6) @(negedge clk);
    checks++;
    if (exp_ev.size() != 0) begin failures++; $display("FAIL: %0d events never triggered", exp_ev.size()); end
    checks++;
    if (underrun) begin failures++; $display("FAIL: spurious underrun"); end
    checks++;
    if (almost_full) begin failures++; $display("FAIL: almost_full stuck"); end
    // late point: interval 1 but pushed long after the queue ran dry
    repeat (20) @(negedge clk);
    push_point(59, 1, 0, 0);
    repeat (6) @(negedge clk);
    checks++;
    if (!underrun) begin failures++; $display("FAIL: underrun not flagged"); end
    checks++;
    if (n_trig < 20) begin failures++; $display("FAIL: only %0d triggers", n_trig); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
