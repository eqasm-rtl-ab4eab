// tb_operation_combination: feeds lane outputs and checks (1) two lanes are
// merged into one timing point, (2) bundles with PI = 0 join the buffered
// point, (3) a new point sends the buffered one with its label and interval,
// including empty points from plain waits, (4) STOP flushes the last point,
// (5) measurement increments are reported per qubit, and (6) both error
// cases: two lanes on one qubit, and a later instruction reusing a qubit of
// the same timing point.
module tb_operation_combination;
  import eqasm_pkg::*;
  logic clk = 0, rst_n = 1, in_valid = 0;
  qts_t in = '0;
  uop_t [NQ-1:0] uop0 = '0, uop1 = '0;
  logic out_valid, error, lane_conflict, bundle_conflict;
  tpoint_t out;
  logic [NQ-1:0] meas_inc;
  int checks = 0, failures = 0;

  operation_combination dut (.*);
  always #5 clk = ~clk;

  localparam uop_t A = '{dev: DEV_MW, cw: 8'hA0, cond: EF_ALWAYS};
  localparam uop_t B = '{dev: DEV_FLUX, cw: 8'hB0, cond: EF_ALWAYS};
  localparam uop_t M = '{dev: DEV_MEAS, cw: 8'h0E, cond: EF_ALWAYS};

  tpoint_t got[$];
  always @(negedge clk) if (out_valid) got.push_back(out);

  task automatic rec(input logic np, input int lbl, input int iv, input logic stop,
                     input uop_t [NQ-1:0] a, input uop_t [NQ-1:0] b);
    @(negedge clk);
    in_valid = 1; in = '0; in.new_point = np; in.label = 8'(lbl); in.d.interval = 20'(iv);
    in.d.wait_op = 1; in.d.bundle = 1; in.d.stop = stop; uop0 = a; uop1 = b;
    #1;
    @(negedge clk); in_valid = 0; uop0 = '0; uop1 = '0;
    #1;
  endtask

  task automatic expect_pt(input int lbl, input int iv, input uop_t [NQ-1:0] u);
    tpoint_t t;
    checks++;
    if (got.size() == 0) begin failures++; $display("FAIL: missing point %0d", lbl); return; end
    t = got.pop_front();
    if (t.label !== 8'(lbl) || t.interval !== 20'(iv) || t.uop !== u) begin
      failures++; $display("FAIL point: label %0d/%0d interval %0d/%0d uop %h/%h", t.label, lbl, t.interval, iv, t.uop, u);
    end
  endtask

  int meas_seen = 0;
  always @(posedge clk) meas_seen += $countones(meas_inc);

  initial begin
    uop_t [NQ-1:0] a, b, z, e;
    z = '0;
    #1 rst_n = 0; repeat (2) @(negedge clk); rst_n = 1;
    // wait 10 (empty initial point 0 goes out)
    rec(1, 1, 10, 0, z, z);
    expect_pt(0, 0, z);
    // label 1: lane0 A on q0, lane1 B on q3 ; then PI=0 bundle adds M on q5,q6
    a = z; a[0] = A; b = z; b[3] = B;
    rec(0, 1, 0, 0, a, b);
    a = z; a[5] = M; a[6] = M;
    rec(0, 1, 0, 0, a, z);
    checks++; if (got.size() != 0) begin failures++; $display("FAIL: early flush"); end
    // new point label 2 interval 3, carrying A on q1
    a = z; a[1] = A;
    rec(1, 2, 3, 0, a, z);
    e = z; e[0] = A; e[3] = B; e[5] = M; e[6] = M;
    expect_pt(1, 10, e);
    // stop flushes label 2
    rec(0, 2, 0, 1, z, z);
    e = z; e[1] = A;
    expect_pt(2, 3, e);
    checks++; if (meas_seen != 2) begin failures++; $display("FAIL: meas_inc count %0d", meas_seen); end
    checks++; if (error) begin failures++; $display("FAIL: spurious error"); end
    // bundle conflict: same qubit twice within one point
    a = z; a[4] = A;
    rec(1, 3, 1, 0, a, z);
    void'(got.pop_front());
    rec(0, 3, 0, 0, a, z);
    checks++; if (!error) begin failures++; $display("FAIL: bundle conflict not flagged"); end
    // lane conflict on a fresh instance state: reset
    rst_n = 0; @(negedge clk); rst_n = 1;
    a = z; a[2] = A; b = z; b[2] = B;
    rec(1, 1, 1, 0, a, b);
    checks++; if (!error) begin failures++; $display("FAIL: lane conflict not flagged"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
