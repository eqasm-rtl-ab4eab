// tb_rb_workload: randomized-benchmarking workloads on the full-size
// processor.
//
// Part A, the single-qubit timing experiment: random primitive gates from
// {I, X, Y, X90, Y90, Xm90, Ym90} on one qubit, with 256 gates each at
// intervals of 320, 160, 80 and 40 ns and then the full 4096-Clifford
// sequence (4096 x 1.875 = 7680 gates) at 20 ns. Intervals up to 7 cycles
// are written with PI, longer ones with QWAIT n followed by a PI = 0 bundle.
// The identity opens its timing point with an empty bundle.
// Part B, the seven-qubit benchmark of the instruction-count study: every
// qubit gets its own random 7680-gate sequence, all in lock step at 40 ns
// (PI = 2). For every timing point, qubits that receive the same gate share
// one operation (SOMQ): a single qubit uses a preloaded register S0..S6,
// several qubits use S8..S14, rewritten by SMIS only when the mask changes.
// Operations are packed two per bundle, the first bundle of a point with
// PI = 2 and the rest with PI = 0. The program must fit the instruction
// memory.
// Both parts are generated here with $urandom. The testbench keeps the
// expected (time, codeword) list of every device channel and compares each
// released codeword against it, relative to a marker gate on all qubits
// that opens the sequence. The timeline starts 300 clocks after the program
// so the queues hold some slack. No underrun and no error may occur.
module tb_rb_workload;
  import eqasm_pkg::*;
  `include "eqasm_asm.svh"

  logic clk = 0, rst_n = 1, start = 0, tl_start = 0;
  logic imem_we = 0;
  logic [14:0] imem_waddr = '0;
  logic [31:0] imem_wdata = '0;
  logic cfg_we = 0;
  logic [QOPC_W-1:0] cfg_addr = '0;
  qcs_entry_t cfg_data = '0;
  logic dmem_h_we = 0;
  logic [11:0] dmem_h_addr = '0;
  logic [31:0] dmem_h_wdata = '0, dmem_h_rdata;
  logic tick;
  logic [NDEV-1:0][NQ-1:0] adi_valid;
  logic [NDEV-1:0][NQ-1:0][CW_W-1:0] adi_cw;
  logic [NQ-1:0] res_valid = '0, res_value = '0;
  logic halted, error, underrun, timeline_idle, fmr_stall, q_stall;
  logic lane_conflict, bundle_conflict, cancelled;
  logic [31:0] now;
  logic [NQ-1:0] meas_valid;
  int checks = 0, failures = 0;

  eqasm_processor dut (.*);

  always #5 clk = ~clk;

  localparam int NGATE  = 7680;   // 4096 Cliffords x 1.875 primitive gates
  localparam int NSHORT = 256;
  localparam int MARK   = 1;      // marker gate: X on every qubit

  typedef struct { int t; int cw; } exp_t;
  exp_t exp_q [NQ][$];
  logic [31:0] prog[$];
  int base = -1, n_got = 0, n_bad = 0;

  // compare every released microwave codeword with the expected list
  always @(posedge clk) if (tick && rst_n)
    for (int q = 0; q < NQ; q++) begin
      for (int d = 1; d < NDEV; d++)
        if (adi_valid[d][q]) begin n_bad++; $display("FAIL unexpected device %0d op on q%0d", d, q); end
      if (adi_valid[0][q]) begin
        if (base < 0) base = int'(now);
        n_got++;
        if (exp_q[q].size() == 0) begin
          n_bad++; $display("FAIL extra op q%0d cw %0d", q, adi_cw[0][q]);
        end else begin
          exp_t e;
          e = exp_q[q].pop_front();
          if (e.t != int'(now) - base || e.cw != int'(adi_cw[0][q])) begin
            n_bad++;
            if (n_bad < 10) $display("FAIL q%0d: got t=%0d cw=%0d exp t=%0d cw=%0d",
                                     q, int'(now) - base, adi_cw[0][q], e.t, e.cw);
          end
        end
      end
    end

  task automatic chk(input string what, input int got_v, input int exp_v);
    checks++;
    if (got_v != exp_v) begin failures++; $display("FAIL %s: got %0d exp %0d", what, got_v, exp_v); end
  endtask

  task automatic run_program(input string name);
    int n_exp = 0;
    foreach (exp_q[q]) n_exp += exp_q[q].size();
    @(negedge clk); rst_n = 0; repeat (3) @(negedge clk); rst_n = 1;
    foreach (prog[i]) begin
      @(negedge clk); imem_we = 1; imem_waddr = 15'(i); imem_wdata = prog[i];
    end
    @(negedge clk); imem_we = 0;
    base = -1; n_got = 0; n_bad = 0;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    repeat (300) @(negedge clk);
    tl_start = 1; @(negedge clk); tl_start = 0;
    wait (halted); repeat (20) @(negedge clk); wait (timeline_idle);
    repeat (20) @(negedge clk);
    $display("%s: %0d instruction words, %0d operations released", name, prog.size(), n_got);
    chk({name, ": program fits the instruction memory"}, int'(prog.size() <= 32768), 1);
    chk({name, ": released operations"}, n_got, n_exp);
    chk({name, ": mismatching operations"}, n_bad, 0);
    chk({name, ": underrun"}, int'(underrun), 0);
    chk({name, ": error"}, int'(error), 0);
  endtask

  task automatic add_exp(input int q, input int t, input int cw);
    exp_q[q].push_back('{t, cw});
  endtask

  initial begin
    int t, g;
    int iv[5] = '{16, 8, 4, 2, 1};
    logic [6:0] sreg[16];
    void'($urandom(7));
    #1 rst_n = 0; repeat (3) @(negedge clk); rst_n = 1;
    // Q control store: q_opcode g (1..6) = microwave codeword g
    for (int k = 1; k <= 6; k++) begin
      qcs_entry_t e = '0;
      e.uop_a.dev = DEV_MW; e.uop_a.cw = CW_W'(k); e.uop_a.cond = EF_ALWAYS;
      @(negedge clk); cfg_we = 1; cfg_addr = QOPC_W'(k); cfg_data = e;
    end
    @(negedge clk); cfg_we = 0;

    // ---------------- part A: one qubit, five intervals ----------------
    prog.delete();
    for (int q = 0; q < NQ; q++) prog.push_back(a_smis(q, 7'(1 << q)));
    prog.push_back(a_smis(7, 7'h7F));
    prog.push_back(a_qwait(100));
    prog.push_back(a_bundle(1, MARK, 7, 0, 0));
    for (int q = 0; q < NQ; q++) add_exp(q, 0, MARK);
    t = 0;
    foreach (iv[k]) begin
      int n;
      n = (iv[k] == 1) ? NGATE : NSHORT;
      for (int i = 0; i < n; i++) begin
        g = $urandom_range(0, 6);
        t += iv[k];
        if (iv[k] <= 7) prog.push_back(a_bundle(iv[k], g, 0, 0, 0));
        else begin prog.push_back(a_qwait(iv[k])); prog.push_back(a_bundle(0, g, 0, 0, 0)); end
        if (g != 0) add_exp(0, t, g);
      end
    end
    prog.push_back(a_qwait(10));
    prog.push_back(a_stop());
    run_program("single-qubit RB");

    // ---------------- part B: seven qubits at 40 ns ----------------
    prog.delete();
    for (int q = 0; q < NQ; q++) prog.push_back(a_smis(q, 7'(1 << q)));
    prog.push_back(a_smis(7, 7'h7F));
    foreach (sreg[r]) sreg[r] = '0;
    prog.push_back(a_qwait(100));
    prog.push_back(a_bundle(1, MARK, 7, 0, 0));
    for (int q = 0; q < NQ; q++) add_exp(q, 0, MARK);
    t = 0;
    for (int i = 0; i < NGATE; i++) begin
      logic [6:0] m[7];
      int ops_opc[$], ops_reg[$];
      t += 2;
      foreach (m[k]) m[k] = '0;
      ops_opc.delete(); ops_reg.delete();
      for (int q = 0; q < NQ; q++) begin
        g = $urandom_range(0, 6);
        m[g][q] = 1'b1;
        if (g != 0) add_exp(q, t, g);
      end
      for (int k = 1; k <= 6; k++) if (m[k] != 0) begin
        int r;
        if ($countones(m[k]) == 1) r = $clog2(int'(m[k]));
        else begin
          r = 7 + k;
          if (sreg[r] != m[k]) begin prog.push_back(a_smis(r, m[k])); sreg[r] = m[k]; end
        end
        ops_opc.push_back(k); ops_reg.push_back(r);
      end
      if (ops_opc.size() == 0) prog.push_back(a_bundle(2, 0, 0, 0, 0));
      for (int k = 0; k < ops_opc.size(); k += 2) begin
        int pi;
        pi = (k == 0) ? 2 : 0;
        if (k + 1 < ops_opc.size()) prog.push_back(a_bundle(pi, ops_opc[k], ops_reg[k], ops_opc[k+1], ops_reg[k+1]));
        else prog.push_back(a_bundle(pi, ops_opc[k], ops_reg[k], 0, 0));
      end
    end
    prog.push_back(a_qwait(10));
    prog.push_back(a_stop());
    $display("seven-qubit RB program: %0d words", prog.size());
    run_program("seven-qubit RB");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
