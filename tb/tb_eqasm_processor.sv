// tb_eqasm_processor: end-to-end test of the whole processor at its default
// sizes. The host loads a Q control store (X, Y, X90, MEASZ, C_X, CZ) and a
// program built from the paper's example programs:
//   1. the two-qubit AllXY fragment: SOMQ (Y S7 on qubits 0 and 2), a VLIW
//      bundle (X90 S0 | X S2), PI timing after QWAIT 10000;
//   2. a 100-iteration loop of timed gates (PI = 3, and a PI = 0 bundle that
//      joins the same timing point) that fills the queues, so the classical
//      pipeline is held by back-pressure while the timeline waits;
//   3. comprehensive feedback control: MEASZ, QWAIT 30, FMR (stalls until
//      the result returns), CMP, BR, then X or Y on qubit 0 depending on
//      the mock result (alternating 0, 1, 0, 1); results stored with ST and
//      read by the host;
//   4. active qubit reset twice: C_X executes after a |1> result and is
//      cancelled by fast conditional execution after a |0> result;
//   5. a CZ on two allowed pairs via SMIT, a bundle split over two
//      instructions (PI = 0), QWAITR with a register value, STOP.
// Every released ADI operation is recorded with its 20 ns time stamp and
// compared against an expected list computed here from the program's
// intervals (relative to the first gate). Then a second program with two
// operations on one qubit in one bundle must raise the error and stop.
// A third program measures the feedback latencies, from the tick on which
// a result enters to the tick on which the dependent codeword leaves: for
// CFC (MEASZ, QWAIT 1, FMR, CMP, BR, Y: the Y is necessarily late, fires at
// once and raises underrun) and for fast conditional execution (C_X
// scheduled on the tick the result arrives: one 20 ns cycle).
// Each mechanism (SOMQ, VLIW, bundle merge, back-pressure, FMR stall,
// conditional execute and cancel, two-qubit gate, QWAITR, branch, error,
// underrun) is checked to occur at least once.
module tb_eqasm_processor;
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
  logic [NQ-1:0] res_valid, res_value;
  logic halted, error, underrun, timeline_idle, fmr_stall, q_stall;
  logic lane_conflict, bundle_conflict, cancelled;
  logic [31:0] now;
  logic [NQ-1:0] meas_valid;
  int checks = 0, failures = 0;

  eqasm_processor dut (.*);
  meas_discrimination_model #(.MEAS_TICKS(15)) u_md (
    .clk, .rst_n, .tick, .adi_valid, .res_valid, .res_value
  );

  always #5 clk = ~clk;

  localparam int OPC_X = 1, OPC_Y = 2, OPC_X90 = 3, OPC_MEAS = 4, OPC_CX = 5, OPC_CZ = 6;
  localparam int CW_X = 1, CW_Y = 2, CW_X90 = 3, CW_M = 7, CW_CX = 5, CW_CZS = 16, CW_CZT = 17;
  localparam int MW = 0, FLUX = 1, MEAS = 2;
  localparam int NLOOP = 100;
  localparam int FCE_WAIT = 16;

  typedef struct { int t; int d; int q; int cw; } ev_t;
  ev_t got[$], exp_ev[$];

  // record released operations, once per tick
  always @(posedge clk) if (tick && rst_n)
    for (int d = 0; d < NDEV; d++)
      for (int q = 0; q < NQ; q++)
        if (adi_valid[d][q]) got.push_back('{int'(now), d, q, int'(adi_cw[d][q])});

  // arrival time of every measurement result
  int res_t [NQ][$];
  always @(posedge clk) if (tick && rst_n)
    for (int q = 0; q < NQ; q++)
      if (res_valid[q]) res_t[q].push_back(int'(now));

  // mechanism counters
  int n_fmr_stall = 0, n_q_stall = 0, n_cancel = 0;
  always @(posedge clk) begin
    if (fmr_stall) n_fmr_stall++;
    if (q_stall) n_q_stall++;
    if (tick && cancelled) n_cancel++;
  end

  task automatic chk(input string what, input int got_v, input int exp_v);
    checks++;
    if (got_v != exp_v) begin failures++; $display("FAIL %s: got %0d exp %0d", what, got_v, exp_v); end
  endtask

  task automatic ev(input int t, input int d, input int q, input int cw);
    exp_ev.push_back('{t, d, q, cw});
  endtask

  // ---------------- host side ----------------
  logic [31:0] prog[$];
  task automatic load_program();
    foreach (prog[i]) begin
      @(negedge clk); imem_we = 1; imem_waddr = 15'(i); imem_wdata = prog[i];
    end
    @(negedge clk); imem_we = 0;
  endtask

  task automatic cfg(input int opc, input qcs_entry_t e);
    @(negedge clk); cfg_we = 1; cfg_addr = QOPC_W'(opc); cfg_data = e;
    @(negedge clk); cfg_we = 0;
  endtask

  function automatic qcs_entry_t single(input dev_type_e d, input int cw, input exec_flag_e c);
    qcs_entry_t e = '0;
    e.uop_a.dev = d; e.uop_a.cw = CW_W'(cw); e.uop_a.cond = c;
    return e;
  endfunction

  task automatic reset_dut();
    @(negedge clk); rst_n = 0;
    repeat (3) @(negedge clk); rst_n = 1;
  endtask

  int L1, L2, L3, BR_EQ, EQP, BR_AL, NEXT;

  initial begin
    qcs_entry_t cz;
    bit s2[$], s1[$];
    int t0, b;

    #1 rst_n = 0; repeat (3) @(negedge clk); rst_n = 1;
    cfg(OPC_X,    single(DEV_MW, CW_X, EF_ALWAYS));
    cfg(OPC_Y,    single(DEV_MW, CW_Y, EF_ALWAYS));
    cfg(OPC_X90,  single(DEV_MW, CW_X90, EF_ALWAYS));
    cfg(OPC_MEAS, single(DEV_MEAS, CW_M, EF_ALWAYS));
    cfg(OPC_CX,   single(DEV_MW, CW_CX, EF_LAST1));
    cz = '0; cz.two_qubit = 1;
    cz.uop_a = '{dev: DEV_FLUX, cw: CW_W'(CW_CZS), cond: EF_ALWAYS};
    cz.uop_b = '{dev: DEV_FLUX, cw: CW_W'(CW_CZT), cond: EF_ALWAYS};
    cfg(OPC_CZ, cz);

    // ---------------- program ----------------
    prog.push_back(a_smis(0, 7'b000_0001));
    prog.push_back(a_smis(1, 7'b000_0010));
    prog.push_back(a_smis(2, 7'b000_0100));
    prog.push_back(a_smis(7, 7'b000_0101));
    prog.push_back(a_smit(3, 16'h0041));               // pairs 0 (2->0), 6 (3->6)
    // 1. AllXY fragment
    prog.push_back(a_qwait(10000));
    prog.push_back(a_bundle(0, OPC_Y, 7, 0, 0));
    prog.push_back(a_bundle(1, OPC_X90, 0, OPC_X, 2));
    prog.push_back(a_bundle(1, OPC_MEAS, 7, 0, 0));
    prog.push_back(a_qwait(50));
    // 2. timed loop
    prog.push_back(a_ldi(5, 0));
    prog.push_back(a_ldi(6, NLOOP));
    prog.push_back(a_ldi(7, 1));
    L1 = prog.size();
    prog.push_back(a_bundle(3, OPC_X, 0, 0, 0));
    prog.push_back(a_bundle(0, 0, 0, OPC_Y, 2));
    prog.push_back(a_r(OP_ADD, 5, 5, 7));
    prog.push_back(a_cmp(5, 6));
    prog.push_back(a_br(CF_NE, L1 - prog.size()));
    prog.push_back(a_qwait(20));
    // 3. comprehensive feedback control, 4 rounds
    prog.push_back(a_ldi(0, 1));
    prog.push_back(a_ldi(8, 0));
    prog.push_back(a_ldi(10, 4));
    L2 = prog.size();
    prog.push_back(a_bundle(1, OPC_MEAS, 1, 0, 0));
    prog.push_back(a_qwait(30));
    prog.push_back(a_fmr(1, 1));
    prog.push_back(a_st(1, 8, 400));
    prog.push_back(a_cmp(1, 0));
    BR_EQ = prog.size();
    prog.push_back(a_br(CF_EQ, 3));                    // to eq_path
    prog.push_back(a_bundle(1, OPC_X, 0, 0, 0));       // result 0
    prog.push_back(a_br(CF_ALWAYS, 2));                // to next
    prog.push_back(a_bundle(1, OPC_Y, 0, 0, 0));       // eq_path: result 1
    prog.push_back(a_r(OP_ADD, 8, 8, 7));              // next
    prog.push_back(a_cmp(8, 10));
    prog.push_back(a_br(CF_NE, L2 - prog.size()));
    prog.push_back(a_qwait(20));
    // 4. active qubit reset, twice
    prog.push_back(a_ldi(8, 0));
    prog.push_back(a_ldi(10, 2));
    L3 = prog.size();
    prog.push_back(a_qwait(100));
    prog.push_back(a_bundle(1, OPC_X90, 2, 0, 0));
    prog.push_back(a_bundle(1, OPC_MEAS, 2, 0, 0));
    prog.push_back(a_qwait(50));
    prog.push_back(a_bundle(1, OPC_CX, 2, 0, 0));
    prog.push_back(a_bundle(1, OPC_MEAS, 2, 0, 0));
    prog.push_back(a_qwait(50));
    prog.push_back(a_r(OP_ADD, 8, 8, 7));
    prog.push_back(a_cmp(8, 10));
    prog.push_back(a_br(CF_NE, L3 - prog.size()));
    // 5. CZ, split bundle, QWAITR
    prog.push_back(a_bundle(1, OPC_CZ, 3, 0, 0));
    prog.push_back(a_bundle(2, OPC_X, 0, OPC_Y, 2));
    prog.push_back(a_bundle(0, OPC_X90, 1, 0, 0));
    prog.push_back(a_ldi(9, 77));
    prog.push_back(a_qwaitr(9));
    prog.push_back(a_bundle(0, OPC_X, 0, 0, 0));
    prog.push_back(a_qwait(10));
    prog.push_back(a_stop());
    load_program();

    // mock results: qubit 2 (AllXY, reset 1: 1 then 0, reset 2: 0 then 0)
    s2 = '{0, 1, 0, 0, 0}; u_md.set_script(2, s2);
    s1 = '{0, 1, 0, 1};    u_md.set_script(1, s1);

    // ---------------- expected timeline (relative to the first gate) ----------------
    t0 = 0;
    ev(t0, MW, 0, CW_Y); ev(t0, MW, 2, CW_Y);
    ev(t0 + 1, MW, 0, CW_X90); ev(t0 + 1, MW, 2, CW_X);
    ev(t0 + 2, MEAS, 0, CW_M); ev(t0 + 2, MEAS, 2, CW_M);
    b = t0 + 2 + 50;
    for (int k = 1; k <= NLOOP; k++) begin ev(b + 3*k, MW, 0, CW_X); ev(b + 3*k, MW, 2, CW_Y); end
    b = b + 3*NLOOP + 20;
    for (int k = 0; k < 4; k++) begin
      ev(b + 1, MEAS, 1, CW_M);
      ev(b + 32, MW, 0, s1[k] ? CW_Y : CW_X);
      b = b + 32;
    end
    b = b + 20;
    for (int k = 0; k < 2; k++) begin
      b = b + 100;
      ev(b + 1, MW, 2, CW_X90);
      ev(b + 2, MEAS, 2, CW_M);
      if (k == 0) ev(b + 53, MW, 2, CW_CX);   // result 1: executed; result 0: cancelled
      ev(b + 54, MEAS, 2, CW_M);
      b = b + 104;
    end
    ev(b + 1, FLUX, 2, CW_CZS); ev(b + 1, FLUX, 0, CW_CZT);
    ev(b + 1, FLUX, 3, CW_CZS); ev(b + 1, FLUX, 6, CW_CZT);
    ev(b + 3, MW, 0, CW_X); ev(b + 3, MW, 2, CW_Y); ev(b + 3, MW, 1, CW_X90);
    ev(b + 3 + 77, MW, 0, CW_X);

    // ---------------- run ----------------
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    repeat (100) @(negedge clk);
    tl_start = 1; @(negedge clk); tl_start = 0;
    wait (halted); repeat (20) @(negedge clk); wait (timeline_idle);
    repeat (200) @(negedge clk);

    // ---------------- compare ----------------
    chk("error flag", int'(error), 0);
    chk("underrun flag", int'(underrun), 0);
    chk("number of released operations", got.size(), exp_ev.size());
    if (got.size() > 0) begin
      int base;
      base = got[0].t;
      foreach (exp_ev[i]) begin
        int k; k = -1;
        foreach (got[j]) if (k < 0 && got[j].t - base == exp_ev[i].t && got[j].d == exp_ev[i].d &&
                              got[j].q == exp_ev[i].q && got[j].cw == exp_ev[i].cw) k = j;
        checks++;
        if (k < 0) begin
          failures++;
          $display("FAIL: missing op t=%0d dev=%0d q=%0d cw=%0d", exp_ev[i].t, exp_ev[i].d, exp_ev[i].q, exp_ev[i].cw);
        end
      end
    end
    // results of FMR stored with ST, read by the host
    for (int k = 0; k < 4; k++) begin
      @(negedge clk); dmem_h_addr = 12'(400 + k);
      @(negedge clk); chk("FMR result in data memory", int'(dmem_h_rdata), int'(s1[k]));
    end

    // ---------------- mechanisms ----------------
    chk("SOMQ: Y S7 reached two qubits", int'(got.size() > 1 && got[0].t == got[1].t), 1);
    chk("back-pressure stall happened", int'(n_q_stall > 0), 1);
    chk("FMR stall happened", int'(n_fmr_stall > 0), 1);
    chk("fast conditional cancel happened", int'(n_cancel > 0), 1);
    $display("mechanisms: q_stall=%0d fmr_stall=%0d cancels=%0d ops=%0d", n_q_stall, n_fmr_stall, n_cancel, got.size());

    // ---------------- second program: conflicting bundle ----------------
    reset_dut();
    prog.delete();
    prog.push_back(a_smis(0, 7'b000_0001));
    prog.push_back(a_smis(7, 7'b000_0101));
    prog.push_back(a_bundle(1, OPC_X, 0, OPC_Y, 7));   // qubit 0 twice
    prog.push_back(a_qwait(5));
    prog.push_back(a_ldi(3, 1));
    prog.push_back(a_stop());
    load_program();
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    repeat (50) @(negedge clk);
    chk("conflict raises error", int'(error), 1);
    chk("conflict stops the processor", int'(halted), 1);

    // ---------------- third program: feedback latency ----------------
    // CFC: MEASZ, QWAIT 1, FMR, CMP, BR, Y. The Y is issued only after the
    // result is back, so its point is already late: it fires at once and
    // sets underrun. FCE: C_X scheduled to coincide with the result.
    reset_dut();
    got.delete(); foreach (res_t[q]) res_t[q].delete();
    s1 = '{1}; u_md.set_script(1, s1);
    s2 = '{1}; u_md.set_script(2, s2);
    prog.delete();
    prog.push_back(a_smis(0, 7'b000_0001));
    prog.push_back(a_smis(1, 7'b000_0010));
    prog.push_back(a_smis(2, 7'b000_0100));
    prog.push_back(a_ldi(0, 1));
    prog.push_back(a_qwait(100));
    prog.push_back(a_bundle(1, OPC_MEAS, 1, 0, 0));
    prog.push_back(a_qwait(1));
    prog.push_back(a_fmr(1, 1));
    prog.push_back(a_cmp(1, 0));
    prog.push_back(a_br(CF_EQ, 3));
    prog.push_back(a_bundle(1, OPC_X, 0, 0, 0));
    prog.push_back(a_br(CF_ALWAYS, 2));
    prog.push_back(a_bundle(1, OPC_Y, 0, 0, 0));
    prog.push_back(a_qwait(200));
    prog.push_back(a_bundle(1, OPC_MEAS, 2, 0, 0));
    prog.push_back(a_qwait(FCE_WAIT));
    prog.push_back(a_bundle(0, OPC_CX, 2, 0, 0));
    prog.push_back(a_qwait(5));
    prog.push_back(a_stop());
    load_program();
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    repeat (20) @(negedge clk);
    tl_start = 1; @(negedge clk); tl_start = 0;
    wait (halted); repeat (20) @(negedge clk); wait (timeline_idle);
    repeat (50) @(negedge clk);
    begin
      int ty, tcx;
      ty = -1; tcx = -1;
      foreach (got[j]) begin
        if (got[j].d == MW && got[j].q == 0) ty = (got[j].cw == CW_Y) ? got[j].t : -2;
        if (got[j].d == MW && got[j].q == 2 && got[j].cw == CW_CX) tcx = got[j].t;
      end
      chk("CFC: branch on result 1 gave Y", int'(ty >= 0), 1);
      chk("FCE: C_X executed after result 1", int'(tcx >= 0), 1);
      chk("late CFC operation raised underrun", int'(underrun), 1);
      chk("two results returned", int'(res_t[1].size() == 1 && res_t[2].size() == 1), 1);
      if (ty >= 0 && tcx >= 0 && res_t[1].size() == 1 && res_t[2].size() == 1) begin
        $display("feedback latency: CFC %0d ns, fast conditional execution %0d ns",
                 20 * (ty - res_t[1][0]), 20 * (tcx - res_t[2][0]));
        chk("FCE latency is one 20 ns cycle", tcx - res_t[2][0], 1);
        chk("CFC latency within 20 cycles", int'(ty - res_t[1][0] > 1 && ty - res_t[1][0] <= 20), 1);
      end
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
