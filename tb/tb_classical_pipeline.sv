// tb_classical_pipeline: runs a small eQASM program on the classical
// pipeline with memory models. The program exercises every classical
// instruction (results stored with ST and checked in the data memory
// model against values computed here), a taken and a not-taken branch, a
// loop, LD after ST, QWAITR forwarding its register value, FMR stalling
// until Qi becomes valid, back-pressure from q_ready, and STOP. It also
// checks that back-to-back quantum instructions issue one per clock.
module tb_classical_pipeline;
  import eqasm_pkg::*;
  `include "eqasm_asm.svh"
  logic clk = 0, rst_n = 1, start = 0;
  logic [14:0] imem_addr;
  logic [31:0] imem_rdata;
  logic dmem_we;
  logic [11:0] dmem_addr;
  logic [31:0] dmem_wdata, dmem_rdata;
  logic q_valid, q_ready = 1, q_busy = 0, q_error = 0;
  logic [31:0] q_instr, q_rs_val;
  logic [NQ-1:0] meas_valid = '1, meas_value = '0;
  logic running, halted, fmr_stall, q_stall;
  logic [13:0] pc;
  int checks = 0, failures = 0;

  classical_pipeline dut (.*);
  always #5 clk = ~clk;

  logic [31:0] prog [64];
  logic [31:0] dm [4096];
  always_ff @(posedge clk) begin
    imem_rdata <= prog[imem_addr[5:0]];
    if (dmem_we) dm[dmem_addr] <= dmem_wdata;
    dmem_rdata <= dm[dmem_addr];
  end

  task automatic chk(input string what, input logic [31:0] got, input logic [31:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %h exp %h", what, got, exp); end
  endtask

  // record quantum instructions
  logic [31:0] qi_log[$], qv_log[$];
  int qt_log[$];
  int cyc = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (q_valid) begin qi_log.push_back(q_instr); qv_log.push_back(q_rs_val); qt_log.push_back(cyc); end
  end

  int n_fmr_stall = 0, n_q_stall = 0;
  always @(posedge clk) begin
    if (fmr_stall) n_fmr_stall++;
    if (q_stall) n_q_stall++;
  end

  initial begin
    int p;
    for (int i = 0; i < 64; i++) prog[i] = a_nop();
    for (int i = 0; i < 4096; i++) dm[i] = '0;
    p = 0;
    prog[p++] = a_ldi(0, 0);
    prog[p++] = a_ldi(1, 5);
    prog[p++] = a_ldi(2, -3);
    prog[p++] = a_r(OP_ADD, 3, 1, 2);        // 2
    prog[p++] = a_r(OP_SUB, 4, 1, 2);        // 8
    prog[p++] = a_r(OP_AND, 5, 1, 2);
    prog[p++] = a_r(OP_OR, 6, 1, 2);
    prog[p++] = a_r(OP_XOR, 7, 1, 2);
    prog[p++] = a_r(OP_NOT, 8, 0, 1);
    prog[p++] = a_ldui(9, 15'h1234, 2);
    prog[p++] = a_cmp(1, 2);
    prog[p++] = a_fbr(CF_GT, 10);
    prog[p++] = a_fbr(CF_LTU, 11);
    prog[p++] = a_fbr(CF_EQ, 12);
    prog[p++] = a_br(CF_EQ, 5);              // not taken
    prog[p++] = a_br(CF_ALWAYS, 2);          // taken, skips next
    prog[p++] = a_ldi(13, 99);               // skipped
    prog[p++] = a_ldi(13, 0);                // loop counter
    prog[p++] = a_ldi(14, 3);
    prog[p++] = a_ldi(15, 1);
    prog[p++] = a_r(OP_ADD, 13, 13, 15);     // loop body
    prog[p++] = a_cmp(13, 14);
    prog[p++] = a_br(CF_NE, -2);
    prog[p++] = a_st(3, 0, 100);
    prog[p++] = a_ld(16, 0, 100);            // 2
    prog[p++] = a_smis(2, 7'h04);
    prog[p++] = a_qwaitr(14);                // rs value 3
    prog[p++] = a_bundle(1, 3, 2, 0, 0);
    prog[p++] = a_fmr(17, 2);                // stalls until Q2 valid
    prog[p++] = a_bundle(1, 3, 2, 0, 0);     // q_ready low here for a while
    prog[p++] = a_bundle(0, 4, 2, 0, 0);
    for (int r = 1; r <= 17; r++) prog[p++] = a_st(r, 0, 200 + r);
    prog[p++] = a_stop();
    prog[p++] = a_ldi(18, 1);                // never executed
    prog[p++] = a_st(18, 0, 300);

    #1 rst_n = 0; repeat (2) @(negedge clk); rst_n = 1;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    // FMR: make Q2 invalid once the QWAITR has issued
    // and hold q_ready low for 30 clocks once the first bundle has issued
    fork
      begin
        wait (qi_log.size() == 2); @(negedge clk); meas_valid[2] = 0;
        repeat (20) @(negedge clk); meas_value[2] = 1; meas_valid[2] = 1;
      end
      begin
        wait (qi_log.size() == 3); @(negedge clk); q_ready = 0;
        repeat (30) @(negedge clk); q_ready = 1;
      end
    join
    wait (halted);
    repeat (5) @(negedge clk);
    chk("r1", dm[201], 5);
    chk("r2", dm[202], 32'hFFFF_FFFD);
    chk("ADD", dm[203], 2);
    chk("SUB", dm[204], 8);
    chk("AND", dm[205], 32'h5 & 32'hFFFF_FFFD);
    chk("OR", dm[206], 32'h5 | 32'hFFFF_FFFD);
    chk("XOR", dm[207], 32'h5 ^ 32'hFFFF_FFFD);
    chk("NOT", dm[208], ~32'h5);
    chk("LDUI", dm[209], {15'h1234, 17'h1FFFD});
    chk("FBR GT", dm[210], 1);
    chk("FBR LTU", dm[211], 1);
    chk("FBR EQ", dm[212], 0);
    chk("loop", dm[213], 3);
    chk("LD", dm[216], 2);
    chk("FMR", dm[217], 1);
    chk("after STOP", dm[300], 0);
    chk("quantum count", qi_log.size(), 6);
    if (qi_log.size() == 6) begin
      chk("SMIS fwd", qi_log[0], a_smis(2, 7'h04));
      chk("QWAITR value", qv_log[1], 3);
      chk("bundle fwd", qi_log[2], a_bundle(1, 3, 2, 0, 0));
      chk("STOP fwd", qi_log[5], a_stop());
      chk("issue rate", qt_log[1] - qt_log[0], 1);
      chk("issue rate 2", qt_log[2] - qt_log[1], 1);
      chk("back-pressure delay", (qt_log[3] - qt_log[2]) >= 30, 1);
    end
    chk("FMR stalled", n_fmr_stall >= 19, 1);
    chk("q stalled", n_q_stall >= 5, 1);
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
