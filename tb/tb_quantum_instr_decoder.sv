// tb_quantum_instr_decoder: checks the field split of every quantum
// instruction format (SMIS, SMIT, QWAIT, QWAITR, bundle, STOP) and that a
// non-quantum word yields an empty record, with one clock of latency.
module tb_quantum_instr_decoder;
  import eqasm_pkg::*;
  `include "eqasm_asm.svh"
  logic clk = 0, rst_n = 1, in_valid = 0, out_valid;
  logic [31:0] instr = '0, rs_val = '0;
  qdec_t out, exp;
  int checks = 0, failures = 0;

  quantum_instr_decoder dut (.*);
  always #5 clk = ~clk;

  task automatic send(input logic [31:0] w, input logic [31:0] r, input qdec_t e);
    @(negedge clk); in_valid = 1; instr = w; rs_val = r;
    @(negedge clk); in_valid = 0;
    checks++;
    if (!out_valid || out !== e) begin
      failures++; $display("FAIL instr %h: valid=%b got %h exp %h", w, out_valid, out, e);
    end
  endtask

  initial begin
    #1 rst_n = 0; repeat (2) @(negedge clk); rst_n = 1;
    exp = '0; exp.smis = 1; exp.treg = 5; exp.mask = 16'h0055;
    send(a_smis(5, 7'h55), 0, exp);
    exp = '0; exp.smit = 1; exp.treg = 31; exp.mask = 16'hC3A5;
    send(a_smit(31, 16'hC3A5), 0, exp);
    exp = '0; exp.wait_op = 1; exp.interval = 20'd10000;
    send(a_qwait(10000), 0, exp);
    exp = '0; exp.wait_op = 1; exp.interval = 20'hBCDEF;
    send(a_qwaitr(7), 32'h123B_CDEF, exp);
    exp = '0; exp.wait_op = 1; exp.bundle = 1; exp.interval = 20'd5;
    exp.slot[0].opc = 9'h1A3; exp.slot[0].reg_addr = 5'd17;
    exp.slot[1].opc = 9'h05C; exp.slot[1].reg_addr = 5'd2;
    send(a_bundle(5, 9'h1A3, 17, 9'h05C, 2), 0, exp);
    exp = '0; exp.wait_op = 1; exp.bundle = 1; exp.interval = 20'd0;
    exp.slot[0].opc = 9'h001; exp.slot[0].reg_addr = 5'd0;
    send(a_bundle(0, 1, 0, 0, 0), 0, exp);
    exp = '0; exp.stop = 1;
    send(a_stop(), 0, exp);
    exp = '0;
    send(a_r(OP_ADD, 1, 2, 3), 32'hFFFF_FFFF, exp);
    // no valid output without valid input
    @(negedge clk); checks++;
    if (out_valid) begin failures++; $display("FAIL: spurious out_valid"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
