// tb_microcode_unit: fills the Q control store with entries computed from
// the opcode, reads them back in random order with one clock of latency,
// and checks that q_opcode 0 always decodes to QNOP.
module tb_microcode_unit;
  import eqasm_pkg::*;
  logic clk = 0, cfg_we = 0;
  logic [QOPC_W-1:0] cfg_addr = '0, opc = '0;
  qcs_entry_t cfg_data = '0, entry;
  int checks = 0, failures = 0;

  microcode_unit dut (.*);
  always #5 clk = ~clk;

  function automatic qcs_entry_t ent(input int a);
    qcs_entry_t e;
    e.two_qubit = a[0];
    e.uop_a.dev = dev_type_e'((a % 3) + 1);
    e.uop_a.cw = CW_W'(a * 7 + 3);
    e.uop_a.cond = exec_flag_e'(a >> 2);
    e.uop_b.dev = a[0] ? DEV_FLUX : DEV_NONE;
    e.uop_b.cw = a[0] ? CW_W'(a * 5 + 1) : '0;
    e.uop_b.cond = EF_ALWAYS;
    return e;
  endfunction

  initial begin
    for (int a = 0; a < 512; a++) begin
      @(negedge clk); cfg_we = 1; cfg_addr = QOPC_W'(a); cfg_data = ent(a);
    end
    @(negedge clk); cfg_we = 0;
    for (int i = 0; i < 600; i++) begin
      int a;
      a = (i < 5) ? i : $urandom_range(0, 511);
      @(negedge clk); opc = QOPC_W'(a);
      @(negedge clk);
      checks++;
      if (entry !== ((a == 0) ? qcs_entry_t'('0) : ent(a))) begin
        failures++; $display("FAIL opcode %0d: %h", a, entry);
      end
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
