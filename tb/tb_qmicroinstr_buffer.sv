// tb_qmicroinstr_buffer: checks OpSel generation and micro-operation
// selection. The reference is built independently of the RTL's loop: a
// hand-written list of the edges at every qubit of the seven-qubit chip
// (qubit 0: target of pairs 0 and 9, source of pairs 1 and 8, as the
// OpSel_0 formula states; the other qubits by the same pattern). Tests every
// single-bit mask, random valid two-qubit masks and random S masks.
module tb_qmicroinstr_buffer;
  import eqasm_pkg::*;
  logic valid = 0;
  qcs_entry_t entry = '0;
  logic [NQ-1:0] smask = '0;
  logic [NE-1:0] tmask = '0;
  logic [NQ-1:0][1:0] opsel;
  uop_t [NQ-1:0] uop;
  logic bad_mask;
  int checks = 0, failures = 0;

  qmicroinstr_buffer dut (.*);

  // pairs where qubit q is the target / the source (written out by hand)
  logic [NE-1:0] tgt_of [NQ];
  logic [NE-1:0] src_of [NQ];
  initial begin
    tgt_of[0] = (1 << 0) | (1 << 9);   src_of[0] = (1 << 1) | (1 << 8);
    tgt_of[1] = (1 << 2) | (1 << 11);  src_of[1] = (1 << 3) | (1 << 10);
    tgt_of[2] = (1 << 8) | (1 << 12);  src_of[2] = (1 << 0) | (1 << 4);
    tgt_of[3] = (1 << 1) | (1 << 5) | (1 << 10) | (1 << 14);
    src_of[3] = (1 << 2) | (1 << 6) | (1 << 9) | (1 << 13);
    tgt_of[4] = (1 << 3) | (1 << 7);   src_of[4] = (1 << 11) | (1 << 15);
    tgt_of[5] = (1 << 4) | (1 << 13);  src_of[5] = (1 << 5) | (1 << 12);
    tgt_of[6] = (1 << 6) | (1 << 15);  src_of[6] = (1 << 7) | (1 << 14);
  end

  uop_t ua, ub;
  task automatic check_now(input string what);
    #1;
    for (int q = 0; q < NQ; q++) begin
      logic [1:0] es; uop_t eu;
      if (!valid) es = 2'b00;
      else if (!entry.two_qubit) es = smask[q] ? 2'b11 : 2'b00;
      else es = {|(tmask & tgt_of[q]), |(tmask & src_of[q])};
      eu = (es == 2'b11 && !entry.two_qubit) ? ua : (es == 2'b01) ? ua : (es == 2'b10) ? ub : '0;
      checks++;
      if (opsel[q] !== es || uop[q] !== eu) begin
        failures++; $display("FAIL %s q%0d: opsel %b/%b uop %h/%h (t=%h s=%h)", what, q, opsel[q], es, uop[q], eu, tmask, smask);
      end
    end
  endtask

  initial begin
    ua = '{dev: DEV_MW, cw: 8'h11, cond: EF_LAST1};
    ub = '{dev: DEV_FLUX, cw: 8'h22, cond: EF_ALWAYS};
    #1;
    // single-qubit operations
    entry = '{two_qubit: 1'b0, uop_a: ua, uop_b: '0};
    valid = 1;
    for (int i = 0; i < 128; i++) begin smask = 7'(i); check_now("single"); end
    valid = 0; smask = 7'h7F; check_now("invalid input");
    // two-qubit operations: each single pair
    valid = 1; smask = '0;
    entry = '{two_qubit: 1'b1, uop_a: ua, uop_b: ub};
    for (int e = 0; e < NE; e++) begin tmask = NE'(1) << e; check_now("pair"); end
    // the paper's example for qubit 0
    tmask = 16'h0001; #1; checks++;
    if (opsel[0] !== 2'b10 || opsel[2] !== 2'b01) begin failures++; $display("FAIL pair0 = (2,0)"); end
    // valid combinations: disjoint pairs
    tmask = (1 << 0) | (1 << 6) | (1 << 11); check_now("combo1");
    tmask = (1 << 8) | (1 << 5) | (1 << 7); check_now("combo2");
    tmask = (1 << 4) | (1 << 2) | (1 << 15); check_now("combo3");
    // invalid: qubit 3 as source and target
    tmask = (1 << 1) | (1 << 2); #1; checks++;
    if (!bad_mask) begin failures++; $display("FAIL: bad mask not flagged"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
