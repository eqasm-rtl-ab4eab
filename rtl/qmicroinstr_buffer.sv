// qmicroinstr_buffer: resolves the mask-based qubit address of one
// quantum operation into one micro-operation per qubit.
//
// Step 1: the mask is turned into seven 2-bit selection signals OpSel_i:
//   single-qubit operation: OpSel_i = 11 (mu_op_s) if bit i of Si is set,
//                           else 00;
//   two-qubit operation:    OpSel_i = {OR of Ti[e] over pairs e whose target
//                           is qubit i, OR of Ti[e] over pairs e whose source
//                           is qubit i}, i.e. 01 = mu_op_src, 10 = mu_op_tgt.
//   For qubit 0 this gives OpSel_0 = (Ti[0] | Ti[9]) :: (Ti[1] | Ti[8]).
// Step 2: every qubit independently takes none, mu_op_s, mu_op_src or
// mu_op_tgt. Purely combinational. OpSel = 11 on a two-qubit operation
// (qubit both source and target, an invalid mask the assembler must reject)
// selects nothing and raises bad_mask.
// All of this follows the paper; the pair table is in eqasm_pkg.
module qmicroinstr_buffer
  import eqasm_pkg::*;
(
  input  logic                valid,
  input  qcs_entry_t          entry,
  input  logic [NQ-1:0]       smask,
  input  logic [NE-1:0]       tmask,
  output logic [NQ-1:0][1:0]  opsel,
  output uop_t [NQ-1:0]       uop,
  output logic                bad_mask
);
  always_comb begin
    bad_mask = 1'b0;
    for (int q = 0; q < NQ; q++) begin
      opsel[q] = OPSEL_NONE;
      if (valid) begin
        if (!entry.two_qubit) begin
          opsel[q] = smask[q] ? OPSEL_S : OPSEL_NONE;
        end else begin
          for (int e = 0; e < NE; e++) begin
            if (PAIR_TGT[e] == q) opsel[q][1] = opsel[q][1] | tmask[e];
            if (PAIR_SRC[e] == q) opsel[q][0] = opsel[q][0] | tmask[e];
          end
        end
      end
      unique case (opsel[q])
        OPSEL_S:   uop[q] = entry.two_qubit ? '0 : entry.uop_a;
        OPSEL_SRC: uop[q] = entry.uop_a;
        OPSEL_TGT: uop[q] = entry.uop_b;
        default:   uop[q] = '0;
      endcase
      if (valid && entry.two_qubit && opsel[q] == OPSEL_S) bad_mask = 1'b1;
    end
  end
endmodule
