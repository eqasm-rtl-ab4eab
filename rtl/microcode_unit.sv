// microcode_unit: translates a q_opcode into micro-operations.
//
// The Q control store is a 512-entry table indexed by the 9-bit q_opcode and
// written by the host before the program runs (cfg_* port), so the set of
// quantum operations is fixed by configuration, not by the instruction set.
// An entry gives either one micro-operation mu_op_s (single-qubit operation)
// or two, mu_op_src and mu_op_tgt, for the source and target qubit of a
// two-qubit operation. Each micro-operation names a device type, a codeword
// and the execution flag that gates it. q_opcode 0 is the quantum no-op
// (QNOP) whatever the table holds. The read is synchronous: the entry
// appears one clock after the opcode, as from a block RAM.
// From the paper: the lookup-table control store, the 9-bit opcode, the one
// or two micro-operations and the per-micro-operation flag selection. The
// entry layout and the fixed QNOP code are this design's choices.
module microcode_unit
  import eqasm_pkg::*;
(
  input  logic              clk,
  input  logic              cfg_we,
  input  logic [QOPC_W-1:0] cfg_addr,
  input  qcs_entry_t        cfg_data,
  input  logic [QOPC_W-1:0] opc,
  output qcs_entry_t        entry
);
  qcs_entry_t store [2**QOPC_W];
  qcs_entry_t rd;
  logic       nop_q;

  always_ff @(posedge clk) begin
    if (cfg_we) store[cfg_addr] <= cfg_data;
    rd    <= store[opc];
    nop_q <= (opc == '0);
  end

  assign entry = nop_q ? '0 : rd;
endmodule
