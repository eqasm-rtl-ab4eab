// eqasm_asm.svh: instruction encoders used by the testbenches, a tiny
// assembler for the 32-bit eQASM instantiation of this design. Included
// inside a testbench module that imports eqasm_pkg.
// Single format: [31]=0, [30:25] opcode, Rd/Sd/Td/cond [24:20] (BR: cond
// [24:21], offset [20:0]), Rs [19:15], Rt [14:10], immediates low.
// Bundle: [31]=1, q_opcode0 [30:22], Si/Ti0 [21:17], q_opcode1 [16:8],
// Si/Ti1 [7:3], PI [2:0].

function automatic logic [31:0] a_r(input opcode_e op, input int rd, input int rs, input int rt);
  return {1'b0, op, 5'(rd), 5'(rs), 5'(rt), 10'd0};
endfunction
function automatic logic [31:0] a_ldi(input int rd, input int imm);
  return {1'b0, OP_LDI, 5'(rd), 20'(imm)};
endfunction
function automatic logic [31:0] a_ldui(input int rd, input int imm, input int rs);
  return {1'b0, OP_LDUI, 5'(rd), 5'(rs), 15'(imm)};
endfunction
function automatic logic [31:0] a_ld(input int rd, input int rt, input int imm);
  return {1'b0, OP_LD, 5'(rd), 5'd0, 5'(rt), 10'(imm)};
endfunction
function automatic logic [31:0] a_st(input int rs, input int rt, input int imm);
  return {1'b0, OP_ST, 5'd0, 5'(rs), 5'(rt), 10'(imm)};
endfunction
function automatic logic [31:0] a_cmp(input int rs, input int rt);
  return {1'b0, OP_CMP, 5'd0, 5'(rs), 5'(rt), 10'd0};
endfunction
function automatic logic [31:0] a_br(input cmp_flag_e f, input int off);
  return {1'b0, OP_BR, f, 21'(off)};
endfunction
function automatic logic [31:0] a_fbr(input cmp_flag_e f, input int rd);
  return {1'b0, OP_FBR, 5'(rd), 16'd0, f};
endfunction
function automatic logic [31:0] a_fmr(input int rd, input int qi);
  return {1'b0, OP_FMR, 5'(rd), 15'd0, 5'(qi)};
endfunction
function automatic logic [31:0] a_smis(input int sd, input logic [6:0] mask);
  return {1'b0, OP_SMIS, 5'(sd), 13'd0, mask};
endfunction
function automatic logic [31:0] a_smit(input int td, input logic [15:0] mask);
  return {1'b0, OP_SMIT, 5'(td), 4'd0, mask};
endfunction
function automatic logic [31:0] a_qwait(input int imm);
  return {1'b0, OP_QWAIT, 5'd0, 20'(imm)};
endfunction
function automatic logic [31:0] a_qwaitr(input int rs);
  return {1'b0, OP_QWAITR, 5'd0, 5'(rs), 15'd0};
endfunction
function automatic logic [31:0] a_bundle(input int pi, input int opc0, input int r0,
                                          input int opc1, input int r1);
  return {1'b1, 9'(opc0), 5'(r0), 9'(opc1), 5'(r1), 3'(pi)};
endfunction
function automatic logic [31:0] a_nop();
  return {1'b0, OP_NOP, 25'd0};
endfunction
function automatic logic [31:0] a_stop();
  return {1'b0, OP_STOP, 25'd0};
endfunction
