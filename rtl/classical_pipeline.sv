// classical_pipeline: fetch unit and executor of the auxiliary classical
// eQASM instructions.
//
// It keeps the program counter, a file of 32 general purpose 32-bit registers
// and the comparison flags. Every instruction is fetched from the instruction
// memory and handled here in program order: classical instructions (CMP, BR,
// FBR, LDI, LDUI, LD, ST, FMR, AND, OR, XOR, NOT, ADD, SUB, NOP, STOP) are
// executed, quantum instructions (SMIS, SMIT, QWAIT, QWAITR and quantum
// bundles) are handed to the quantum pipeline together with the value of the
// GPR named in the Rs field (used by QWAITR).
//
// Timing: two stages. The fetch address is chosen combinationally from the
// instruction being executed; the memory returns the word one clock later,
// so straight-line code and taken branches run at one instruction per clock.
// LD costs one extra clock (synchronous data memory). The pipeline stalls,
// holding the current instruction, when
//   * a quantum instruction meets q_ready = 0 (timing/event queues nearly full),
//   * FMR Rd, Qi finds Qi invalid (pending measurements, counter Ci != 0) or a
//     quantum instruction is still inside the quantum front end, where it may
//     yet raise Ci,
// It stops for good on STOP (after passing STOP to the quantum pipeline so
// the last timing point is flushed) and when the quantum pipeline reports an
// error.
//
// From the paper: the instruction list and semantics (LDI sign-extends a
// 20-bit immediate, LDUI = Imm[14:0]::Rs[16:0], BR jumps to PC+Offset when
// the selected flag is 1, CMP sets all flags at once, FMR waits for Qi to be
// valid), the 32-bit width, the 5-bit Rs field of QWAITR. The opcodes, the
// other field positions, the number of GPRs (32, matching the 5-bit fields),
// the set of comparison flags (the names of the paper's assembler) and the
// pipeline depth are choices of this design.
module classical_pipeline
  import eqasm_pkg::*;
#(
  parameter int IMEM_AW = 15,
  parameter int DMEM_AW = 12
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  // instruction memory
  output logic [IMEM_AW-1:0] imem_addr,
  input  logic [31:0]        imem_rdata,
  // data memory
  output logic               dmem_we,
  output logic [DMEM_AW-1:0] dmem_addr,
  output logic [31:0]        dmem_wdata,
  input  logic [31:0]        dmem_rdata,
  // quantum pipeline
  output logic               q_valid,
  output logic [31:0]        q_instr,
  output logic [31:0]        q_rs_val,
  input  logic               q_ready,
  input  logic               q_busy,
  input  logic [NQ-1:0]      meas_valid,
  input  logic [NQ-1:0]      meas_value,
  input  logic               q_error,
  // status
  output logic               running,
  output logic               halted,
  output logic [IMEM_AW-1:0] pc,
  output logic               fmr_stall,
  output logic               q_stall
);
  logic [31:0]        gpr [NGPR];
  logic [11:0]        flags;
  logic [IMEM_AW-1:0] pc_q;
  logic               f_valid;
  logic               ld_wait;

  logic [31:0] ir;
  logic [2:0]  qi;       // FMR: qubit index in bits [2:0] of the Qi field
  logic        qi_valid;
  assign ir = imem_rdata;
  assign qi = ir[2:0];
  assign qi_valid = (int'(qi) < NQ) ? meas_valid[qi] : 1'b1;

  logic        is_bundle;
  opcode_e     opc;
  logic [4:0]  rd, rs, rt;
  logic [31:0] rs_v, rt_v;
  assign is_bundle = ir[31];
  assign opc       = opcode_e'(ir[30:25]);
  assign rd        = ir[24:20];
  assign rs        = ir[19:15];
  assign rt        = ir[14:10];
  assign rs_v      = gpr[rs];
  assign rt_v      = gpr[rt];

  logic is_quantum;
  assign is_quantum = is_bundle || opc == OP_SMIS || opc == OP_SMIT ||
                      opc == OP_QWAIT || opc == OP_QWAITR;

  // Comparison of Rs and Rt: all flags at once.
  function automatic logic [11:0] compare(input logic [31:0] a, input logic [31:0] b);
    logic [11:0] f;
    f = '0;
    f[CF_ALWAYS] = 1'b1;
    f[CF_NEVER]  = 1'b0;
    f[CF_EQ]  = a == b;
    f[CF_NE]  = a != b;
    f[CF_LT]  = $signed(a) <  $signed(b);
    f[CF_LE]  = $signed(a) <= $signed(b);
    f[CF_GT]  = $signed(a) >  $signed(b);
    f[CF_GE]  = $signed(a) >= $signed(b);
    f[CF_LTU] = a <  b;
    f[CF_LEU] = a <= b;
    f[CF_GTU] = a >  b;
    f[CF_GEU] = a >= b;
    return f;
  endfunction

  logic               exec;      // an instruction is being executed this cycle
  logic               stall;
  logic               take_br;
  logic [IMEM_AW-1:0] next_pc;
  logic               wr_en;
  logic [31:0]        wr_val;
  logic               fmr_block;
  logic [31:0]        ls_addr;

  assign exec      = running && f_valid && !q_error;
  assign fmr_block = q_busy || q_valid || !qi_valid;
  assign ls_addr   = rt_v + {{22{ir[9]}}, ir[9:0]};

  always_comb begin
    stall     = 1'b0;
    take_br   = 1'b0;
    wr_en     = 1'b0;
    wr_val    = '0;
    fmr_stall = 1'b0;
    q_stall   = 1'b0;
    if (exec) begin
      if (is_quantum || (!is_bundle && opc == OP_STOP)) begin
        if (!q_ready) begin stall = 1'b1; q_stall = 1'b1; end
      end else begin
        unique case (opc)
          OP_ADD:  begin wr_en = 1'b1; wr_val = rs_v + rt_v; end
          OP_SUB:  begin wr_en = 1'b1; wr_val = rs_v - rt_v; end
          OP_AND:  begin wr_en = 1'b1; wr_val = rs_v & rt_v; end
          OP_OR:   begin wr_en = 1'b1; wr_val = rs_v | rt_v; end
          OP_XOR:  begin wr_en = 1'b1; wr_val = rs_v ^ rt_v; end
          OP_NOT:  begin wr_en = 1'b1; wr_val = ~rt_v; end
          OP_FBR:  begin wr_en = 1'b1; wr_val = {31'b0, flags[ir[3:0]]}; end
          OP_LDI:  begin wr_en = 1'b1; wr_val = {{12{ir[19]}}, ir[19:0]}; end
          OP_LDUI: begin wr_en = 1'b1; wr_val = {ir[14:0], rs_v[16:0]}; end
          OP_LD:   begin
            if (!ld_wait) stall = 1'b1;
            else begin wr_en = 1'b1; wr_val = dmem_rdata; end
          end
          OP_FMR:  begin
            if (fmr_block) begin stall = 1'b1; fmr_stall = 1'b1; end
            else begin wr_en = 1'b1; wr_val = {31'b0, ((int'(qi) < NQ) ? meas_value[qi] : 1'b0)}; end
          end
          OP_BR:   take_br = flags[ir[24:21]];
          default: ;
        endcase
      end
    end
  end

  always_comb begin
    if (take_br) next_pc = pc_q + IMEM_AW'($signed(ir[20:0]));
    else         next_pc = pc_q + 1'b1;
    if (!running) imem_addr = '0;
    else if (!f_valid || stall) imem_addr = pc_q;
    else         imem_addr = next_pc;
  end

  assign dmem_we    = exec && !is_bundle && opc == OP_ST;
  assign dmem_addr  = DMEM_AW'(ls_addr);
  assign dmem_wdata = rs_v;
  assign pc         = pc_q;

  logic stop_now;
  assign stop_now = exec && !stall && !is_bundle && opc == OP_STOP;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running  <= 1'b0;
      halted   <= 1'b0;
      pc_q     <= '0;
      f_valid  <= 1'b0;
      ld_wait  <= 1'b0;
      flags    <= 12'b1;
      q_valid  <= 1'b0;
      q_instr  <= '0;
      q_rs_val <= '0;
    end else begin
      q_valid <= 1'b0;
      if (!running && !halted && start) begin
        running <= 1'b1;
        pc_q    <= '0;
        f_valid <= 1'b1;
      end else if (running && q_error) begin
        running <= 1'b0;
        halted  <= 1'b1;
      end else if (exec) begin
        ld_wait <= !is_bundle && opc == OP_LD && !ld_wait;
        if (!stall) begin
          pc_q <= next_pc;
          if (!is_bundle && opc == OP_CMP) flags <= compare(rs_v, rt_v);
          if (is_quantum || stop_now) begin
            q_valid  <= 1'b1;
            q_instr  <= ir;
            q_rs_val <= rs_v;
          end
          if (stop_now) begin
            running <= 1'b0;
            halted  <= 1'b1;
          end
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (wr_en && !stall) gpr[rd] <= wr_val;
  end

endmodule
