// eqasm_pkg: constants and types shared by the eQASM processor.
//
// The processor executes a 32-bit instantiation of the eQASM instruction set
// for a seven-qubit superconducting chip with sixteen allowed (directed) qubit
// pairs. This package holds the instruction fields, the chip topology, the
// micro-operation format and the records that travel down the quantum
// pipeline.
//
// From the paper: 7 qubits, 16 allowed pairs, 32 single- and 32 two-qubit
// target registers (5-bit addresses), 7- and 16-bit masks, 9-bit q_opcode,
// 3-bit PI, 20-bit waiting time, the bundle format (bit 31 = 1), the field
// widths of SMIS/SMIT/QWAIT/QWAITR, the OpSel codes, the four execution flags
// and the comparison-flag names used by BR/FBR. Pairs 0, 1, 8 and 9 are fixed
// by the text (pair 0 = (2,0), qubit 0 is the target of 0 and 9 and the
// source of 1 and 8). The coupling of every pair number follows the chip's
// topology drawing (k and k+8 join the same two qubits in opposite
// directions); the direction of the pairs not fixed by the text follows the
// same pattern, a choice of this design.
// Design choices: the opcode numbers of the single-format instructions, the
// field placement of the classical instructions, the codeword width, the
// device-type field of a micro-operation and the timing-label width.
package eqasm_pkg;

  // ---------------- chip instantiation ----------------
  localparam int NQ        = 7;   // physical qubits
  localparam int NE        = 16;  // allowed qubit pairs
  localparam int NSREG     = 32;  // single-qubit target registers
  localparam int NTREG     = 32;  // two-qubit target registers
  localparam int NGPR      = 32;  // general purpose registers
  localparam int NLANE     = 2;   // VLIW width
  localparam int QOPC_W    = 9;   // q_opcode width
  localparam int PI_W      = 3;   // pre_interval width
  localparam int WAIT_W    = 20;  // waiting time width
  localparam int CW_W      = 8;   // codeword width (design choice)
  localparam int LABEL_W   = 8;   // timing label width (design choice)
  localparam int NDEV      = 3;   // device types: microwave, flux, measurement

  // Allowed qubit pairs: source and target qubit of each pair.
  localparam int unsigned PAIR_SRC [NE] = '{2,0,3,1,2,5,3,6, 0,3,1,4,5,3,6,4};
  localparam int unsigned PAIR_TGT [NE] = '{0,3,1,4,5,3,6,4, 2,0,3,1,2,5,3,6};

  // Feedline of each qubit: qubits 0,2,3,5,6 on feedline 0; 1 and 4 on 1.
  localparam logic [NQ-1:0] FEEDLINE1_MASK = 7'b001_0010;

  // ---------------- single-format opcodes (design choice) ----------------
  typedef enum logic [5:0] {
    OP_NOP    = 6'h00,
    OP_STOP   = 6'h01,
    OP_ADD    = 6'h02,
    OP_SUB    = 6'h03,
    OP_AND    = 6'h04,
    OP_OR     = 6'h05,
    OP_XOR    = 6'h06,
    OP_NOT    = 6'h07,
    OP_CMP    = 6'h08,
    OP_BR     = 6'h09,
    OP_FBR    = 6'h0A,
    OP_LDI    = 6'h0B,
    OP_LDUI   = 6'h0C,
    OP_LD     = 6'h0D,
    OP_ST     = 6'h0E,
    OP_FMR    = 6'h0F,
    OP_SMIS   = 6'h20,
    OP_SMIT   = 6'h21,
    OP_QWAIT  = 6'h22,
    OP_QWAITR = 6'h23
  } opcode_e;

  // Comparison flags selected by BR and FBR.
  typedef enum logic [3:0] {
    CF_ALWAYS = 4'd0, CF_NEVER = 4'd1, CF_EQ  = 4'd2, CF_NE  = 4'd3,
    CF_LT     = 4'd4, CF_LE    = 4'd5, CF_GT  = 4'd6, CF_GE  = 4'd7,
    CF_LTU    = 4'd8, CF_LEU   = 4'd9, CF_GTU = 4'd10, CF_GEU = 4'd11
  } cmp_flag_e;

  // ---------------- micro-operations ----------------
  typedef enum logic [1:0] {
    DEV_NONE = 2'd0, DEV_MW = 2'd1, DEV_FLUX = 2'd2, DEV_MEAS = 2'd3
  } dev_type_e;

  // Execution flags (Sec. fast conditional execution).
  typedef enum logic [1:0] {
    EF_ALWAYS = 2'd0,  // '1'
    EF_LAST1  = 2'd1,  // last finished measurement gave |1>
    EF_LAST0  = 2'd2,  // last finished measurement gave |0>
    EF_SAME   = 2'd3   // last two finished measurements agree
  } exec_flag_e;

  typedef struct packed {
    dev_type_e        dev;     // DEV_NONE means no operation
    logic [CW_W-1:0]  cw;      // codeword sent to the device
    exec_flag_e       cond;    // execution flag that gates it
  } uop_t;

  localparam int UOP_W = $bits(uop_t);

  // Q control store entry: one micro-operation for a single-qubit operation,
  // two (source, target) for a two-qubit operation.
  typedef struct packed {
    logic two_qubit;
    uop_t uop_a;   // mu_op_s, or mu_op_src for a two-qubit operation
    uop_t uop_b;   // mu_op_tgt for a two-qubit operation
  } qcs_entry_t;

  // OpSel codes (Table: micro-operation selection signal).
  localparam logic [1:0] OPSEL_NONE = 2'b00;
  localparam logic [1:0] OPSEL_SRC  = 2'b01;
  localparam logic [1:0] OPSEL_TGT  = 2'b10;
  localparam logic [1:0] OPSEL_S    = 2'b11;

  // ---------------- quantum pipeline records ----------------
  typedef struct packed {
    logic [QOPC_W-1:0] opc;
    logic [4:0]        reg_addr;
  } qop_slot_t;

  // Output of the quantum instruction decoder.
  typedef struct packed {
    logic                 smis;      // write single-qubit target register
    logic                 smit;      // write two-qubit target register
    logic [4:0]           treg;      // register address of SMIS/SMIT
    logic [NE-1:0]        mask;      // mask of SMIS (low NQ bits) / SMIT
    logic                 wait_op;   // QWAIT/QWAITR/bundle: has an interval
    logic [WAIT_W-1:0]    interval;  // interval in 20 ns cycles
    logic                 bundle;    // quantum bundle: slots valid
    qop_slot_t [NLANE-1:0] slot;
    logic                 stop;      // program end: flush the timeline
  } qdec_t;

  // Record after the timestamp manager.
  typedef struct packed {
    qdec_t                d;
    logic                 new_point;  // this instruction opened a timing point
    logic [LABEL_W-1:0]   label;      // label of the last timing point
  } qts_t;

  // One timing point handed from operation combination to the distributor.
  typedef struct packed {
    logic [LABEL_W-1:0]   label;
    logic [WAIT_W-1:0]    interval;
    uop_t [NQ-1:0]        uop;
  } tpoint_t;

  // One device operation in an event queue.
  typedef struct packed {
    logic [LABEL_W-1:0]   label;
    logic [CW_W-1:0]      cw;
    exec_flag_e           cond;
  } devop_t;

  // One timing point in the timing queue.
  typedef struct packed {
    logic [LABEL_W-1:0]   label;
    logic [WAIT_W-1:0]    interval;
  } tq_entry_t;

endpackage
