// quantum_instr_decoder: first stage of the quantum pipeline.
//
// Takes one quantum instruction per clock from the classical pipeline and
// splits it into the record that travels down the quantum pipeline:
//   SMIS Sd, mask   -> write single-qubit target register Sd (7-bit mask)
//   SMIT Td, mask   -> write two-qubit target register Td (16-bit mask)
//   QWAIT Imm       -> waiting interval = Imm[19:0]
//   QWAITR Rs       -> waiting interval = Rs[19:0] (value comes with the instr.)
//   bundle          -> waiting interval = PI, plus two (q_opcode, Si/Ti) slots
//   STOP            -> flush request for the last timing point
// Bundle format (paper): [31]=1, [30:22] q_opcode 0, [21:17] Si/Ti 0,
// [16:8] q_opcode 1, [7:3] Si/Ti 1, [2:0] PI. Single format (paper): [31]=0,
// [30:25] opcode, SMIS/SMIT Sd/Td in [24:20], mask in [6:0] / [15:0], QWAIT
// Imm in [19:0], QWAITR Rs in [19:15]. The opcode numbers are this design's.
// Output is registered: one clock latency, no back-pressure (the classical
// pipeline only issues when the queues behind have room).
module quantum_instr_decoder
  import eqasm_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  logic [31:0] instr,
  input  logic [31:0] rs_val,
  output logic        out_valid,
  output qdec_t       out
);
  qdec_t d;

  always_comb begin
    d = '0;
    if (instr[31]) begin
      d.bundle      = 1'b1;
      d.wait_op     = 1'b1;
      d.interval    = WAIT_W'(instr[2:0]);
      d.slot[0].opc = instr[30:22];
      d.slot[0].reg_addr = instr[21:17];
      d.slot[1].opc = instr[16:8];
      d.slot[1].reg_addr = instr[7:3];
    end else begin
      unique case (opcode_e'(instr[30:25]))
        OP_SMIS: begin
          d.smis = 1'b1;
          d.treg = instr[24:20];
          d.mask = NE'(instr[NQ-1:0]);
        end
        OP_SMIT: begin
          d.smit = 1'b1;
          d.treg = instr[24:20];
          d.mask = instr[NE-1:0];
        end
        OP_QWAIT: begin
          d.wait_op  = 1'b1;
          d.interval = instr[WAIT_W-1:0];
        end
        OP_QWAITR: begin
          d.wait_op  = 1'b1;
          d.interval = rs_val[WAIT_W-1:0];
        end
        OP_STOP: d.stop = 1'b1;
        default: ;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out       <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) out <= d;
    end
  end
endmodule
