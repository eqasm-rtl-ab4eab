// vliw_lane: one VLIW lane of the quantum pipeline.
//
// Each lane handles one quantum-operation slot of a bundle instruction
// (LANE = 0 takes bits [30:17], LANE = 1 bits [16:3]). It contains its own
// copy of the target registers (every SMIS/SMIT writes all lanes), its own
// microcode unit with Q control store, and a microinstruction buffer that
// resolves the mask into one micro-operation per qubit.
// Timing: two clocks. Clock 1 writes the target register (SMIS/SMIT) or
// reads Si/Ti and looks up the q_opcode; clock 2 resolves OpSel and
// registers the seven per-qubit micro-operations. Records that are not
// bundles (QWAIT, STOP, SMIS, SMIT) pass with no micro-operations, so the
// order of records and their timing labels is kept.
// Structure from the paper; the two-clock split is this design's choice.
module vliw_lane
  import eqasm_pkg::*;
#(
  parameter int LANE = 0
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  qts_t              in,
  input  logic              cfg_we,
  input  logic [QOPC_W-1:0] cfg_addr,
  input  qcs_entry_t        cfg_data,
  output logic              out_valid,
  output qts_t              out,
  output uop_t [NQ-1:0]     out_uop,
  output logic              out_bad_mask
);
  qop_slot_t     slot;
  logic [NQ-1:0] s_rd;
  logic [NE-1:0] t_rd;
  assign slot = in.d.slot[LANE];

  target_registers u_treg (
    .clk, .rst_n,
    .s_we   (in_valid && in.d.smis),
    .t_we   (in_valid && in.d.smit),
    .waddr  (in.d.treg),
    .wmask  (in.d.mask),
    .raddr  (slot.reg_addr),
    .s_rdata(s_rd),
    .t_rdata(t_rd)
  );

  qcs_entry_t entry;
  microcode_unit u_mcu (
    .clk, .cfg_we, .cfg_addr, .cfg_data,
    .opc   ((in_valid && in.d.bundle) ? slot.opc : '0),
    .entry (entry)
  );

  // stage 1 registers
  logic          s1_valid;
  qts_t          s1_rec;
  logic [NQ-1:0] s1_smask;
  logic [NE-1:0] s1_tmask;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid <= 1'b0;
      s1_rec   <= '0;
      s1_smask <= '0;
      s1_tmask <= '0;
    end else begin
      s1_valid <= in_valid;
      if (in_valid) begin
        s1_rec   <= in;
        s1_smask <= s_rd;
        s1_tmask <= t_rd;
      end
    end
  end

  uop_t [NQ-1:0]      uop;
  logic [NQ-1:0][1:0] opsel;
  logic               bad;
  qmicroinstr_buffer u_buf (
    .valid   (s1_valid && s1_rec.d.bundle),
    .entry   (entry),
    .smask   (s1_smask),
    .tmask   (s1_tmask),
    .opsel   (opsel),
    .uop     (uop),
    .bad_mask(bad)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid    <= 1'b0;
      out          <= '0;
      out_uop      <= '0;
      out_bad_mask <= 1'b0;
    end else begin
      out_valid    <= s1_valid;
      out_bad_mask <= s1_valid && bad;
      if (s1_valid) begin
        out     <= s1_rec;
        out_uop <= uop;
      end
    end
  end
endmodule
