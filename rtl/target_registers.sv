// target_registers: quantum operation target registers of one VLIW lane.
//
// 32 single-qubit registers S0..S31 hold 7-bit qubit masks and 32 two-qubit
// registers T0..T31 hold 16-bit masks over the allowed qubit pairs; a '1'
// selects the qubit (pair). SMIS/SMIT write one register per clock; the
// lane reads Si and Ti of the same address combinationally. A write and a
// read of the same register in one clock return the old value (the lane
// never needs the new one in the same clock, as instructions pass in order).
// Counts and widths follow the paper; reset to empty masks is this design's.
module target_registers
  import eqasm_pkg::*;
(
  input  logic          clk,
  input  logic          rst_n,
  input  logic          s_we,
  input  logic          t_we,
  input  logic [4:0]    waddr,
  input  logic [NE-1:0] wmask,
  input  logic [4:0]    raddr,
  output logic [NQ-1:0] s_rdata,
  output logic [NE-1:0] t_rdata
);
  logic [NQ-1:0] sreg [NSREG];
  logic [NE-1:0] treg [NTREG];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NSREG; i++) sreg[i] <= '0;
      for (int i = 0; i < NTREG; i++) treg[i] <= '0;
    end else begin
      if (s_we) sreg[waddr] <= wmask[NQ-1:0];
      if (t_we) treg[waddr] <= wmask;
    end
  end

  assign s_rdata = sreg[raddr];
  assign t_rdata = treg[raddr];
endmodule
