// tb_vliw_lane: a lane with a small configured Q control store. Sends
// SMIS/SMIT records, then bundles whose slot (of this lane) names those
// registers and opcodes, and checks the seven per-qubit micro-operations and
// the passed-through record two clocks later. Also checks that the other
// lane's slot is ignored and that SMIS immediately followed by a bundle
// using the register sees the new mask.
module tb_vliw_lane;
  import eqasm_pkg::*;
  logic clk = 0, rst_n = 1, in_valid = 0, cfg_we = 0;
  qts_t in = '0;
  logic [QOPC_W-1:0] cfg_addr = '0;
  qcs_entry_t cfg_data = '0;
  logic out_valid, out_bad_mask;
  qts_t out;
  uop_t [NQ-1:0] out_uop;
  int checks = 0, failures = 0;

  vliw_lane #(.LANE(1)) dut (.*);
  always #5 clk = ~clk;

  localparam uop_t X   = '{dev: DEV_MW,   cw: 8'h01, cond: EF_ALWAYS};
  localparam uop_t CZS = '{dev: DEV_FLUX, cw: 8'h10, cond: EF_ALWAYS};
  localparam uop_t CZT = '{dev: DEV_FLUX, cw: 8'h11, cond: EF_ALWAYS};
  localparam uop_t M   = '{dev: DEV_MEAS, cw: 8'h07, cond: EF_ALWAYS};

  task automatic send(input qts_t r);
    @(negedge clk); in_valid = 1; in = r;
    @(negedge clk); in_valid = 0;
  endtask

  qts_t exp_q[$];
  uop_t [NQ-1:0] exp_u[$];

  task automatic sendx(input qts_t r, input uop_t [NQ-1:0] u);
    @(negedge clk); in_valid = 1; in = r; exp_q.push_back(r); exp_u.push_back(u);
  endtask

  always @(negedge clk) if (out_valid && rst_n) begin
    qts_t r; uop_t [NQ-1:0] u;
    #1;
    if (exp_q.size() == 0) begin failures++; $display("FAIL: unexpected output"); end
    else begin
      r = exp_q.pop_front(); u = exp_u.pop_front();
      checks++;
      if (out !== r || out_uop !== u) begin failures++; $display("FAIL: got %h exp %h", out_uop, u); end
    end
  end

  function automatic qts_t smis(input int r, input logic [6:0] m);
    qts_t t = '0; t.d.smis = 1; t.d.treg = 5'(r); t.d.mask = NE'(m); return t;
  endfunction
  function automatic qts_t smit(input int r, input logic [15:0] m);
    qts_t t = '0; t.d.smit = 1; t.d.treg = 5'(r); t.d.mask = m; return t;
  endfunction
  function automatic qts_t bun(input int opc, input int r, input int lbl);
    qts_t t = '0; t.d.bundle = 1; t.d.wait_op = 1; t.d.interval = 1;
    t.d.slot[1].opc = 9'(opc); t.d.slot[1].reg_addr = 5'(r);
    t.d.slot[0].opc = 9'h1FF; t.d.slot[0].reg_addr = 5'(r ^ 1); // other lane: ignored
    t.new_point = 1; t.label = 8'(lbl); return t;
  endfunction

  initial begin
    uop_t [NQ-1:0] u;
    #1 rst_n = 0; repeat (2) @(negedge clk); rst_n = 1;
    // configure: 3 = X, 4 = CZ, 5 = MEASZ
    @(negedge clk); cfg_we = 1; cfg_addr = 3; cfg_data = '{two_qubit: 0, uop_a: X, uop_b: '0};
    @(negedge clk); cfg_addr = 4; cfg_data = '{two_qubit: 1, uop_a: CZS, uop_b: CZT};
    @(negedge clk); cfg_addr = 5; cfg_data = '{two_qubit: 0, uop_a: M, uop_b: '0};
    @(negedge clk); cfg_addr = 9'h1FF; cfg_data = '{two_qubit: 0, uop_a: M, uop_b: '0};
    @(negedge clk); cfg_we = 0;
    u = '0;
    sendx(smis(7, 7'b0000101), u);       // S7 = {0, 2}
    sendx(smis(6, 7'b1111111), u);
    sendx(smit(3, 16'h0041), u);         // T3 = pairs 0 (2->0) and 6 (3->6)
    u = '0; u[0] = X; u[2] = X;
    sendx(bun(3, 7, 1), u);              // X S7 right after SMIS
    u = '0; u[2] = CZS; u[0] = CZT; u[3] = CZS; u[6] = CZT;
    sendx(bun(4, 3, 2), u);              // CZ T3
    u = '0; for (int q = 0; q < NQ; q++) u[q] = M;
    sendx(bun(5, 6, 3), u);              // MEASZ S6
    u = '0;
    sendx(bun(0, 6, 3), u);              // QNOP
    sendx(smis(6, 7'b0010000), u);
    u = '0; u[4] = X;
    sendx(bun(3, 6, 4), u);              // X S6 after rewrite
    @(negedge clk); in_valid = 0;
    repeat (5) @(negedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL: %0d records lost", exp_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
