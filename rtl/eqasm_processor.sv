// eqasm_processor: the digital part of the eQASM control microarchitecture
// (the central controller), for a seven-qubit chip.
//
// Instruction flow: the classical pipeline fetches the program from the
// instruction memory, executes classical instructions itself and issues
// quantum instructions, one per clock, into the quantum pipeline:
//   quantum instruction decoder -> timestamp manager -> two VLIW lanes
//   (target registers, microcode unit, microinstruction buffer) ->
//   operation combination -> device event distributor -> timing control
//   unit (timing queue, event queues, timing controller) -> fast
//   conditional execution -> analog-digital interface (adi_* ports).
// Measurement results come back on res_valid/res_value into the execution
// flags and the measurement result registers (Qi with counter Ci), which the
// classical pipeline reads with FMR.
// Clocks: everything runs on clk (100 MHz). The timing control unit and fast
// conditional execution advance only on tick, a one-in-CLK_DIV enable (the
// paper's 50 MHz, 20 ns cycle) derived here; tick is an output so that the
// devices can sample adi_* and present res_* on the same 20 ns grid.
// Interfaces:
//   host: imem_we/waddr/wdata (program), cfg_* (Q control store of both
//         lanes), dmem_h_* (data memory), start (run from address 0),
//         tl_start (external trigger: first timing point of the timeline).
//   ADI:  adi_valid[dev][q], adi_cw[dev][q] for dev 0 = microwave,
//         1 = flux, 2 = measurement; held for one tick period.
//         res_valid[q], res_value[q]: measurement results, sampled on tick.
//   status: halted, error (two operations on one qubit: processor stopped),
//         underrun (timeline fell behind), plus debug outputs.
// Lint note: rst_n is an asynchronous reset everywhere in the logic; its
// only synchronous use is the "disable iff (!rst_n)" of the assertions in sync_fifo and meas_result_reg, which
// is why a lint tool may report it as both a synchronous and an asynchronous
// signal. No flip-flop uses it synchronously.
module eqasm_processor
  import eqasm_pkg::*;
#(
  parameter int IMEM_DEPTH = 32768,
  parameter int DMEM_DEPTH = 4096,
  parameter int TQ_DEPTH   = 64,
  parameter int EQ_DEPTH   = 32,
  parameter int CLK_DIV    = 2
) (
  input  logic                                clk,
  input  logic                                rst_n,
  // host
  input  logic                                start,
  input  logic                                tl_start,
  input  logic                                imem_we,
  input  logic [$clog2(IMEM_DEPTH)-1:0]       imem_waddr,
  input  logic [31:0]                         imem_wdata,
  input  logic                                cfg_we,
  input  logic [QOPC_W-1:0]                   cfg_addr,
  input  qcs_entry_t                          cfg_data,
  input  logic                                dmem_h_we,
  input  logic [$clog2(DMEM_DEPTH)-1:0]       dmem_h_addr,
  input  logic [31:0]                         dmem_h_wdata,
  output logic [31:0]                         dmem_h_rdata,
  // analog-digital interface
  output logic                                tick,
  output logic [NDEV-1:0][NQ-1:0]             adi_valid,
  output logic [NDEV-1:0][NQ-1:0][CW_W-1:0]   adi_cw,
  input  logic [NQ-1:0]                       res_valid,
  input  logic [NQ-1:0]                       res_value,
  // status
  output logic                                halted,
  output logic                                error,
  output logic                                underrun,
  output logic                                timeline_idle,
  output logic [31:0]                         now,
  output logic [NQ-1:0]                       meas_valid,
  output logic                                fmr_stall,
  output logic                                q_stall,
  output logic                                lane_conflict,
  output logic                                bundle_conflict,
  output logic                                cancelled
);
  localparam int IAW = $clog2(IMEM_DEPTH);
  localparam int DAW = $clog2(DMEM_DEPTH);

  // ---------------- synchronisation clock: 20 ns tick ----------------
  logic [$clog2(CLK_DIV+1)-1:0] div_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) div_q <= '0;
    else        div_q <= (int'(div_q) == CLK_DIV - 1) ? '0 : div_q + 1'b1;
  end
  assign tick = int'(div_q) == CLK_DIV - 1;

  // ---------------- memories ----------------
  logic [IAW-1:0] imem_raddr;
  logic [31:0]    imem_rdata;
  instr_mem #(.DEPTH(IMEM_DEPTH)) u_imem (
    .clk, .we(imem_we), .waddr(imem_waddr), .wdata(imem_wdata),
    .raddr(imem_raddr), .rdata(imem_rdata)
  );

  logic           dm_we;
  logic [DAW-1:0] dm_addr;
  logic [31:0]    dm_wdata, dm_rdata;
  data_mem #(.DEPTH(DMEM_DEPTH)) u_dmem (
    .clk, .a_we(dm_we), .a_addr(dm_addr), .a_wdata(dm_wdata), .a_rdata(dm_rdata),
    .h_we(dmem_h_we), .h_addr(dmem_h_addr), .h_wdata(dmem_h_wdata), .h_rdata(dmem_h_rdata)
  );

  // ---------------- classical pipeline ----------------
  logic        q_valid, q_ready, q_busy;
  logic [31:0] q_instr, q_rs_val;
  logic [NQ-1:0] meas_value;
  logic        running;
  logic [IAW-1:0] pc;

  classical_pipeline #(.IMEM_AW(IAW), .DMEM_AW(DAW)) u_cp (
    .clk, .rst_n, .start,
    .imem_addr(imem_raddr), .imem_rdata,
    .dmem_we(dm_we), .dmem_addr(dm_addr), .dmem_wdata(dm_wdata), .dmem_rdata(dm_rdata),
    .q_valid, .q_instr, .q_rs_val, .q_ready, .q_busy,
    .meas_valid, .meas_value, .q_error(error),
    .running, .halted, .pc, .fmr_stall, .q_stall
  );

  // ---------------- quantum pipeline front end ----------------
  logic  dec_valid;
  qdec_t dec_out;
  quantum_instr_decoder u_dec (
    .clk, .rst_n, .in_valid(q_valid), .instr(q_instr), .rs_val(q_rs_val),
    .out_valid(dec_valid), .out(dec_out)
  );

  logic ts_valid;
  qts_t ts_out;
  timestamp_manager u_tsm (
    .clk, .rst_n, .in_valid(dec_valid), .in(dec_out),
    .out_valid(ts_valid), .out(ts_out)
  );

  logic [NLANE-1:0]              ln_valid, ln_bad;
  qts_t [NLANE-1:0]              ln_rec;
  uop_t [NLANE-1:0][NQ-1:0]      ln_uop;
  for (genvar l = 0; l < NLANE; l++) begin : g_lane
    vliw_lane #(.LANE(l)) u_lane (
      .clk, .rst_n, .in_valid(ts_valid), .in(ts_out),
      .cfg_we, .cfg_addr, .cfg_data,
      .out_valid(ln_valid[l]), .out(ln_rec[l]), .out_uop(ln_uop[l]),
      .out_bad_mask(ln_bad[l])
    );
  end

  logic          oc_valid, oc_error;
  tpoint_t       oc_out;
  logic [NQ-1:0] meas_inc;
  operation_combination u_oc (
    .clk, .rst_n, .in_valid(ln_valid[0]), .in(ln_rec[0]),
    .uop0(ln_uop[0]), .uop1(ln_uop[1]),
    .out_valid(oc_valid), .out(oc_out), .meas_inc,
    .error(oc_error), .lane_conflict, .bundle_conflict
  );

  // Records still in the front end may yet raise a counter Ci.
  logic ts_valid_d;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ts_valid_d <= 1'b0;
    else        ts_valid_d <= ts_valid;
  end
  assign q_busy = dec_valid || ts_valid || ts_valid_d || ln_valid[0];

  logic                          tq_push;
  tq_entry_t                     tq_data;
  logic   [NDEV-1:0][NQ-1:0]     eq_push;
  devop_t [NDEV-1:0][NQ-1:0]     eq_data;
  device_event_distributor u_ded (
    .clk, .rst_n, .in_valid(oc_valid), .in(oc_out),
    .tq_push, .tq_data, .eq_push, .eq_data
  );

  // ---------------- deterministic timing domain ----------------
  logic   [NDEV-1:0][NQ-1:0] trig_valid;
  devop_t [NDEV-1:0][NQ-1:0] trig_op;
  logic                      fired, started, almost_full;
  logic [LABEL_W-1:0]        fired_label;
  timing_control_unit #(.TQ_DEPTH(TQ_DEPTH), .EQ_DEPTH(EQ_DEPTH)) u_tcu (
    .clk, .rst_n, .tick, .tl_start,
    .tq_push, .tq_data, .eq_push, .eq_data,
    .trig_valid, .trig_op, .fired, .fired_label, .now, .started,
    .almost_full, .idle(timeline_idle), .underrun
  );
  assign q_ready = !almost_full;

  logic [NQ-1:0]      meas_cancel;
  logic [NQ-1:0][3:0] exec_flags;
  fast_cond_exec u_fce (
    .clk, .rst_n, .tick, .trig_valid, .trig_op,
    .res_valid, .res_value,
    .adi_valid, .adi_cw, .meas_cancel, .exec_flags, .cancelled
  );

  logic [NQ-1:0][3:0] meas_count;
  meas_result_reg #(.CNT_W(4)) u_mrr (
    .clk, .rst_n, .inc(meas_inc),
    .res_valid(res_valid & {NQ{tick}}), .res_value,
    .cancel(meas_cancel & {NQ{tick}}),
    .q_value(meas_value), .q_valid(meas_valid), .count(meas_count)
  );

  logic bad_mask_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      bad_mask_q <= 1'b0;
    else if (|ln_bad) bad_mask_q <= 1'b1;
  end
  assign error = oc_error || bad_mask_q;
endmodule
