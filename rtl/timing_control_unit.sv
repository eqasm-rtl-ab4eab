// timing_control_unit: the deterministic timing domain of the processor.
//
// Holds a timing queue of timing points {label, interval} and one event
// queue per device channel (device type x qubit) of device operations
// {label, codeword, flag select}; the address logic is the per-channel push
// enable coming from the distributor. The timing controller counts 20 ns
// cycles (one per tick, the 50 MHz enable derived from the 100 MHz clock)
// since the last fired timing point. When the count reaches the interval of
// the point at the head of the timing queue, it fires that point: pops it,
// and every event queue whose head carries the same label pops its head and
// presents it on trig_* for exactly one tick period. The timeline starts on
// the external trigger tl_start; the first point (label 0, interval 0) then
// fires on the next tick.
// If a point reaches the head only after its time has passed (the
// instruction stream fell behind the timeline) it fires at once and the
// sticky underrun flag is set. almost_full asks the classical pipeline to
// stop issuing quantum instructions while MARGIN entries or fewer are free
// in any queue; MARGIN covers the records already inside the quantum
// pipeline.
// From the paper: queue-based timing, one timing queue plus event queues per
// device, a timer that triggers all operations of the point it reaches, the
// 20 ns cycle, the external trigger for the first timing point. Queue
// depths, labels, the underrun flag and the flow control are this design's.
module timing_control_unit
  import eqasm_pkg::*;
#(
  parameter int TQ_DEPTH = 64,
  parameter int EQ_DEPTH = 32,
  parameter int MARGIN   = 8
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          tick,
  input  logic                          tl_start,
  input  logic                          tq_push,
  input  tq_entry_t                     tq_data,
  input  logic   [NDEV-1:0][NQ-1:0]     eq_push,
  input  devop_t [NDEV-1:0][NQ-1:0]     eq_data,
  output logic   [NDEV-1:0][NQ-1:0]     trig_valid,
  output devop_t [NDEV-1:0][NQ-1:0]     trig_op,
  output logic                          fired,
  output logic [LABEL_W-1:0]            fired_label,
  output logic [31:0]                   now,
  output logic                          started,
  output logic                          almost_full,
  output logic                          idle,
  output logic                          underrun
);
  localparam int TCW = $clog2(TQ_DEPTH) + 1;
  localparam int ECW = $clog2(EQ_DEPTH) + 1;

  tq_entry_t          tq_head;
  logic               tq_empty, tq_full, tq_pop;
  logic [TCW-1:0]     tq_count;

  sync_fifo #(.WIDTH($bits(tq_entry_t)), .DEPTH(TQ_DEPTH)) u_tq (
    .clk, .rst_n, .push(tq_push), .din(tq_data), .pop(tq_pop),
    .head(tq_head), .empty(tq_empty), .full(tq_full), .count(tq_count)
  );

  devop_t [NDEV-1:0][NQ-1:0] eq_head;
  logic   [NDEV-1:0][NQ-1:0] eq_empty, eq_full, eq_pop, eq_af;
  logic   [ECW-1:0]          eq_count [NDEV][NQ];

  for (genvar d = 0; d < NDEV; d++) begin : g_dev
    for (genvar q = 0; q < NQ; q++) begin : g_q
      sync_fifo #(.WIDTH($bits(devop_t)), .DEPTH(EQ_DEPTH)) u_eq (
        .clk, .rst_n, .push(eq_push[d][q]), .din(eq_data[d][q]), .pop(eq_pop[d][q]),
        .head(eq_head[d][q]), .empty(eq_empty[d][q]), .full(eq_full[d][q]),
        .count(eq_count[d][q])
      );
      assign eq_af[d][q] = int'(eq_count[d][q]) > EQ_DEPTH - MARGIN;
    end
  end

  // ---------------- timing controller ----------------
  logic [WAIT_W:0] elapsed;   // cycles since the last fired point
  logic            fire;

  assign fire   = tick && started && !tq_empty && (elapsed >= {1'b0, tq_head.interval});
  assign tq_pop = fire;

  always_comb begin
    for (int d = 0; d < NDEV; d++)
      for (int q = 0; q < NQ; q++)
        eq_pop[d][q] = fire && !eq_empty[d][q] && eq_head[d][q].label == tq_head.label;
  end

  assign almost_full = (int'(tq_count) > TQ_DEPTH - MARGIN) || |eq_af;
  assign idle        = tq_empty && &eq_empty;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      started     <= 1'b0;
      elapsed     <= '0;
      now         <= '0;
      fired       <= 1'b0;
      fired_label <= '0;
      trig_valid  <= '0;
      trig_op     <= '0;
      underrun    <= 1'b0;
    end else begin
      if (!started && tl_start) started <= 1'b1;
      if (tick) begin
        fired      <= fire;
        trig_valid <= eq_pop;
        trig_op    <= eq_head;
        if (started) begin
          now <= now + 1;
          if (fire) begin
            fired_label <= tq_head.label;
            elapsed     <= 1;
            if (elapsed > {1'b0, tq_head.interval}) underrun <= 1'b1;
          end else if (!elapsed[WAIT_W]) begin
            elapsed <= elapsed + 1'b1;
          end
        end
      end
    end
  end
endmodule
