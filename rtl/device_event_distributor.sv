// device_event_distributor: reorganises the micro-operations of a timing
// point into device operations.
//
// A timing point arrives with one micro-operation (or none) per qubit. Each
// micro-operation names the kind of device that carries it out: microwave
// (single-qubit rotations), flux (two-qubit CZ and z rotations) or
// measurement. The distributor writes every micro-operation as a device
// operation {label, codeword, execution-flag select} into the event queue of
// its device and qubit, and writes the timing point itself {label,
// interval} into the timing queue, all in the same clock (one clock after
// the point arrives), so the events of a point are always queued no later
// than the point. The paper gives the function only; this design uses one
// device channel per (device type, qubit), which matches the per-qubit
// microwave and flux lines and the frequency-multiplexed feedlines (the
// feedline of each qubit is reported with the measurement channels).
module device_event_distributor
  import eqasm_pkg::*;
(
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          in_valid,
  input  tpoint_t                       in,
  output logic                          tq_push,
  output tq_entry_t                     tq_data,
  output logic   [NDEV-1:0][NQ-1:0]     eq_push,
  output devop_t [NDEV-1:0][NQ-1:0]     eq_data
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tq_push <= 1'b0;
      tq_data <= '0;
      eq_push <= '0;
      eq_data <= '0;
    end else begin
      tq_push <= in_valid;
      eq_push <= '0;
      if (in_valid) begin
        tq_data.label    <= in.label;
        tq_data.interval <= in.interval;
        for (int d = 0; d < NDEV; d++) begin
          for (int q = 0; q < NQ; q++) begin
            eq_data[d][q].label <= in.label;
            eq_data[d][q].cw    <= in.uop[q].cw;
            eq_data[d][q].cond  <= in.uop[q].cond;
            eq_push[d][q]       <= in.uop[q].dev == dev_type_e'(d + 1);
          end
        end
      end
    end
  end
endmodule
