// instr_mem: instruction memory of the eQASM processor.
//
// Holds the 32-bit program words. The host writes words through a write port
// before execution; the classical pipeline reads one word per cycle through a
// synchronous read port (data appears one clock after the address). The
// paper does not fix the size or hierarchy of this memory; the 32768-word
// default (room for the 17,000-word randomized-benchmarking program of the
// instruction-count study) and the single-cycle synchronous read are choices of this design.
module instr_mem #(
  parameter int DEPTH = 32768,
  parameter int AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [31:0]   wdata,
  input  logic [AW-1:0] raddr,
  output logic [31:0]   rdata
);
  logic [31:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end
endmodule
