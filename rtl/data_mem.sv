// data_mem: data memory of the eQASM processor.
//
// Word-addressed 32-bit memory with two ports: port A serves LD/ST of the
// classical pipeline, port H lets the host exchange data with the running
// program (the paper names the data memory as the channel between host and
// quantum processor). Both ports read synchronously: read data appears one
// clock after the address. If both ports write the same word in one cycle,
// port A wins. Size and port arrangement are choices of this design.
module data_mem #(
  parameter int DEPTH = 4096,
  parameter int AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          a_we,
  input  logic [AW-1:0] a_addr,
  input  logic [31:0]   a_wdata,
  output logic [31:0]   a_rdata,
  input  logic          h_we,
  input  logic [AW-1:0] h_addr,
  input  logic [31:0]   h_wdata,
  output logic [31:0]   h_rdata
);
  logic [31:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (h_we && !(a_we && a_addr == h_addr)) mem[h_addr] <= h_wdata;
    if (a_we) mem[a_addr] <= a_wdata;
    a_rdata <= mem[a_addr];
    h_rdata <= mem[h_addr];
  end
endmodule
