// tb_target_registers: writes random masks into random S and T registers
// and checks every read against a reference copy, including that SMIS keeps
// only the 7 qubit bits and that S and T registers of one address are
// separate.
module tb_target_registers;
  import eqasm_pkg::*;
  logic clk = 0, rst_n = 1, s_we = 0, t_we = 0;
  logic [4:0] waddr = '0, raddr = '0;
  logic [NE-1:0] wmask = '0;
  logic [NQ-1:0] s_rdata;
  logic [NE-1:0] t_rdata;
  logic [NQ-1:0] s_ref [32];
  logic [NE-1:0] t_ref [32];
  int checks = 0, failures = 0;

  target_registers dut (.*);
  always #5 clk = ~clk;

  initial begin
    for (int i = 0; i < 32; i++) begin s_ref[i] = '0; t_ref[i] = '0; end
    #1 rst_n = 0; repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 400; i++) begin
      @(negedge clk);
      s_we = $urandom_range(0, 1); t_we = !s_we && $urandom_range(0, 1);
      waddr = 5'($urandom); wmask = 16'($urandom);
      @(negedge clk);
      if (s_we) s_ref[waddr] = wmask[NQ-1:0];
      if (t_we) t_ref[waddr] = wmask;
      s_we = 0; t_we = 0;
      raddr = 5'($urandom);
      #1;
      checks++;
      if (s_rdata !== s_ref[raddr] || t_rdata !== t_ref[raddr]) begin
        failures++; $display("FAIL read %0d: S %h/%h T %h/%h", raddr, s_rdata, s_ref[raddr], t_rdata, t_ref[raddr]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
