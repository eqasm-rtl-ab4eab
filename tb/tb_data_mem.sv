// tb_data_mem: self-checking test of the two-port data memory.
// Port A and port H write interleaved addresses; each port then reads back
// words written by both ports. Also checks that a same-clock write of one
// word by both ports keeps port A's data, and the one-clock read latency.
module tb_data_mem;
  localparam int AW = 12;
  logic clk = 0;
  logic a_we = 0, h_we = 0;
  logic [AW-1:0] a_addr = '0, h_addr = '0;
  logic [31:0] a_wdata = '0, h_wdata = '0, a_rdata, h_rdata;
  int checks = 0, failures = 0;
  logic [31:0] ref_mem [int];

  data_mem dut (.*);
  always #5 clk = ~clk;

  task automatic check(input string what, input logic [31:0] got, input logic [31:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %h exp %h", what, got, exp); end
  endtask

  initial begin
    for (int i = 0; i < 64; i++) begin
      @(negedge clk);
      a_we = 1; a_addr = AW'(2*i);   a_wdata = $urandom; ref_mem[2*i]   = a_wdata;
      h_we = 1; h_addr = AW'(2*i+1); h_wdata = $urandom; ref_mem[2*i+1] = h_wdata;
    end
    // collision: both ports write word 7, port A wins
    @(negedge clk);
    a_addr = 7; a_wdata = 32'hAAAA_0007; h_addr = 7; h_wdata = 32'h5555_0007;
    ref_mem[7] = 32'hAAAA_0007;
    @(negedge clk); a_we = 0; h_we = 0;
    for (int i = 0; i < 128; i++) begin
      @(negedge clk); a_addr = AW'(i); h_addr = AW'(127 - i);
      @(posedge clk); #1;
      check("port A read", a_rdata, ref_mem[i]);
      check("port H read", h_rdata, ref_mem[127 - i]);
    end
    // latency: address change is seen only after the clock edge
    @(negedge clk); a_addr = 0;
    @(posedge clk); #1;
    @(negedge clk); a_addr = 1;
    #1 check("read latency", a_rdata, ref_mem[0]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
