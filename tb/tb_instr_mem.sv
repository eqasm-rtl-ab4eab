// tb_instr_mem: self-checking test of the instruction memory.
// Writes a pseudo-random word to a set of addresses (including the first and
// last), then reads them back in a different order, checking both the data
// and the one-clock read latency (the word must not appear earlier).
module tb_instr_mem;
  localparam int DEPTH = 32768;
  localparam int AW = 15;
  logic clk = 0, we = 0;
  logic [AW-1:0] waddr = '0, raddr = '0;
  logic [31:0] wdata = '0, rdata;
  int checks = 0, failures = 0;

  instr_mem #(.DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  function automatic logic [31:0] pattern(input int a);
    return 32'h9E37_79B9 * (a + 1) ^ 32'h1234_5678;
  endfunction

  int addrs[$];
  initial begin
    addrs = '{0, 1, 2, 100, 4095, 8191, 12345, DEPTH-1};
    for (int i = 0; i < 40; i++) addrs.push_back($urandom_range(0, DEPTH-1));
    foreach (addrs[i]) begin
      @(negedge clk); we = 1; waddr = AW'(addrs[i]); wdata = pattern(addrs[i]);
    end
    @(negedge clk); we = 0;
    for (int i = addrs.size() - 1; i >= 0; i--) begin
      @(negedge clk); raddr = AW'(addrs[i]);
      // before the clock edge, the old word must still be on rdata
      if (i < addrs.size() - 1 && addrs[i] != addrs[i+1]) begin
        checks++;
        if (rdata == pattern(addrs[i]) && pattern(addrs[i]) != pattern(addrs[i+1])) begin
          failures++; $display("FAIL: read latency shorter than one clock at %0d", addrs[i]);
        end
      end
      @(posedge clk); #1;
      checks++;
      if (rdata !== pattern(addrs[i])) begin
        failures++; $display("FAIL addr %0d: got %h exp %h", addrs[i], rdata, pattern(addrs[i]));
      end
    end
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
