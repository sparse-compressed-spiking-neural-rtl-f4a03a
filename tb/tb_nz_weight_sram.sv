// tb_nz_weight_sram -- random bytes written across all nine banks (first/last word of
// each) and read back, then a burst of back-to-back reads (one weight per cycle).
module tb_nz_weight_sram;
  logic clk = 0, re = 0, we = 0;
  logic [17:0] raddr = 0, waddr = 0;
  logic [7:0] wdata = 0, rdata;
  int addrs [500];
  logic [7:0] vals [500];
  int checks = 0, failures = 0;

  nz_weight_sram dut (.clk, .re, .raddr, .rdata, .we, .waddr, .wdata);

  always #5 clk = ~clk;
  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int i = 0; i < 500; i++) begin
      if (i < 18) addrs[i] = (i / 2) * 16384 + ((i % 2) ? 16383 : 0);
      else if (i < 100) addrs[i] = 50000 + i;  // consecutive run
      else addrs[i] = (i * 293) % 147456;
      vals[i] = 8'($urandom);
      @(negedge clk); we = 1; waddr = 18'(addrs[i]); wdata = vals[i];
    end
    @(negedge clk); we = 0;
    for (int i = 0; i < 500; i++) begin
      @(negedge clk); re = 1; raddr = 18'(addrs[i]);
      @(negedge clk); re = 0;
      checks++;
      if (rdata !== vals[i]) failures++;
    end
    // pipelined reads of the consecutive run
    @(negedge clk); re = 1; raddr = 18'(addrs[18]);
    for (int i = 19; i < 100; i++) begin
      @(negedge clk);
      checks++;
      if (rdata !== vals[i-1]) failures++;
      raddr = 18'(addrs[i]);
    end
    @(negedge clk); re = 0;
    checks++;
    if (rdata !== vals[99]) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
