// tb_weight_map_sram -- random 9-bit maps written across all four banks (including
// the first and last word of each bank) and read back with one-cycle latency.
module tb_weight_map_sram;
  logic clk = 0, re = 0, we = 0;
  logic [15:0] raddr = 0, waddr = 0;
  logic [8:0] wdata = 0, rdata;
  int addrs [400];
  logic [8:0] vals [400];
  int checks = 0, failures = 0;

  weight_map_sram dut (.clk, .re, .raddr, .rdata, .we, .waddr, .wdata);

  always #5 clk = ~clk;
  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int i = 0; i < 400; i++) begin
      if (i < 8) addrs[i] = (i / 2) * 16384 + ((i % 2) ? 16383 : 0);
      else addrs[i] = (i * 163) % 65536;      // distinct addresses
      vals[i] = 9'($urandom);
      @(negedge clk); we = 1; waddr = 16'(addrs[i]); wdata = vals[i];
    end
    @(negedge clk); we = 0;
    for (int i = 399; i >= 0; i--) begin
      @(negedge clk); re = 1; raddr = 16'(addrs[i]);
      @(negedge clk); re = 0;
      checks++;
      if (rdata !== vals[i]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
