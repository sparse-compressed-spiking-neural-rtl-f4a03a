// tb_output_sram -- full 576-bit writes (all banks) and masked single-bank writes,
// then 144-bit reads of every bank.
module tb_output_sram;
  logic clk = 0, we = 0, re = 0;
  logic [3:0] wmask = 0;
  logic [8:0] waddr = 0, raddr = 0;
  logic [575:0] wdata = 0;
  logic [1:0] rbank = 0;
  logic [143:0] rdata;
  logic [143:0] model [4][512];
  int checks = 0, failures = 0;

  output_sram dut (.clk, .we, .wmask, .waddr, .wdata, .re, .rbank, .raddr, .rdata);

  always #5 clk = ~clk;
  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int a = 0; a < 100; a++) begin
      @(negedge clk);
      we = 1; waddr = 9'(a * 5); wmask = 4'hf;
      for (int w = 0; w < 18; w++) wdata[w*32 +: 32] = $urandom;
      for (int b = 0; b < 4; b++) model[b][a*5] = wdata[b*144 +: 144];
    end
    for (int a = 0; a < 100; a++) begin   // pooled-style writes into one bank
      int b;
      b = $urandom_range(0, 3);
      @(negedge clk);
      we = 1; waddr = 9'(a * 5); wmask = 4'(1 << b);
      for (int w = 0; w < 18; w++) wdata[w*32 +: 32] = $urandom;
      model[b][a*5] = wdata[b*144 +: 144];
    end
    @(negedge clk); we = 0;
    for (int a = 0; a < 100; a++)
      for (int b = 0; b < 4; b++) begin
        @(negedge clk); re = 1; raddr = 9'(a * 5); rbank = 2'(b);
        @(negedge clk); re = 0;
        checks++;
        if (rdata !== model[b][a*5]) failures++;
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
