// tb_input_sram -- writes random 144-bit words to random banks and addresses, then
// reads whole 576-bit planes back: one-cycle read latency, output held between
// reads, bank b in bits [144b +: 144].
module tb_input_sram;
  logic clk = 0, re = 0, we = 0;
  logic [8:0] raddr = 0, waddr = 0;
  logic [1:0] wbank = 0;
  logic [143:0] wdata = 0;
  logic [575:0] rdata;
  logic [575:0] model [512];
  bit written [512];
  int checks = 0, failures = 0;

  input_sram dut (.clk, .re, .raddr, .rdata, .we, .wbank, .waddr, .wdata);

  always #5 clk = ~clk;
  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    // fill 64 addresses completely
    for (int a = 0; a < 64; a++)
      for (int b = 0; b < 4; b++) begin
        @(negedge clk);
        we = 1; waddr = 9'(a * 8 + 3); wbank = 2'(b);
        wdata = {$urandom, $urandom, $urandom, $urandom, 16'($urandom)};
        model[a*8+3][b*144 +: 144] = wdata;
      end
    @(negedge clk); we = 0;
    for (int n = 0; n < 200; n++) begin
      int a;
      a = $urandom_range(0, 63) * 8 + 3;
      @(negedge clk); re = 1; raddr = 9'(a);
      @(negedge clk); re = 0;
      checks++;
      if (rdata !== model[a]) failures++;
      @(negedge clk);              // held while not reading
      checks++;
      if (rdata !== model[a]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
