// tb_bias_rf -- writes all 512 biases, reads them in random order (registered read).
module tb_bias_rf;
  logic clk = 0, rst_n = 0, we = 0;
  logic [8:0] raddr = 0, waddr = 0;
  logic [7:0] wdata = 0, rdata;
  logic [7:0] model [512];
  int checks = 0, failures = 0;

  bias_rf dut (.clk, .rst_n, .raddr, .rdata, .we, .waddr, .wdata);

  always #5 clk = ~clk;
  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int a = 0; a < 512; a++) begin
      @(negedge clk); we = 1; waddr = 9'(a); wdata = 8'($urandom); model[a] = wdata;
    end
    @(negedge clk); we = 0;
    for (int n = 0; n < 600; n++) begin
      int a;
      a = (n < 512) ? (n * 37) % 512 : $urandom_range(0, 511);
      @(negedge clk); raddr = 9'(a);
      @(negedge clk);
      checks++;
      if (rdata !== model[a]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
