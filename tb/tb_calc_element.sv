// tb_calc_element -- random clear / enable / weight sequence against a software model
// of the gated accumulator (add when enabled, hold when gated, wrap at 16 bits).
module tb_calc_element;
  import tb_util_pkg::*;
  logic clk = 0, rst_n = 0, clr = 0, en = 0;
  logic signed [15:0] wgt = 0, acc;
  int checks = 0, failures = 0, model = 0;

  calc_element #(.ACC_W(16)) dut (.clk, .rst_n, .clr, .en, .wgt, .acc);

  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      clr = ($urandom_range(0, 40) == 0);
      en  = $urandom_range(0, 1);
      wgt = 16'($urandom_range(0, 65535));
      if (i > 1000) wgt = 16'($signed(8'($urandom)) <<< $urandom_range(0, 7));
      @(posedge clk); #1;
      if (clr) model = 0; else if (en) model = wrap16(model + int'(wgt));
      checks++;
      if (int'(acc) != model) begin
        failures++;
        if (failures < 5) $display("mismatch at %0d: acc=%0d model=%0d", i, acc, model);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
