// tb_pe_array -- broadcasts random weights with random enable maps, bit-plane shifts
// and clears to the 576 elements and compares every 8-bit output against a model:
// acc += weight * 2^b where enabled; output = sat8(acc >>> 8) in the encoding layer,
// sat8(acc) otherwise.
module tb_pe_array;
  import tb_util_pkg::*;
  logic clk = 0, rst_n = 0, clr = 0, acc_en = 0, encoding = 0;
  logic [575:0] en_map = '0;
  logic signed [7:0] weight = 0;
  logic [2:0] bit_sel = 0;
  logic [575:0][7:0] conv_out;
  int model [576];
  int checks = 0, failures = 0;

  pe_array dut (.clk, .rst_n, .clr, .acc_en, .en_map, .weight, .bit_sel, .encoding, .conv_out);

  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic compare();
    for (int i = 0; i < 576; i++) begin
      int e;
      e = encoding ? sat8(model[i] >>> 8) : sat8(model[i]);
      checks++;
      if ($signed(conv_out[i]) != e) begin
        failures++;
        if (failures < 5) $display("pe %0d: out=%0d exp=%0d acc=%0d", i, $signed(conv_out[i]), e, model[i]);
      end
    end
  endtask

  initial begin
    foreach (model[i]) model[i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int round = 0; round < 12; round++) begin
      @(negedge clk);
      clr = 1; acc_en = 0;
      @(posedge clk); #1;
      foreach (model[i]) model[i] = 0;
      clr = 0;
      encoding = round[0];
      for (int s = 0; s < 40; s++) begin
        @(negedge clk);
        acc_en  = ($urandom_range(0, 5) != 0);
        weight  = 8'($urandom);
        bit_sel = encoding ? 3'($urandom_range(0, 7)) : 3'd0;
        for (int i = 0; i < 576; i++) en_map[i] = ($urandom_range(0, 3) == 0);
        @(posedge clk); #1;
        if (acc_en)
          for (int i = 0; i < 576; i++)
            if (en_map[i]) model[i] = wrap16(model[i] + (int'(weight) <<< bit_sel));
      end
      @(negedge clk); acc_en = 0;
      compare();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
