// tb_maxpool -- random spike tiles (sparse and dense) against a 2x2 OR model.
module tb_maxpool;
  import tb_util_pkg::*;
  logic [575:0] spikes;
  logic [143:0] pooled;
  int checks = 0, failures = 0;

  maxpool dut (.spikes, .pooled);

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int n = 0; n < 200; n++) begin
      for (int i = 0; i < 576; i++) spikes[i] = ($urandom_range(0, 7) < (n % 8));
      if (n == 0) begin spikes = '0; spikes[qidx(17, 31)] = 1'b1; end
      #1;
      for (int r = 0; r < 9; r++)
        for (int c = 0; c < 16; c++) begin
          logic e;
          e = spikes[qidx(2*r, 2*c)] | spikes[qidx(2*r+1, 2*c)]
            | spikes[qidx(2*r, 2*c+1)] | spikes[qidx(2*r+1, 2*c+1)];
          checks++;
          if (pooled[r*16 + c] !== e) failures++;
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
