// tb_lif_array -- several output channels of random convolution results and biases
// through 1..4 time steps; checks every membrane potential and spike against
// V = sat8(((first or spiked) ? 0 : V>>>2) + x + bias), spike = V >= 8 (0.5 in Q3.4).
module tb_lif_array;
  import tb_util_pkg::*;
  logic clk = 0, rst_n = 0, update = 0, first_t = 0;
  logic [575:0][7:0] conv_in;
  logic signed [7:0] bias = 0;
  logic [575:0] spikes;
  logic [575:0][7:0] vmem;
  int mv [576];
  bit ms [576];
  int checks = 0, failures = 0, nspk = 0;

  lif_array dut (.clk, .rst_n, .update, .first_t, .conv_in, .bias, .spikes, .vmem);

  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    conv_in = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 10; k++) begin
      int nt;
      nt = 1 + (k % 4);
      bias = 8'($signed($urandom_range(0, 20)) - 10);
      for (int t = 0; t < nt; t++) begin
        @(negedge clk);
        // mixed time steps: same input repeated when k is odd
        if (t == 0 || !k[0])
          for (int i = 0; i < 576; i++)
            conv_in[i] = (k == 9) ? 8'($urandom) : 8'($signed($urandom_range(0, 24)) - 8);
        first_t = (t == 0);
        update  = 1;
        @(posedge clk); #1;
        update = 0;
        for (int i = 0; i < 576; i++) begin
          int fb;
          fb = (first_t || ms[i]) ? 0 : (mv[i] >>> 2);
          mv[i] = sat8(fb + int'($signed(conv_in[i])) + int'(bias));
          ms[i] = (mv[i] >= 8);
          nspk += ms[i];
          checks++;
          if ($signed(vmem[i]) != mv[i] || spikes[i] != ms[i]) begin
            failures++;
            if (failures < 5) $display("n%0d k%0d t%0d v=%0d exp %0d s=%0d exp %0d", i, k, t,
                                       $signed(vmem[i]), mv[i], spikes[i], ms[i]);
          end
        end
      end
    end
    checks++;
    if (nspk == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
