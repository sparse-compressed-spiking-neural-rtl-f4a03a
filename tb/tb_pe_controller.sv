// tb_pe_controller -- drives convolution passes through the PE controller with
// behavioural one-cycle-latency memories. The testbench accumulates what the
// controller presents to the PE array (weight read at nz_addr, shifted by bit_sel,
// wherever en_map is 1) and compares the sums with a dense reference convolution
// of the same random sparse kernels (edge-replicated). It also checks that a pass
// takes exactly sum(max(nonzeros,1)) + 3 cycles from start to done (zero weights
// are skipped) and that nz_end points past the channel's weights. Passes: 3x3 spike
// layer with empty kernels, 3x3 encoding layer with 8 bit planes, 1x1 layer.
module tb_pe_controller;
  import tb_util_pkg::*;
  logic clk = 0, rst_n = 0, start = 0;
  logic [9:0] c_num = 1;
  logic [3:0] b_num = 1;
  logic [1:0] ks = 3;
  logic [8:0] in_base = 0;
  logic [15:0] wm_base = 0;
  logic [17:0] nz_base = 0, nz_end;
  logic busy, done;
  logic in_re, wm_re, nz_re, pe_clr, acc_en;
  logic [8:0] in_addr;
  logic [15:0] wm_addr;
  logic [17:0] nz_addr;
  logic [575:0] in_rdata, en_map;
  logic [8:0] wm_rdata;
  logic [2:0] bit_sel;
  logic [7:0] nz_q;

  logic [575:0] in_mem [512];
  logic [8:0]   wm_mem [4096];
  logic [7:0]   nz_mem [8192];
  int acc [576];
  int refv [576];
  int checks = 0, failures = 0, skipped_zero = 0;

  pe_controller dut (.*);

  always #5 clk = ~clk;
  always_ff @(posedge clk) begin
    if (in_re) in_rdata <= in_mem[in_addr];
    if (wm_re) wm_rdata <= wm_mem[wm_addr];
    if (nz_re) nz_q <= nz_mem[nz_addr];
  end
  // what the PE array would do
  always_ff @(posedge clk) begin
    if (pe_clr) foreach (acc[i]) acc[i] <= 0;
    else if (acc_en)
      for (int i = 0; i < 576; i++)
        if (en_map[i]) acc[i] <= acc[i] + (int'($signed(nz_q)) <<< bit_sel);
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // one pass: random planes, kernels and weights, then run and compare
  task automatic run_pass(int C, int B, int K_S, int ib, int wb, int nb);
    int nzp, cyc_exp, cyc, pad;
    int kern [512][9];
    pad = (K_S == 3) ? 1 : 0;
    nzp = nb;
    cyc_exp = 3;
    for (int c = 0; c < C; c++) begin
      int n;
      n = 0;
      wm_mem[wb + c] = '0;
      for (int p = 0; p < 9; p++) begin
        kern[c][p] = 0;
        if ((K_S == 3 && $urandom_range(0, 3) == 0 && (c % 4 != 2)) || (K_S == 1 && p == 0)) begin
          kern[c][p] = $signed(8'($urandom_range(1, 255)));
          wm_mem[wb + c][p] = 1'b1;
          nz_mem[nzp] = 8'(kern[c][p]);
          nzp++; n++;
        end
      end
      if (n == 0) skipped_zero++;
      cyc_exp += B * ((n == 0) ? 1 : n);
    end
    for (int b = 0; b < B; b++)
      for (int c = 0; c < C; c++)
        for (int i = 0; i < 576; i++) in_mem[ib + b*C + c][i] = ($urandom_range(0, 2) == 0);
    // reference
    foreach (refv[i]) refv[i] = 0;
    for (int b = 0; b < B; b++)
      for (int c = 0; c < C; c++)
        for (int p = 0; p < 9; p++)
          if (kern[c][p] != 0)
            for (int i = 0; i < 18; i++)
              for (int j = 0; j < 32; j++)
                if (in_mem[ib + b*C + c][qidx(clampi(i + p/3 - pad, 0, 17), clampi(j + p%3 - pad, 0, 31))])
                  refv[qidx(i, j)] += kern[c][p] <<< b;
    // run
    @(negedge clk);
    c_num = 10'(C); b_num = 4'(B); ks = 2'(K_S);
    in_base = 9'(ib); wm_base = 16'(wb); nz_base = 18'(nb);
    start = 1;
    @(negedge clk); start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc != cyc_exp) begin
      failures++; $display("cycles %0d expected %0d", cyc, cyc_exp);
    end
    checks++;
    if (int'(nz_end) != nzp) begin
      failures++; $display("nz_end %0d expected %0d", nz_end, nzp);
    end
    for (int i = 0; i < 576; i++) begin
      checks++;
      if (wrap16(acc[i]) != wrap16(refv[i])) begin
        failures++;
        if (failures < 6) $display("pix %0d acc=%0d ref=%0d", i, acc[i], refv[i]);
      end
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    run_pass(6, 1, 3, 0, 0, 0);
    run_pass(3, 8, 3, 40, 100, 300);
    run_pass(7, 1, 1, 200, 0, 1000);
    run_pass(1, 1, 3, 5, 7, 9);
    run_pass(20, 1, 3, 300, 2000, 4000);
    checks++;
    if (skipped_zero == 0) failures++;
    $display("empty kernels seen: %0d", skipped_zero);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
