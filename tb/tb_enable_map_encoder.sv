// tb_enable_map_encoder -- random weight maps, kernel sizes and input planes.
// Checks the row/column of the leftmost nonzero weight and every enable-map bit
// against a 2-D model with edge replication: en(i,j) = in(clamp(i+R-P), clamp(j+C-P)).
// Also walks the 9-bit map of the published example (1 0 1 0 1 0 1 0 0) and checks
// the positions (0,0) (0,2) (1,1) (2,0).
module tb_enable_map_encoder;
  import tb_util_pkg::*;
  logic [8:0]   wmap;
  logic [1:0]   ks;
  logic [575:0] in_plane, en_map;
  logic [1:0]   row, col;
  logic         valid;
  int checks = 0, failures = 0;

  enable_map_encoder dut (.wmap, .ks, .in_plane, .row, .col, .valid, .en_map);

  task automatic check_all();
    int p, er, ec, pad;
    p = -1;
    for (int i = 8; i >= 0; i--) if (wmap[i]) p = i;
    if (ks == 1) p = (p < 0) ? -1 : 0;
    checks++;
    if (valid !== (p >= 0)) failures++;
    if (p < 0) return;
    er = p / 3; ec = p % 3;
    pad = (ks == 3) ? 1 : 0;
    checks++;
    if (row !== 2'(er) || col !== 2'(ec)) begin
      failures++;
      $display("pos mismatch map=%b row=%0d col=%0d exp %0d %0d", wmap, row, col, er, ec);
    end
    for (int i = 0; i < 18; i++)
      for (int j = 0; j < 32; j++) begin
        checks++;
        if (en_map[qidx(i, j)] !== in_plane[qidx(clampi(i+er-pad, 0, 17), clampi(j+ec-pad, 0, 31))])
          failures++;
      end
  endtask

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int exp_pos[4] = '{0, 2, 4, 6};
    // published example map: positions 0, 2, 4, 6
    ks = 3;
    for (int i = 0; i < 576; i++) in_plane[i] = $urandom_range(0, 1);
    wmap = 9'b001010101;
    for (int n = 0; n < 4; n++) begin
      #1;
      checks++;
      if ({row, col} !== {2'(exp_pos[n] / 3), 2'(exp_pos[n] % 3)}) failures++;
      check_all();
      wmap = wmap & (wmap - 9'd1);
    end
    for (int n = 0; n < 300; n++) begin
      ks   = (n % 5 == 0) ? 2'd1 : 2'd3;
      wmap = 9'($urandom);
      if (n % 7 == 0) wmap = '0;
      if (n % 11 == 0) wmap = 9'(1 << $urandom_range(0, 8));
      for (int i = 0; i < 576; i++) in_plane[i] = ($urandom_range(0, 3) == 0);
      #1;
      check_all();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
