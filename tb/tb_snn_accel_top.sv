// tb_snn_accel_top -- end-to-end test of the accelerator at its real size.
//
// Acts as the memory controller: loads input bit planes (four 144-bit quadrant
// words per plane), the sparse weights (9-bit maps and the packed nonzero values)
// and the biases through the top-level write ports, writes the configuration,
// starts the job, answers input reload requests, and finally reads every output
// word back. A reference model written here computes the edge-replicated
// convolution of each output channel over all input channels (and, for the encoding
// layer, all 8 bit planes weighted by 2^b, PE result taken as acc >> 8), the
// 16-bit wrapping partial sums, the LIF neuron over the output time steps (input
// reused for mixed time steps, leak V/4 when no spike, threshold 8) and the 2x2
// max pool, and every output bit is compared. It also checks the job length: the
// busy cycles, not counting reload waits, must equal the sum over passes of
// (planes x max(nonzeros, 1) + 6) plus 2 per repeated LIF step, which shows that
// zero weights are skipped. Each mechanism is counted and must occur at least once:
// encoding layer, mixed time steps, max pool, 1x1 layer, input reload stall, empty
// kernels skipped, zero weights skipped, cfg_err and nz_err.
module tb_snn_accel_top;
  import tb_util_pkg::*;

  logic clk = 0, rst_n = 0;
  logic cfg_we = 0;
  logic [3:0] cfg_addr = 0;
  logic [31:0] cfg_wdata = 0;
  logic busy, done, cfg_err, nz_err, in_req;
  logic [1:0] in_req_t;
  logic in_ack = 0;
  logic in_we = 0;
  logic [1:0] in_wbank = 0;
  logic [8:0] in_waddr = 0;
  logic [143:0] in_wdata = 0;
  logic wm_we = 0;
  logic [15:0] wm_waddr = 0;
  logic [8:0] wm_wdata = 0;
  logic nz_we = 0;
  logic [17:0] nz_waddr = 0;
  logic [7:0] nz_wdata = 0;
  logic bias_we = 0;
  logic [8:0] bias_waddr = 0;
  logic [7:0] bias_wdata = 0;
  logic out_re = 0;
  logic [1:0] out_rbank = 0;
  logic [8:0] out_raddr = 0;
  logic [143:0] out_rdata;

  snn_accel_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  // mechanism counters
  int m_enc = 0, m_mixed = 0, m_pool = 0, m_1x1 = 0, m_stall = 0, m_empty = 0;
  int m_zero_w = 0, m_cfg_err = 0, m_nz_err = 0;
  int busy_cyc = 0, stall_cyc = 0, n_pass = 0, n_lif = 0;

  initial begin
    repeat (3000000) @(posedge clk);
    failures++; $display("TB_WATCHDOG");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(posedge clk) begin
    if (busy && !in_req) busy_cyc++;
    if (in_req) stall_cyc++;
    if (dut.pe_start) n_pass++;
    if (dut.lif_update) n_lif++;
  end

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", msg);
    end
  endtask

  // ---------------- job data ----------------
  int C, K, KS, IT, OT, ENC, POOL, PSEL, KB, NB, BP;
  logic [575:0] plane [int];      // key (t*BP + b)*C + c
  int wt [int];                   // key (k*C + c)*9 + p
  int bias [int];
  int nzk [int];                  // weights stored for channel k
  int s_pass [int];               // cycles of channel k's pass: BP * sum max(nnz,1)
  logic [575:0] ref_out [int];    // key t*K + k

  task automatic wr_plane_words(int addr, logic [575:0] pl);
    for (int q = 0; q < 4; q++) begin
      @(negedge clk);
      in_we = 1; in_wbank = 2'(q); in_waddr = 9'(addr); in_wdata = pl[q*144 +: 144];
    end
    @(negedge clk); in_we = 0;
  endtask

  task automatic wcfg(int a, int d);
    @(negedge clk); cfg_we = 1; cfg_addr = 4'(a); cfg_wdata = 32'(d);
    @(negedge clk); cfg_we = 0;
  endtask

  // make random data and load weights, biases and (if it fits) the input
  task automatic prepare();
    int nzp, px;
    plane.delete(); wt.delete(); bias.delete(); nzk.delete(); s_pass.delete(); ref_out.delete();
    for (int t = 0; t < IT; t++)
      for (int c = 0; c < C; c++) begin
        if (ENC) begin
          // 8-bit pixels, one plane per bit
          for (int b = 0; b < 8; b++) plane[(t*BP + b)*C + c] = '0;
          for (int r = 0; r < 18; r++)
            for (int x = 0; x < 32; x++) begin
              px = $urandom_range(0, 255);
              for (int b = 0; b < 8; b++) plane[(t*BP + b)*C + c][qidx(r, x)] = px[b];
            end
        end else begin
          logic [575:0] pl;
          for (int i = 0; i < 576; i++) pl[i] = ($urandom_range(0, 9) < 3);
          plane[t*C + c] = pl;
        end
      end
    nzp = NB;
    for (int k = 0; k < K; k++) begin
      logic [8:0] map;
      int n, s;
      nzk[k] = 0; s = 0;
      for (int c = 0; c < C; c++) begin
        map = '0; n = 0;
        for (int p = 0; p < 9; p++) begin
          int w;
          w = 0;
          if (KS == 1) begin
            // dense 1x1 kernel: one weight per channel, may be zero
            if (p == 0) begin
              w = $urandom_range(0, 4) == 0 ? 0 : $urandom_range(0, 40) - 20;
              if (w == 0) m_zero_w++;
              n = 1; nzk[k]++;
              @(negedge clk); nz_we = 1; nz_waddr = 18'(nzp); nz_wdata = 8'(w);
              nzp++;
            end
          end else if (((c + k) % 7 != 3) && $urandom_range(0, 9) < 3) begin
            w = $urandom_range(1, 20) * ($urandom_range(0, 1) ? 1 : -1);
            if (ENC) w = w / 4 + ((w > 0) ? 1 : -1);
            map[p] = 1'b1; n++; nzk[k]++;
            @(negedge clk); nz_we = 1; nz_waddr = 18'(nzp); nz_wdata = 8'(w);
            nzp++;
          end else if (KS == 3) m_zero_w++;
          wt[(k*C + c)*9 + p] = w;
        end
        @(negedge clk); nz_we = 0;
        if (KS == 3) begin
          if (n == 0) m_empty++;
          wm_we = 1; wm_waddr = 16'((KB + k)*C + c); wm_wdata = map;
          @(negedge clk); wm_we = 0;
        end
        s += (n == 0) ? 1 : n;
      end
      s_pass[k] = s * BP;
      bias[k] = $urandom_range(0, 32) - 16;
      @(negedge clk); bias_we = 1; bias_waddr = 9'(KB + k); bias_wdata = 8'(bias[k]);
      @(negedge clk); bias_we = 0;
    end
    if (C * IT * BP <= 512)
      for (int t = 0; t < IT; t++)
        for (int b = 0; b < BP; b++)
          for (int c = 0; c < C; c++)
            wr_plane_words((t*BP + b)*C + c, plane[(t*BP + b)*C + c]);
  endtask

  // reference: convolution, LIF over time, pool
  task automatic reference();
    int acc [576];
    int conv [576];
    int v [576];
    bit s [576];
    int pd;
    pd = (KS == 3) ? 1 : 0;
    for (int k = 0; k < K; k++) begin
      for (int t = 0; t < OT; t++) begin
        logic [575:0] o;
        if (t == 0 || IT == OT) begin
          foreach (acc[i]) acc[i] = 0;
          for (int b = 0; b < BP; b++)
            for (int c = 0; c < C; c++)
              for (int p = 0; p < KS*KS; p++) begin
                int w, rr, cc;
                w = wt[(k*C + c)*9 + p];
                rr = (KS == 3) ? p / 3 : 0;
                cc = (KS == 3) ? p % 3 : 0;
                if (w != 0)
                  for (int i = 0; i < 18; i++)
                    for (int j = 0; j < 32; j++)
                      if (plane[(t*BP + b)*C + c][qidx(clampi(i + rr - pd, 0, 17), clampi(j + cc - pd, 0, 31))])
                        acc[qidx(i, j)] += w << b;
              end
          foreach (conv[i]) conv[i] = ENC ? sat8(wrap16(acc[i]) >>> 8) : sat8(wrap16(acc[i]));
        end
        for (int i = 0; i < 576; i++) begin
          int fb;
          fb = (t == 0 || s[i]) ? 0 : (v[i] >>> 2);
          v[i] = sat8(fb + conv[i] + bias[k]);
          s[i] = v[i] >= 8;
          o[i] = s[i];
        end
        ref_out[t*K + k] = o;
      end
    end
  endtask

  function automatic logic [143:0] pool_of(logic [575:0] o);
    logic [143:0] p;
    for (int r = 0; r < 9; r++)
      for (int c = 0; c < 16; c++)
        p[r*16 + c] = o[qidx(2*r, 2*c)] | o[qidx(2*r, 2*c+1)] | o[qidx(2*r+1, 2*c)] | o[qidx(2*r+1, 2*c+1)];
    return p;
  endfunction

  // memory controller side of the reload handshake
  always @(posedge clk) begin
    if (in_req && !in_ack && (C * IT * BP > 512)) begin
      int tq;
      tq = in_req_t;
      for (int b = 0; b < BP; b++)
        for (int c = 0; c < C; c++)
          for (int q = 0; q < 4; q++) begin
            @(negedge clk);
            in_we = 1; in_wbank = 2'(q); in_waddr = 9'(b*C + c);
            in_wdata = plane[(tq*BP + b)*C + c][q*144 +: 144];
          end
      @(negedge clk); in_we = 0; in_ack = 1;
      @(negedge clk); in_ack = 0;
    end
  end

  task automatic run(string name, int c, int k, int ks, int it, int ot, int enc, int pool,
                     int psel, int kb, int nb, int nz_off, bit expect_cfg_err);
    int nz_total, cyc_exp, bad, p0, l0, st0;
    C = c; K = k; KS = ks; IT = it; OT = ot; ENC = enc; POOL = pool; PSEL = psel; KB = kb; NB = nb;
    BP = enc ? 8 : 1;
    prepare();
    nz_total = 0;
    for (int i = 0; i < K; i++) nz_total += nzk[i];
    wcfg(0, c); wcfg(1, k); wcfg(2, ks); wcfg(3, it); wcfg(4, ot); wcfg(5, nz_total + nz_off);
    wcfg(6, pool | (enc << 1) | (psel << 2)); wcfg(7, kb); wcfg(8, nb);
    busy_cyc = 0; p0 = n_pass; l0 = n_lif; st0 = stall_cyc;
    wcfg(15, 1);
    @(posedge clk); #1;
    chk(cfg_err == expect_cfg_err, {name, ": cfg_err"});
    if (expect_cfg_err) begin
      m_cfg_err++;
      repeat (3) @(posedge clk);
      chk(!busy && busy_cyc == 0, {name, ": invalid job ran"});
      $display("%s: rejected", name);
      return;
    end
    reference();
    while (!done) @(posedge clk);
    #1;
    chk(nz_err == (nz_off != 0), {name, ": nz_err"});
    if (nz_err) m_nz_err++;
    // job length
    cyc_exp = 0;
    for (int i = 0; i < K; i++)
      cyc_exp += ((IT == OT) ? OT : 1) * (s_pass[i] + 6) + ((IT == OT) ? 0 : 2 * (OT - 1));
    chk(busy_cyc == cyc_exp, {name, ": job cycles"});
    chk(n_pass - p0 == ((IT == OT) ? K * OT : K) && n_lif - l0 == K * OT, {name, ": passes / LIF steps"});
    if (IT != OT) m_mixed += (n_lif - l0) - (n_pass - p0);
    if (stall_cyc > st0) m_stall++;
    if (enc) m_enc++;
    if (ks == 1) m_1x1++;
    // read back
    bad = 0;
    for (int t = 0; t < OT; t++)
      for (int kk = 0; kk < K; kk++)
        for (int q = 0; q < 4; q++) begin
          logic [143:0] exp_w;
          if (pool && q != psel) continue;
          @(negedge clk); out_re = 1; out_rbank = 2'(q); out_raddr = 9'(t*K + kk);
          @(negedge clk); out_re = 0;
          exp_w = pool ? pool_of(ref_out[t*K + kk]) : ref_out[t*K + kk][q*144 +: 144];
          checks++;
          if (out_rdata != exp_w) begin
            failures++; bad++;
            if (failures < 20) $display("FAIL %s: output t=%0d k=%0d bank %0d: %h, expected %h",
                                        name, t, kk, q, out_rdata, exp_w);
          end
          if (pool) m_pool++;
        end
    $display("%s: C=%0d K=%0d ks=%0d T %0d->%0d enc=%0d pool=%0d: %0d busy cycles (expected %0d), %0d stall cycles, %0d bad words",
             name, c, k, ks, it, ot, enc, pool, busy_cyc, cyc_exp, stall_cyc - st0, bad);
  endtask

  initial begin
    repeat (4) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    run("encoding",  3, 8, 3, 1, 2, 1, 0, 0, 0, 0, 0, 0);
    run("spike",    16, 12, 3, 2, 2, 0, 1, 1, 5, 1000, 0, 0);
    run("mixed",     8, 6, 3, 1, 3, 0, 0, 0, 0, 0, 0, 0);
    run("1x1",      24, 10, 1, 2, 2, 0, 0, 0, 40, 20000, 0, 0);
    run("reload",  200, 2, 3, 3, 3, 0, 0, 0, 0, 0, 0, 0);
    run("pool_b3",  12, 5, 3, 4, 4, 0, 1, 3, 0, 50000, 0, 0);
    run("bad_cfg",   8, 3, 3, 2, 3, 0, 0, 0, 0, 0, 0, 1);
    run("bad_nz",    6, 4, 3, 1, 1, 0, 0, 0, 0, 0, 3, 0);
    chk(m_enc > 0,    "encoding layer never run");
    chk(m_mixed > 0,  "mixed time steps never used");
    chk(m_pool > 0,   "max pool never used");
    chk(m_1x1 > 0,    "1x1 layer never run");
    chk(m_stall > 0,  "input reload stall never happened");
    chk(m_empty > 0,  "no empty kernel skipped");
    chk(m_zero_w > 0, "no zero weight skipped");
    chk(m_cfg_err > 0, "cfg_err never raised");
    chk(m_nz_err > 0,  "nz_err never raised");
    $display("mechanisms: encoding=%0d mixed_repeats=%0d pooled_words=%0d 1x1=%0d stalls=%0d empty_kernels=%0d zero_weights=%0d cfg_err=%0d nz_err=%0d",
             m_enc, m_mixed, m_pool, m_1x1, m_stall, m_empty, m_zero_w, m_cfg_err, m_nz_err);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
