// tb_system_controller -- checks the layer loop of the system controller.
//
// A behavioural stand-in for the PE controller answers every pe_start with done
// after a few cycles and reports nz_end = nz_base + (weights of that channel), the
// weights per channel being (k_base+k)%5 + 1. A monitor follows the expected loop
// (k outer, t inner) and checks on every event: pass command (input base, weight
// map base, NZ base of the channel), the LIF update (first_t only at t = 0, bias
// address k_base + k), and the Output SRAM write (address t*K + k, bank mask). It
// also checks that with mixed time steps only one pass per channel is run, that an
// input reload request with the right time step precedes every pass when the input
// does not fit, and that cfg_err / nz_err are raised for bad jobs. Cases run:
// T 2->2, encoding layer T 1->4 (mixed), C 200 with T 3->3 (reload), max pool to
// bank 2 with k_base/nz_base, wrong NZ_NUM, three invalid configurations.
module tb_system_controller;
  logic clk = 0, rst_n = 0;
  logic cfg_we = 0;
  logic [3:0] cfg_addr = 0;
  logic [31:0] cfg_wdata = 0;
  snn_pkg::cfg_t cfg;
  logic busy, done, cfg_err, nz_err, in_req, in_ack = 0;
  logic [1:0] in_req_t;
  logic pe_start, pe_done = 0;
  logic [9:0] pe_c;
  logic [3:0] pe_b;
  logic [8:0] pe_in_base;
  logic [15:0] pe_wm_base;
  logic [17:0] pe_nz_base, pe_nz_end = 0;
  logic [8:0] bias_addr;
  logic lif_update, lif_first, out_we;
  logic [3:0] out_wmask;
  logic [8:0] out_waddr;

  int checks = 0, failures = 0;
  int n_req = 0, n_pass = 0, n_lif = 0, n_wr = 0;
  int tot_req = 0, tot_mixed = 0, tot_pool = 0, tot_cfg_err = 0, tot_nz_err = 0;
  // expected job
  int C, K, IT, OT, KB, NB, ENC, POOL, PSEL;
  int kk, tt, nzk, pass_seen, req_seen;

  system_controller dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++; $display("TB_WATCHDOG");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s (k=%0d t=%0d)", msg, kk, tt);
    end
  endtask

  function automatic bit fits();
    return C * IT * (ENC ? 8 : 1) <= 512;
  endfunction

  // behavioural PE controller
  int cnt = -1;
  logic [17:0] base_q;
  always @(posedge clk) begin
    pe_done <= 0;
    if (pe_start) begin cnt = 2 + ($urandom % 4); base_q = pe_nz_base; end
    else if (cnt > 0) cnt--;
    else if (cnt == 0) begin
      cnt = -1; pe_done <= 1;
      pe_nz_end <= base_q + 18'(((kk + KB) % 5) + 1);
    end
  end

  // memory controller: answer reload requests after a random delay
  always @(posedge clk) begin
    if (in_req && !in_ack && ($urandom % 3 == 0)) in_ack <= 1;
    else in_ack <= 0;
  end

  // loop monitor
  always @(posedge clk) if (busy) begin
    if (in_req && in_ack) begin
      chk(!fits(), "reload request although input fits");
      chk(in_req_t == 2'(tt), "reload time step");
      req_seen = 1; n_req++;
    end
    if (pe_start) begin
      n_pass++;
      chk(IT == OT || tt == 0, "pass at t>0 with mixed time steps");
      chk(fits() || req_seen, "pass without reload");
      chk(pe_c == 10'(C) && pe_b == 4'(ENC ? 8 : 1), "pass size");
      chk(pe_in_base == 9'(fits() ? tt * C * (ENC ? 8 : 1) : 0), "input base");
      chk(pe_wm_base == 16'((KB + kk) * C), "weight map base");
      chk(pe_nz_base == 18'(nzk), "nz base");
      pass_seen = 1;
    end
    if (lif_update) begin
      n_lif++;
      chk(pass_seen || (IT != OT && tt > 0), "LIF before pass");
      chk(lif_first == (tt == 0), "first_t");
      chk(bias_addr == 9'(KB + kk), "bias address");
    end
    if (out_we) begin
      n_wr++;
      chk(out_waddr == 9'(tt * K + kk), "output address t*K+k");
      chk(out_wmask == (POOL ? 4'(1 << PSEL) : 4'hf), "output mask");
      pass_seen = 0; req_seen = 0;
      if (tt == OT - 1) begin tt = 0; nzk += ((kk + KB) % 5) + 1; kk++; end
      else tt++;
    end
  end

  task automatic wcfg(int a, int d);
    @(negedge clk); cfg_we = 1; cfg_addr = 4'(a); cfg_wdata = 32'(d);
    @(negedge clk); cfg_we = 0;
  endtask

  // run one job; nz_bad is added to NZ_NUM, expect_cfg_err for invalid jobs
  task automatic job(int c, int k, int it, int ot, int enc, int pool, int psel, int kb, int nb,
                     int nz_bad, bit expect_cfg_err);
    int nz_total, pass_exp, cyc;
    C = c; K = k; IT = it; OT = ot; ENC = enc; POOL = pool; PSEL = psel; KB = kb; NB = nb;
    kk = 0; tt = 0; nzk = nb; pass_seen = 0; req_seen = 0;
    nz_total = 0;
    for (int i = 0; i < k; i++) nz_total += ((i + kb) % 5) + 1;
    n_pass = 0; n_lif = 0; n_wr = 0; n_req = 0;
    wcfg(0, c); wcfg(1, k); wcfg(2, 3); wcfg(3, it); wcfg(4, ot);
    wcfg(5, nz_total + nz_bad); wcfg(6, pool | (enc << 1) | (psel << 2)); wcfg(7, kb); wcfg(8, nb);
    wcfg(15, 1);
    @(posedge clk); #1;
    chk(cfg_err == expect_cfg_err, "cfg_err");
    if (expect_cfg_err) begin
      tot_cfg_err++;
      chk(!busy, "invalid job started");
      return;
    end
    cyc = 0;
    while (!done) begin @(posedge clk); #1; cyc++; end
    chk(nz_err == (nz_bad != 0), "nz_err");
    if (nz_err) tot_nz_err++;
    pass_exp = (it == ot) ? k * ot : k;
    chk(n_pass == pass_exp, "number of passes");
    chk(n_lif == k * ot && n_wr == k * ot, "number of LIF updates / writes");
    chk(n_req == (fits() ? 0 : k * ot), "number of reload requests");
    tot_req += n_req;
    if (it != ot) tot_mixed += n_lif - n_pass;
    if (pool) tot_pool += n_wr;
    $display("job C=%0d K=%0d T %0d->%0d enc=%0d pool=%0d: passes=%0d lif=%0d reloads=%0d cycles=%0d",
             c, k, it, ot, enc, pool, n_pass, n_lif, n_req, cyc);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    job(16, 7, 2, 2, 0, 0, 0, 0, 0, 0, 0);
    job(3, 5, 1, 4, 1, 0, 0, 0, 0, 0, 0);       // encoding layer, mixed time steps
    job(200, 4, 3, 3, 0, 0, 0, 0, 0, 0, 0);     // 600 planes: reload
    job(32, 9, 1, 1, 0, 1, 2, 100, 777, 0, 0);  // pool to bank 2, channel group
    job(8, 3, 2, 2, 0, 0, 0, 0, 0, 5, 0);       // wrong NZ_NUM
    job(8, 3, 2, 3, 0, 0, 0, 0, 0, 0, 1);       // T 2->3 not supported
    job(8, 300, 1, 2, 0, 0, 0, 0, 0, 0, 1);     // 600 outputs do not fit
    job(3, 4, 2, 2, 1, 0, 0, 0, 0, 0, 1);       // encoding layer with 2 time steps
    job(5, 2, 1, 1, 0, 0, 0, 0, 0, 0, 0);       // runs after errors
    // every mechanism must have been exercised
    chk(tot_req > 0, "no reload seen");
    chk(tot_mixed > 0, "no mixed-time-step LIF repeat seen");
    chk(tot_pool > 0, "no pooled write seen");
    chk(tot_cfg_err == 3, "cfg_err cases");
    chk(tot_nz_err == 1, "nz_err cases");
    $display("reloads=%0d mixed_repeats=%0d pooled=%0d cfg_err=%0d nz_err=%0d",
             tot_req, tot_mixed, tot_pool, tot_cfg_err, tot_nz_err);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
