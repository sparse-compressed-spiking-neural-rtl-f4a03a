// system_controller -- configuration registers and the layer-level loop of a job.
//
// A job is one layer (or one group of its output channels) on one 18x32 tile. The
// memory controller writes the configuration registers (cfg_addr_e in snn_pkg) and
// then the setup register, which starts the job. The controller runs the loop
//     for k in 0..K-1, for t in 0..OUT_T-1:
//         if IN_T == OUT_T or t == 0:  convolution pass over (b, c)   -> PE sums
//         LIF update with bias[k]      (first_t at t == 0)            -> spikes
//         write spikes (or their 2x2 max pool) to Output SRAM address t*K + k
// When IN_T < OUT_T (mixed time steps) the convolution is done once and the same
// result is fed to the LIF for every output time step. The t*K + k address stores
// each output time step's channels contiguously, which is the input order of the
// next layer (temporal channel reordering). Input SRAM address of plane (t, b, c)
// is (t*B + b)*C + c. If a layer's C*IN_T*B planes exceed the 512-word Input
// SRAM, the SRAM holds one time step at a time: before every convolution pass
// in_req is raised with the needed time step in in_req_t, and the pass starts after
// in_ack (the memory controller has reloaded the planes at address b*C + c).
// K_BASE and NZ_BASE let a layer be split into groups of output channels whose
// outputs fit the Output SRAM (K*OUT_T <= 512). NZ_NUM, the number of nonzero
// weights of the job, is checked at the end (nz_err). A configuration that cannot
// run sets cfg_err and is not started.
// Timing: done pulses for one cycle at the end of the job; busy is high from the
// cycle after the setup write until done. Register map, handshake, grouping and
// error flags are this design's choices; the loop order, the repetition of the
// convolution for mixed time steps and the reordered output addresses follow the
// published data flow.
module system_controller
  import snn_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  // configuration bus
  input  logic              cfg_we,
  input  logic [3:0]        cfg_addr,
  input  logic [31:0]       cfg_wdata,
  output cfg_t              cfg,
  output logic              busy,
  output logic              done,
  output logic              cfg_err,
  output logic              nz_err,
  // input reload handshake
  output logic              in_req,
  output logic [1:0]        in_req_t,
  input  logic              in_ack,
  // PE controller
  output logic              pe_start,
  output logic [9:0]        pe_c,
  output logic [3:0]        pe_b,
  output logic [IN_AW-1:0]  pe_in_base,
  output logic [WM_AW-1:0]  pe_wm_base,
  output logic [NZ_AW-1:0]  pe_nz_base,
  input  logic              pe_done,
  input  logic [NZ_AW-1:0]  pe_nz_end,
  // bias, LIF, output SRAM
  output logic [K_AW-1:0]   bias_addr,
  output logic              lif_update,
  output logic              lif_first,
  output logic              out_we,
  output logic [3:0]        out_wmask,
  output logic [IN_AW-1:0]  out_waddr
);
  typedef enum logic [2:0] {S_IDLE, S_REQ, S_CONV, S_WAIT, S_LIF, S_WR} state_e;
  state_e state;

  logic [9:0]       k_cnt;
  logic [2:0]       t_cnt;
  logic [NZ_AW-1:0] nz_k;       // NZ address of the current output channel
  logic [NZ_AW-1:0] nz_next;    // NZ address after it
  logic [3:0]       b_planes;
  logic             in_fits;
  logic             compute;    // this time step needs a convolution pass
  logic             cfg_ok;
  logic             setup;

  assign setup = cfg_we && (cfg_addr == CFG_SETUP) && cfg_wdata[0] && (state == S_IDLE);

  // configuration registers (writable while idle)
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg <= '{c: 10'd1, k: 10'd1, ks: 2'd3, in_t: 3'd1, out_t: 3'd1, default: '0};
    end else if (cfg_we && state == S_IDLE) begin
      unique case (cfg_addr)
        CFG_C:       cfg.c        <= cfg_wdata[9:0];
        CFG_K:       cfg.k        <= cfg_wdata[9:0];
        CFG_KS:      cfg.ks       <= cfg_wdata[1:0];
        CFG_IN_T:    cfg.in_t     <= cfg_wdata[2:0];
        CFG_OUT_T:   cfg.out_t    <= cfg_wdata[2:0];
        CFG_NZ_NUM:  cfg.nz_num   <= cfg_wdata[NZ_AW:0];
        CFG_FLAGS:   {cfg.pool_sel, cfg.encoding, cfg.pool} <= cfg_wdata[3:0];
        CFG_K_BASE:  cfg.k_base   <= cfg_wdata[K_AW-1:0];
        CFG_NZ_BASE: cfg.nz_base  <= cfg_wdata[NZ_AW-1:0];
        default: ;
      endcase
    end
  end

  always_comb begin
    b_planes = cfg.encoding ? 4'(ENC_BITS) : 4'd1;
    in_fits  = (32'(cfg.c) * 32'(cfg.in_t) * 32'(b_planes)) <= 32'(IN_DEPTH);
    compute  = (cfg.in_t == cfg.out_t) || (t_cnt == '0);
    cfg_ok   = (cfg.c >= 10'd1) && (cfg.c <= 10'(MAX_C))
            && (cfg.k >= 10'd1) && (cfg.k <= 10'(MAX_K))
            && (cfg.ks >= 2'd1)
            && (cfg.in_t >= 3'd1) && (cfg.in_t <= 3'(MAX_T))
            && (cfg.out_t >= 3'd1) && (cfg.out_t <= 3'(MAX_T))
            && ((cfg.in_t == cfg.out_t) || (cfg.in_t == 3'd1))
            && ((32'(cfg.k) * 32'(cfg.out_t)) <= 32'(IN_DEPTH))
            && ((32'(cfg.k_base) + 32'(cfg.k)) <= 32'(MAX_K))
            && (cfg.encoding ? (cfg.in_t == 3'd1 && in_fits) : 1'b1);
  end

  // pass command
  always_comb begin
    pe_c       = cfg.c;
    pe_b       = b_planes;
    pe_in_base = in_fits ? IN_AW'(32'(t_cnt) * 32'(cfg.c) * 32'(b_planes)) : '0;
    pe_wm_base = WM_AW'((32'(cfg.k_base) + 32'(k_cnt)) * 32'(cfg.c));
    pe_nz_base = nz_k;
    bias_addr  = K_AW'(32'(cfg.k_base) + 32'(k_cnt));
    in_req     = (state == S_REQ);
    in_req_t   = t_cnt[1:0];
    pe_start   = (state == S_CONV);
    lif_update = (state == S_LIF);
    lif_first  = (t_cnt == '0);
    out_we     = (state == S_WR);
    out_wmask  = cfg.pool ? (4'b0001 << cfg.pool_sel) : 4'b1111;
    out_waddr  = IN_AW'(32'(t_cnt) * 32'(cfg.k) + 32'(k_cnt));
  end

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      k_cnt   <= '0;
      t_cnt   <= '0;
      nz_k    <= '0;
      nz_next <= '0;
      done    <= 1'b0;
      cfg_err <= 1'b0;
      nz_err  <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (setup) begin
          cfg_err <= !cfg_ok;
          nz_err  <= 1'b0;
          k_cnt   <= '0;
          t_cnt   <= '0;
          nz_k    <= cfg.nz_base;
          nz_next <= cfg.nz_base;
          if (cfg_ok) state <= in_fits ? S_CONV : S_REQ;
        end
        S_REQ:  if (in_ack) state <= S_CONV;
        S_CONV: state <= S_WAIT;
        S_WAIT: if (pe_done) begin
          nz_next <= pe_nz_end;
          state   <= S_LIF;
        end
        S_LIF:  state <= S_WR;
        S_WR: begin
          if (t_cnt == cfg.out_t - 3'd1) begin
            t_cnt <= '0;
            nz_k  <= nz_next;
            if (k_cnt == cfg.k - 10'd1) begin
              state  <= S_IDLE;
              done   <= 1'b1;
              nz_err <= (32'(nz_next) - 32'(cfg.nz_base)) != 32'(cfg.nz_num);
            end else begin
              k_cnt <= k_cnt + 10'd1;
              state <= in_fits ? S_CONV : S_REQ;
            end
          end else begin
            t_cnt <= t_cnt + 3'd1;
            // next time step: convolve again, or reuse the PE sums (mixed time steps)
            if (cfg.in_t == cfg.out_t) state <= in_fits ? S_CONV : S_REQ;
            else                       state <= S_LIF;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // the memory controller must keep its hands off while a job runs
  a_cfg_idle: assert property (@(posedge clk) disable iff (!rst_n) busy |-> !cfg_we)
    else $error("system_controller: configuration written while busy");
  a_conv_when_needed: assert property (@(posedge clk) disable iff (!rst_n) pe_start |-> compute);
endmodule
