// snn_accel_top -- sparse compressed spiking neural network accelerator.
//
// Datapath: Input SRAM (4 x 512 x 144 b, one 576-bit bit plane per address) and the
// sparse weights (Weight Map SRAM: 9-bit masks; NZ Weight SRAM: nonzero 8-bit values)
// feed the PE controller, whose enable map encoder turns each nonzero weight into an
// enable map; the 576 gated calculation elements accumulate the weight wherever the
// map is 1 (gated one-to-all product). After a pass the 8-bit results go to 576 LIF
// neurons together with the channel's bias from the Bias RF; their spikes, or their
// 2x2 max pool, are written to the Output SRAM (4 x 512 x 144 b). The system
// controller holds the configuration and runs the output-channel / time-step loop.
//
// Memory-controller side: while the accelerator is idle (busy = 0) the mem_* ports
// write the SRAMs and the bias RF and read the Output SRAM (read data one clock after
// out_re); the cfg_* ports write configuration registers and the setup register
// starts a job. During a job the datapath owns the SRAMs, except that in_we may load
// the Input SRAM while in_req is high, before in_ack. done pulses at the end of a job.
// Which blocks exist and how they connect follows the published architecture; the
// port protocol is this design's own.
module snn_accel_top
  import snn_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  // configuration
  input  logic              cfg_we,
  input  logic [3:0]        cfg_addr,
  input  logic [31:0]       cfg_wdata,
  output logic              busy,
  output logic              done,
  output logic              cfg_err,
  output logic              nz_err,
  // input reload handshake
  output logic              in_req,
  output logic [1:0]        in_req_t,
  input  logic              in_ack,
  // memory-controller write ports
  input  logic              in_we,
  input  logic [1:0]        in_wbank,
  input  logic [IN_AW-1:0]  in_waddr,
  input  logic [Q_BITS-1:0] in_wdata,
  input  logic              wm_we,
  input  logic [WM_AW-1:0]  wm_waddr,
  input  logic [8:0]        wm_wdata,
  input  logic              nz_we,
  input  logic [NZ_AW-1:0]  nz_waddr,
  input  logic [7:0]        nz_wdata,
  input  logic              bias_we,
  input  logic [K_AW-1:0]   bias_waddr,
  input  logic [7:0]        bias_wdata,
  // memory-controller read port of the Output SRAM
  input  logic              out_re,
  input  logic [1:0]        out_rbank,
  input  logic [IN_AW-1:0]  out_raddr,
  output logic [Q_BITS-1:0] out_rdata
);
  cfg_t cfg;

  // system controller <-> PE controller
  logic             pe_start, pe_done, pe_busy;
  logic [9:0]       pe_c;
  logic [3:0]       pe_b;
  logic [IN_AW-1:0] pe_in_base;
  logic [WM_AW-1:0] pe_wm_base;
  logic [NZ_AW-1:0] pe_nz_base, pe_nz_end;
  // memories
  logic             in_re, wm_re, nz_re;
  logic [IN_AW-1:0] in_raddr;
  logic [WM_AW-1:0] wm_raddr;
  logic [NZ_AW-1:0] nz_raddr;
  logic [N_PE-1:0]  in_rdata;
  logic [8:0]       wm_rdata;
  logic [7:0]       nz_rdata, bias_rdata;
  logic [K_AW-1:0]  bias_raddr;
  // PE / LIF / output
  logic             pe_clr, acc_en;
  logic [N_PE-1:0]  en_map;
  logic [2:0]       bit_sel;
  logic [N_PE-1:0][V_W-1:0] conv_out, vmem;
  logic             lif_update, lif_first;
  logic [N_PE-1:0]  spikes;
  logic [Q_BITS-1:0] pooled;
  logic             out_we;
  logic [3:0]       out_wmask;
  logic [IN_AW-1:0] out_waddr;

  system_controller u_sysctl (
    .clk, .rst_n,
    .cfg_we, .cfg_addr, .cfg_wdata,
    .cfg, .busy, .done, .cfg_err, .nz_err,
    .in_req, .in_req_t, .in_ack,
    .pe_start, .pe_c, .pe_b, .pe_in_base, .pe_wm_base, .pe_nz_base,
    .pe_done, .pe_nz_end,
    .bias_addr (bias_raddr),
    .lif_update, .lif_first,
    .out_we, .out_wmask, .out_waddr
  );

  pe_controller u_pectl (
    .clk, .rst_n,
    .start    (pe_start),
    .c_num    (pe_c),
    .b_num    (pe_b),
    .ks       (cfg.ks),
    .in_base  (pe_in_base),
    .wm_base  (pe_wm_base),
    .nz_base  (pe_nz_base),
    .busy     (pe_busy),
    .done     (pe_done),
    .nz_end   (pe_nz_end),
    .in_re, .in_addr (in_raddr), .in_rdata,
    .wm_re, .wm_addr (wm_raddr), .wm_rdata,
    .nz_re, .nz_addr (nz_raddr),
    .pe_clr, .acc_en, .en_map, .bit_sel
  );

  pe_array u_pe (
    .clk, .rst_n,
    .clr      (pe_clr),
    .acc_en,
    .en_map,
    .weight   (nz_rdata),
    .bit_sel,
    .encoding (cfg.encoding),
    .conv_out
  );

  lif_array u_lif (
    .clk, .rst_n,
    .update   (lif_update),
    .first_t  (lif_first),
    .conv_in  (conv_out),
    .bias     (bias_rdata),
    .spikes,
    .vmem
  );

  maxpool u_pool (.spikes, .pooled);

  input_sram u_in (
    .clk,
    .re    (in_re),
    .raddr (in_raddr),
    .rdata (in_rdata),
    .we    (in_we && (!busy || in_req)),
    .wbank (in_wbank),
    .waddr (in_waddr),
    .wdata (in_wdata)
  );

  weight_map_sram u_wm (
    .clk,
    .re    (wm_re),
    .raddr (wm_raddr),
    .rdata (wm_rdata),
    .we    (wm_we && !busy),
    .waddr (wm_waddr),
    .wdata (wm_wdata)
  );

  nz_weight_sram u_nz (
    .clk,
    .re    (nz_re),
    .raddr (nz_raddr),
    .rdata (nz_rdata),
    .we    (nz_we && !busy),
    .waddr (nz_waddr),
    .wdata (nz_wdata)
  );

  bias_rf u_bias (
    .clk, .rst_n,
    .raddr (bias_raddr),
    .rdata (bias_rdata),
    .we    (bias_we && !busy),
    .waddr (bias_waddr),
    .wdata (bias_wdata)
  );

  output_sram u_out (
    .clk,
    .we    (out_we),
    .wmask (out_wmask),
    .waddr (out_waddr),
    .wdata (cfg.pool ? {4{pooled}} : spikes),
    .re    (out_re && !busy),
    .rbank (out_rbank),
    .raddr (out_raddr),
    .rdata (out_rdata)
  );

  a_pe_idle_at_start: assert property (@(posedge clk) disable iff (!rst_n) pe_start |-> !pe_busy);
endmodule
