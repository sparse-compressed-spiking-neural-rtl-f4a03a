// pe_controller -- runs one sparse convolution pass of one output channel.
//
// A pass covers every bit plane b (1 for spike layers, 8 for the encoding layer)
// and, inside it, every input channel c (loop order B -> C). For each plane the
// controller holds the plane's input bits (576) and the kernel's 9-bit sparse map.
// Each cycle the enable map encoder turns the leftmost set map bit into an enable
// map, the NZ Weight SRAM is read at the running nonzero-weight pointer, and that
// bit is cleared; the PE array accumulates one cycle later, when the weight
// arrives. Zero weights therefore take no cycle. The next plane is read while the
// current one is processed, so a channel change costs no cycle; a kernel without any
// nonzero weight takes one idle cycle. For 1x1 kernels (kept dense) the map is not
// read and each channel has one weight.
//
// Timing: start (one cycle, while idle) clears the PE partial sums; with S the sum
// over planes of max(nonzeros, 1), `done` pulses S+3 cycles after start, when the PE
// sums are complete. nz_end is then the pointer after the last weight used.
// Memory reads have one cycle of latency and data held between reads.
// The pipeline and the prefetch are this design's own; the scan order (leftmost
// nonzero first, cleared after use, one weight per cycle) follows the published
// data flow.
module pe_controller
  import snn_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  // pass command
  input  logic              start,
  input  logic [9:0]        c_num,      // input channels
  input  logic [3:0]        b_num,      // bit planes (1 or 8)
  input  logic [1:0]        ks,         // kernel size
  input  logic [IN_AW-1:0]  in_base,    // Input SRAM address of plane (b=0, c=0)
  input  logic [WM_AW-1:0]  wm_base,    // Weight Map address of kernel (k, c=0)
  input  logic [NZ_AW-1:0]  nz_base,    // NZ Weight address of the channel's first weight
  output logic              busy,
  output logic              done,
  output logic [NZ_AW-1:0]  nz_end,
  // memories
  output logic              in_re,
  output logic [IN_AW-1:0]  in_addr,
  input  logic [N_PE-1:0]   in_rdata,
  output logic              wm_re,
  output logic [WM_AW-1:0]  wm_addr,
  input  logic [8:0]        wm_rdata,
  output logic              nz_re,
  output logic [NZ_AW-1:0]  nz_addr,
  // PE array
  output logic              pe_clr,
  output logic              acc_en,
  output logic [N_PE-1:0]   en_map,
  output logic [2:0]        bit_sel
);
  typedef enum logic [1:0] {S_IDLE, S_PRIME, S_RUN, S_DRAIN} state_e;
  state_e state;

  // read-issue side: next plane to read
  logic [9:0]       rd_c;
  logic [3:0]       rd_b;
  logic [IN_AW-1:0] rd_in;       // Input SRAM address of next plane
  logic             rd_more;     // a plane is left to read
  logic             pend;        // a read was issued and not yet loaded
  logic [9:0]       iss_c;       // c and b of the outstanding read
  logic [3:0]       iss_b;
  // working plane
  logic [8:0]       map_q;
  logic [N_PE-1:0]  in_q;
  logic [3:0]       cur_b;
  logic [NZ_AW-1:0] nz_ptr;
  // configuration latched at start
  logic [9:0]       c_q;
  logic [3:0]       b_q;
  logic [1:0]       ks_q;
  logic [WM_AW-1:0] wm_base_q;
  logic [NZ_AW-1:0] nz_base_q;

  logic [1:0] enc_row, enc_col;
  logic       enc_valid;
  logic [N_PE-1:0] en_map_c;

  enable_map_encoder u_enc (
    .wmap     (map_q),
    .ks       (ks_q),
    .in_plane (in_q),
    .row      (enc_row),
    .col      (enc_col),
    .valid    (enc_valid),
    .en_map   (en_map_c)
  );

  logic [8:0] map_nx;
  logic       plane_end;   // current plane's last weight is consumed this cycle
  logic       issue;       // issue the read of the next plane this cycle
  logic       load;        // load the outstanding plane this cycle

  always_comb begin
    map_nx    = map_q & (map_q - 9'd1);     // clear leftmost (lowest-index) one
    plane_end = (state == S_RUN) && (map_nx == '0);
    load      = (state == S_PRIME) || (plane_end && pend);
    issue     = (state == S_IDLE && start) || (load && rd_more);
  end

  // memory read ports
  always_comb begin
    in_re   = issue;
    in_addr = (state == S_IDLE) ? in_base : rd_in;
    wm_re   = issue && (((state == S_IDLE) ? ks : ks_q) != 2'd1);
    wm_addr = (state == S_IDLE) ? wm_base : wm_base_q + WM_AW'(rd_c);
    nz_re   = (state == S_RUN) && enc_valid;
    nz_addr = nz_ptr;
    pe_clr  = (state == S_IDLE) && start;
  end

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      rd_c    <= '0;  rd_b <= '0;  rd_in <= '0;  rd_more <= 1'b0;
      pend    <= 1'b0; iss_c <= '0; iss_b <= '0;
      map_q   <= '0;  in_q <= '0;  cur_b <= '0;  nz_ptr <= '0;
      c_q     <= '0;  b_q <= '0;   ks_q <= '0;   wm_base_q <= '0; nz_base_q <= '0;
      acc_en  <= 1'b0; en_map <= '0; bit_sel <= '0;
      done    <= 1'b0; nz_end <= '0;
    end else begin
      done   <= 1'b0;
      acc_en <= 1'b0;

      // bookkeeping of the read side
      if (issue) begin
        pend  <= 1'b1;
        iss_c <= (state == S_IDLE) ? '0 : rd_c;
        iss_b <= (state == S_IDLE) ? '0 : rd_b;
        // advance to the following plane (c fastest, then b)
        if (state == S_IDLE) begin
          rd_in   <= in_base + IN_AW'(1);
          rd_c    <= (c_num == 10'd1) ? '0 : 10'd1;
          rd_b    <= (c_num == 10'd1) ? 4'd1 : 4'd0;
          rd_more <= (14'(c_num) * 14'(b_num)) > 14'd1;
        end else begin
          rd_in <= rd_in + IN_AW'(1);
          if (rd_c == c_q - 10'd1) begin
            rd_c <= '0;
            rd_b <= rd_b + 4'd1;
            rd_more <= (rd_b + 4'd1) < b_q;
          end else begin
            rd_c <= rd_c + 10'd1;
          end
        end
      end else if (load) begin
        pend <= 1'b0;
      end

      case (state)
        S_IDLE: if (start) begin
          c_q       <= c_num;
          b_q       <= b_num;
          ks_q      <= ks;
          wm_base_q <= wm_base;
          nz_base_q <= nz_base;
          nz_ptr    <= nz_base;
          state     <= S_PRIME;
        end
        S_PRIME: state <= S_RUN;
        S_RUN: begin
          if (enc_valid) begin
            acc_en  <= 1'b1;
            en_map  <= en_map_c;
            bit_sel <= cur_b[2:0];
          end
          if (plane_end && !pend) state <= S_DRAIN;
        end
        S_DRAIN: begin
          done   <= 1'b1;
          nz_end <= nz_ptr;
          state  <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase

      // working plane: load a new one or step through the map
      if (load) begin
        map_q <= (ks_q == 2'd1) ? 9'd1 : wm_rdata;
        in_q  <= in_rdata;
        cur_b <= iss_b;
      end else if (state == S_RUN) begin
        map_q <= map_nx;
      end

      // nonzero-weight pointer: restarts at the channel base for every bit plane
      if (load && iss_c == '0 && state != S_PRIME) nz_ptr <= nz_base_q;
      else if (state == S_RUN && enc_valid)        nz_ptr <= nz_ptr + NZ_AW'(1);
    end
  end

  // a plane read is never issued while an earlier one is still unused
  a_one_read: assert property (@(posedge clk) disable iff (!rst_n) !(issue && pend && !load))
    else $error("pe_controller: plane read issued over an unconsumed one");
endmodule
