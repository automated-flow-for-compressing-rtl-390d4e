// accel_ctrl: sequencer of the binary convolution accelerator.
//
// It runs one binarised convolution layer (stride 1, no padding: the input is
// stored already padded) held in off-chip memory in depth-first order:
//   input   word  in_base  + ((y*Iw + x)*Dw + dc)*A_BITS + plane
//   kernels word  k_base   + ((k*Kh + kh)*Kw + kw)*Dw + dc
//   outputs word  out_base + (oy*Ow + ox)*OFM + k        (32-bit sums)
// with Dw = input depth / 32, Ow = Iw-Kw+1, Oh = Ih-Kh+1.
//
// Loop order: for each group of NUM_PE output channels, the group's kernels
// are read in ONE burst (they are contiguous) into the kernel banks. Then for
// every output pixel the receptive field is fetched as Kh bursts, one per
// kernel row: in depth-first order the Kw*Dw D-bars of a kernel row are
// contiguous in memory, so a Kh x Kw x Kd window costs only Kh address jumps.
// While the words land in the input buffer, the PEN already consumes D-bar i
// as soon as it is complete (one D-bar per cycle; it waits - a "starve"
// cycle - when the data has not arrived). After the last D-bar the NUM_PE
// sums are handed to the write master as one burst of consecutive output
// channels, and the next pixel starts while they are written.
//
// Interface: a start pulse with a layer_cfg_t; busy until done pulses. A
// configuration that does not fit (kernel window larger than the buffers,
// empty sizes, kernel larger than the input) ends at once with error set.
// perf counters (reset by start): PEN cycles, starve cycles, cycles spent
// waiting for the write master.
//
// From the paper: inter-kernel parallel PEN, depth-first order of inputs,
// kernels and outputs, Kh jumps per kernel window, burst transfers, limited
// on-chip memory. The loop order, the overlap of fetch with compute, the
// memory layout formulas above and the error/perf outputs are this design's.
module accel_ctrl
  import bnn_pkg::*;
#(
  parameter int unsigned NUM_PE  = 16,
  parameter int unsigned KDEPTH  = 512,
  parameter int unsigned IDEPTH  = 512,
  parameter int unsigned A_BITS  = ABITS,
  localparam int unsigned KAW    = $clog2(KDEPTH),
  localparam int unsigned IAW    = $clog2(IDEPTH),
  localparam int unsigned BW     = NUM_PE > 1 ? $clog2(NUM_PE) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  layer_cfg_t        cfg,
  output logic              busy,
  output logic              done,
  output logic              error,
  output logic [31:0]       perf_compute,
  output logic [31:0]       perf_starve,
  output logic [31:0]       perf_out_wait,
  // burst reader command and stream
  output logic              rd_cmd_valid,
  input  logic              rd_cmd_ready,
  output addr_t             rd_cmd_addr,
  output len_t              rd_cmd_len,
  input  logic              rd_out_valid,
  // kernel buffer
  output logic              kb_we,
  output logic [BW-1:0]     kb_wbank,
  output logic [KAW-1:0]    kb_waddr,
  output logic              kb_re,
  output logic [KAW-1:0]    kb_raddr,
  // input buffer
  output logic              ib_wr_start,
  output logic              ib_wr_valid,
  input  logic [IAW:0]      ib_wr_count,
  output logic              ib_re,
  output logic [IAW-1:0]    ib_raddr,
  // PEN
  output logic              pen_clr,
  output logic              pen_en,
  // write master
  output logic              wr_cmd_valid,
  input  logic              wr_cmd_ready,
  output addr_t             wr_cmd_addr,
  output len_t              wr_cmd_len
);

  typedef enum logic [2:0] {S_IDLE, S_KCMD, S_KLOAD, S_PIX, S_OUT, S_DRAIN} state_t;
  state_t state;

  layer_cfg_t c;
  logic [15:0] ow_n, oh_n;     // output width/height
  logic [15:0] kwords;         // D-bars per kernel = Kh*Kw*Dw
  logic [15:0] pix_words;      // bus words per input pixel = Dw*A_BITS
  logic [15:0] row_words;      // bus words per kernel row  = Kw*Dw*A_BITS

  logic [15:0] oc0;            // first output channel of the group
  logic [15:0] ngrp;           // channels in this group
  logic [15:0] oy, ox;         // output pixel
  logic [3:0]  frow;           // next kernel row to fetch
  logic [15:0] ci;             // next D-bar to compute
  logic [KAW-1:0] ka;          // kernel load address
  logic [BW-1:0]  kb;          // kernel load bank
  logic        v1, first1, last1, acc_ok;

  // derived sizes of the incoming configuration
  logic [15:0] n_ow, n_oh, n_kwords, n_pix, n_row;
  logic        cfg_bad;
  always_comb begin
    n_ow     = cfg.iw - 16'(cfg.kw) + 16'd1;
    n_oh     = cfg.ih - 16'(cfg.kh) + 16'd1;
    n_kwords = 16'(cfg.kh) * 16'(cfg.kw) * 16'(cfg.id_words);
    n_pix    = 16'(cfg.id_words) * 16'(A_BITS);
    n_row    = 16'(cfg.kw) * n_pix;
    cfg_bad  = cfg.kh == '0 || cfg.kw == '0 || cfg.id_words == '0 || cfg.ofm == '0 ||
               16'(cfg.kh) > cfg.ih || 16'(cfg.kw) > cfg.iw ||
               32'(n_kwords) > KDEPTH || 32'(n_kwords) > IDEPTH;
  end

  logic [15:0] rem_ch;
  assign rem_ch = c.ofm - oc0;

  // command outputs
  always_comb begin
    rd_cmd_valid = 1'b0;
    rd_cmd_addr  = '0;
    rd_cmd_len   = '0;
    if (state == S_KCMD) begin
      rd_cmd_valid = 1'b1;
      rd_cmd_addr  = c.k_base + addr_t'(oc0) * addr_t'(kwords);
      rd_cmd_len   = len_t'(ngrp * kwords);
    end else if (state == S_PIX && frow < c.kh) begin
      rd_cmd_valid = 1'b1;
      rd_cmd_addr  = c.in_base +
                     ((addr_t'(oy) + addr_t'(frow)) * addr_t'(c.iw) + addr_t'(ox)) * addr_t'(pix_words);
      rd_cmd_len   = len_t'(row_words);
    end
  end

  assign wr_cmd_valid = (state == S_OUT);
  assign wr_cmd_addr  = c.out_base + (addr_t'(oy) * addr_t'(ow_n) + addr_t'(ox)) * addr_t'(c.ofm)
                        + addr_t'(oc0);
  assign wr_cmd_len   = len_t'(ngrp);

  assign kb_we       = (state == S_KLOAD) && rd_out_valid;
  assign kb_wbank    = kb;
  assign kb_waddr    = ka;
  assign ib_wr_valid = (state == S_PIX) && rd_out_valid;
  // rewind the input buffer on the edge that enters S_PIX, so that its
  // count reads zero in the first cycle of a pixel
  assign ib_wr_start = (state == S_OUT && wr_cmd_ready) ||
                       (state == S_KLOAD && rd_out_valid &&
                        16'(kb) == ngrp - 1'b1 && 16'(ka) == kwords - 1'b1);

  // compute issue: D-bar ci is read once the input buffer holds it
  logic issue;
  assign issue    = (state == S_PIX) && ci < kwords && 17'(ci) < 17'(ib_wr_count);
  assign kb_re    = issue;
  assign ib_re    = issue;
  assign kb_raddr = KAW'(ci);
  assign ib_raddr = IAW'(ci);
  assign pen_en   = v1;
  assign pen_clr  = v1 && first1;
  assign busy     = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      c <= '0; ow_n <= '0; oh_n <= '0; kwords <= '0; pix_words <= '0; row_words <= '0;
      oc0 <= '0; ngrp <= '0; oy <= '0; ox <= '0; frow <= '0; ci <= '0;
      ka <= '0; kb <= '0; v1 <= 1'b0; first1 <= 1'b0; last1 <= 1'b0; acc_ok <= 1'b0;
      done <= 1'b0; error <= 1'b0;
      perf_compute <= '0; perf_starve <= '0; perf_out_wait <= '0;
    end else begin
      done        <= 1'b0;
      // PEN pipeline: read issued -> data/en next cycle -> sums the cycle after
      v1     <= issue;
      first1 <= issue && ci == '0;
      last1  <= issue && ci == kwords - 1'b1;
      if (last1) acc_ok <= 1'b1;
      if (v1) perf_compute <= perf_compute + 1'b1;

      unique case (state)
        S_IDLE: if (start) begin
          perf_compute <= '0; perf_starve <= '0; perf_out_wait <= '0;
          if (cfg_bad) begin
            error <= 1'b1;
            done  <= 1'b1;
          end else begin
            error     <= 1'b0;
            c         <= cfg;
            ow_n      <= n_ow;
            oh_n      <= n_oh;
            kwords    <= n_kwords;
            pix_words <= n_pix;
            row_words <= n_row;
            oc0       <= '0;
            ngrp      <= cfg.ofm > 16'(NUM_PE) ? 16'(NUM_PE) : cfg.ofm;
            state     <= S_KCMD;
          end
        end
        S_KCMD: if (rd_cmd_ready) begin
          ka    <= '0;
          kb    <= '0;
          state <= S_KLOAD;
        end
        S_KLOAD: begin
          if (rd_out_valid) begin
            if (16'(ka) == kwords - 1'b1) begin
              ka <= '0;
              kb <= kb + 1'b1;
            end else begin
              ka <= ka + 1'b1;
            end
            if (16'(kb) == ngrp - 1'b1 && 16'(ka) == kwords - 1'b1) begin
              oy          <= '0;
              ox          <= '0;
              frow        <= '0;
              ci          <= '0;
              acc_ok      <= 1'b0;
              state       <= S_PIX;
            end
          end
        end
        S_PIX: begin
          if (rd_cmd_valid && rd_cmd_ready) frow <= frow + 1'b1;
          if (issue) ci <= ci + 1'b1;
          else if (ci < kwords) perf_starve <= perf_starve + 1'b1;
          if (acc_ok) state <= S_OUT;
        end
        S_OUT: if (wr_cmd_ready) begin
          acc_ok      <= 1'b0;
          ci          <= '0;
          frow        <= '0;
          state       <= S_PIX;
          if (ox == ow_n - 1'b1) begin
            ox <= '0;
            if (oy == oh_n - 1'b1) begin
              oy <= '0;
              if (rem_ch <= 16'(NUM_PE)) begin
                state <= S_DRAIN;
              end else begin
                oc0   <= oc0 + 16'(NUM_PE);
                ngrp  <= (rem_ch - 16'(NUM_PE)) > 16'(NUM_PE) ? 16'(NUM_PE)
                                                               : rem_ch - 16'(NUM_PE);
                state <= S_KCMD;
              end
            end else begin
              oy <= oy + 1'b1;
            end
          end else begin
            ox <= ox + 1'b1;
          end
        end else begin
          perf_out_wait <= perf_out_wait + 1'b1;
        end
        S_DRAIN: if (wr_cmd_ready) begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_cmd_len_nonzero: assert property (@(posedge clk) disable iff (!rst_n)
    rd_cmd_valid |-> rd_cmd_len != '0);

endmodule
