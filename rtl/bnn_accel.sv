// bnn_accel: binary convolution accelerator (top level).
//
// It computes one binarised convolution layer - 1-bit weights, 2-bit
// activations, 32-bit sums - for a host processor that shares an off-chip
// memory with it. Inputs, kernels and outputs are stored depth-first
// (height x width x depth, depth varying fastest), so the receptive field of
// an output pixel is Kh contiguous bursts and the outputs of a PEN pass are
// one contiguous burst. The host writes the layer description on cfg, pulses
// start and waits for done; quantisation of the sums (the threshold unit) and
// the non-binary layers stay on the host.
//
// Inside: accel_ctrl sequences the layer; burst_reader fetches kernels into
// kernel_buffer (one bank per PE) and input windows into input_buffer (one
// packed D-bar per word); bnn_pen (NUM_PE bnn_pe) consumes one D-bar per
// cycle against NUM_PE kernels; out_writer bursts the sums back.
//
// Ports: a read channel (rd_*) and a write channel (wr_*) toward the bus
// subsystem / off-chip memory, word-addressed 32-bit words; see
// burst_reader and out_writer for the handshakes. perf_* count PEN cycles,
// cycles the PEN waited for input, and cycles spent waiting on the writer.
//
// From the paper: PE/PEN structure with at least 16 PEs, 32-element packed
// words, depth-first data order, burst transfers, on-chip RAM blocks for
// kernels and inputs. The memory layout, bus handshakes, buffer depths and
// control/status ports are this design's own choices.
module bnn_accel
  import bnn_pkg::*;
#(
  parameter int unsigned NUM_PE = 16,
  parameter int unsigned KDEPTH = 512,
  parameter int unsigned IDEPTH = 512
) (
  input  logic        clk,
  input  logic        rst_n,
  // control from the host
  input  logic        start,
  input  layer_cfg_t  cfg,
  output logic        busy,
  output logic        done,
  output logic        error,
  output logic [31:0] perf_compute,
  output logic [31:0] perf_starve,
  output logic [31:0] perf_out_wait,
  // read channel to off-chip memory
  output logic        rd_req,
  output addr_t       rd_addr,
  output len_t        rd_len,
  input  logic        rd_gnt,
  input  word_t       rd_data,
  input  logic        rd_dvalid,
  // write channel to off-chip memory
  output logic        wr_valid,
  output addr_t       wr_addr,
  output len_t        wr_len,
  output word_t       wr_data,
  input  logic        wr_ready
);

  localparam int unsigned KAW = $clog2(KDEPTH);
  localparam int unsigned IAW = $clog2(IDEPTH);
  localparam int unsigned BW  = NUM_PE > 1 ? $clog2(NUM_PE) : 1;

  logic rd_cmd_valid, rd_cmd_ready, rd_out_valid;
  addr_t rd_cmd_addr;
  len_t  rd_cmd_len;
  word_t rd_out_data;

  logic kb_we, kb_re;
  logic [BW-1:0]  kb_wbank;
  logic [KAW-1:0] kb_waddr, kb_raddr;
  logic [NUM_PE-1:0][WORD_W-1:0] kb_rdata;

  logic ib_wr_start, ib_wr_valid, ib_re;
  logic [IAW:0]   ib_wr_count;
  logic [IAW-1:0] ib_raddr;
  dbar_t          ib_rdata;

  logic pen_clr, pen_en;
  logic [NUM_PE-1:0][ACC_W-1:0] pen_acc;

  logic wr_cmd_valid, wr_cmd_ready;
  addr_t wr_cmd_addr;
  len_t  wr_cmd_len;

  accel_ctrl #(.NUM_PE(NUM_PE), .KDEPTH(KDEPTH), .IDEPTH(IDEPTH)) u_ctrl (
    .clk, .rst_n, .start, .cfg, .busy, .done, .error,
    .perf_compute, .perf_starve, .perf_out_wait,
    .rd_cmd_valid, .rd_cmd_ready, .rd_cmd_addr, .rd_cmd_len, .rd_out_valid,
    .kb_we, .kb_wbank, .kb_waddr, .kb_re, .kb_raddr,
    .ib_wr_start, .ib_wr_valid, .ib_wr_count, .ib_re, .ib_raddr,
    .pen_clr, .pen_en,
    .wr_cmd_valid, .wr_cmd_ready, .wr_cmd_addr, .wr_cmd_len
  );

  burst_reader u_rd (
    .clk, .rst_n,
    .cmd_valid (rd_cmd_valid), .cmd_ready (rd_cmd_ready),
    .cmd_addr  (rd_cmd_addr),  .cmd_len   (rd_cmd_len),
    .out_valid (rd_out_valid), .out_data  (rd_out_data), .done (),
    .rd_req, .rd_addr, .rd_len, .rd_gnt, .rd_data, .rd_dvalid
  );

  kernel_buffer #(.NUM_PE(NUM_PE), .DEPTH(KDEPTH)) u_kbuf (
    .clk,
    .we (kb_we), .wbank (kb_wbank), .waddr (kb_waddr), .wdata (rd_out_data),
    .re (kb_re), .raddr (kb_raddr), .rdata (kb_rdata)
  );

  input_buffer #(.DEPTH(IDEPTH)) u_ibuf (
    .clk, .rst_n,
    .wr_start (ib_wr_start), .wr_valid (ib_wr_valid), .wr_word (rd_out_data),
    .wr_count (ib_wr_count),
    .re (ib_re), .raddr (ib_raddr), .rdata (ib_rdata)
  );

  bnn_pen #(.NUM_PE(NUM_PE)) u_pen (
    .clk, .rst_n, .clr (pen_clr), .en (pen_en),
    .x (ib_rdata), .w (kb_rdata), .acc (pen_acc)
  );

  out_writer #(.NUM_PE(NUM_PE)) u_wr (
    .clk, .rst_n,
    .cmd_valid (wr_cmd_valid), .cmd_ready (wr_cmd_ready),
    .cmd_addr  (wr_cmd_addr),  .cmd_len   (wr_cmd_len),
    .cmd_data  (pen_acc),      .done      (),
    .wr_valid, .wr_addr, .wr_len, .wr_data, .wr_ready
  );

endmodule
