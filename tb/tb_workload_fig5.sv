// tb_workload_fig5: runs the layer used as the running example of the
// depth-first order: a 160x160x32 input (2-bit activations) convolved with
// 3x3x32 binary kernels, here with 8 output maps (the smallest count allowed,
// a multiple of 8), on the accelerator at its default size. Every one of the
// 158x158x8 outputs is compared with an element-wise reference, and the PEN
// cycle count and the three-bursts-per-window fetch pattern are checked.
module tb_workload_fig5;
  import bnn_pkg::*;
  localparam int NP = 16;
  localparam addr_t IN_BASE = 32'h100, K_BASE = 32'h10000, OUT_BASE = 32'h20000;

  logic clk = 0, rst_n = 1, start = 0;
  layer_cfg_t cfg;
  logic busy, done, error;
  logic [31:0] perf_compute, perf_starve, perf_out_wait;
  logic rd_req, rd_gnt, rd_dvalid, wr_valid, wr_ready;
  addr_t rd_addr, wr_addr;
  len_t rd_len, wr_len;
  word_t rd_data, wr_data;
  int checks = 0, failures = 0;
  int n_multi_group = 0, n_partial = 0, n_starve = 0, n_out_wait = 0, n_error = 0;

  bnn_accel dut (
    .clk, .rst_n, .start, .cfg, .busy, .done, .error,
    .perf_compute, .perf_starve, .perf_out_wait,
    .rd_req, .rd_addr, .rd_len, .rd_gnt, .rd_data, .rd_dvalid,
    .wr_valid, .wr_addr, .wr_len, .wr_data, .wr_ready);

  mem_model #(.WORDS(524288), .STALL_PCT(10)) mem (
    .clk, .rd_req, .rd_addr, .rd_len, .rd_gnt, .rd_data, .rd_dvalid,
    .wr_valid, .wr_addr, .wr_len, .wr_data, .wr_ready);

  always #5 clk = ~clk;
  // a falling edge on rst_n applies the asynchronous reset before the first clock
  initial #1 rst_n = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic run_layer(input int ih, iw, dw, kh, kw, ofm);
    int oh = ih - kh + 1, ow = iw - kw + 1;
    int kwords = kh * kw * dw;
    int groups = (ofm + NP - 1) / NP;
    int rb0 = mem.rd_bursts, wb0 = mem.wr_beats, bad = 0;
    int cycles = 0;
    // random data
    for (int i = 0; i < ih * iw * dw * ABITS; i++) mem.mem[int'(IN_BASE) + i] = $urandom;
    for (int i = 0; i < ofm * kwords; i++) mem.mem[int'(K_BASE) + i] = $urandom;
    for (int i = 0; i < oh * ow * ofm; i++) mem.mem[int'(OUT_BASE) + i] = 32'hDEADBEEF;
    mem.mem[int'(OUT_BASE) + oh * ow * ofm] = 32'hCAFEF00D;   // guard word
    mem.rd_len_log.delete();
    cfg = '{ih: 16'(ih), iw: 16'(iw), id_words: 8'(dw), kh: 4'(kh), kw: 4'(kw),
            ofm: 16'(ofm), in_base: IN_BASE, k_base: K_BASE, out_base: OUT_BASE};
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (!done) begin @(negedge clk); cycles++; end
    check(!error, "layer flagged as error");
    // reference convolution
    for (int y = 0; y < oh; y++)
      for (int x = 0; x < ow; x++)
        for (int k = 0; k < ofm; k++) begin
          longint s = 0;
          for (int r = 0; r < kh; r++)
            for (int c = 0; c < kw; c++)
              for (int d = 0; d < dw; d++) begin
                word_t wk = mem.mem[int'(K_BASE) + ((k * kh + r) * kw + c) * dw + d];
                int ia = int'(IN_BASE) + (((y + r) * iw + (x + c)) * dw + d) * ABITS;
                word_t p0 = mem.mem[ia], p1 = mem.mem[ia + 1];
                for (int i = 0; i < 32; i++) begin
                  automatic longint a = longint'(p0[i]) + 2 * longint'(p1[i]);
                  s += wk[i] ? a : -a;
                end
              end
          if (mem.mem[int'(OUT_BASE) + (y * ow + x) * ofm + k] != word_t'(s)) begin
            bad++;
            if (bad < 5) $display("out (%0d,%0d,%0d) = %0d, want %0d", y, x, k,
                                  $signed(mem.mem[int'(OUT_BASE) + (y * ow + x) * ofm + k]), s);
          end
          checks++;
        end
    failures += bad;
    bad = 0;
    check(mem.mem[int'(OUT_BASE) + oh * ow * ofm] == 32'hCAFEF00D, "write past output tensor");
    check(mem.wr_beats - wb0 == oh * ow * ofm, "number of output words written");
    check(int'(perf_compute) == groups * oh * ow * kwords, "PEN cycles != one D-bar per cycle");
    check(mem.rd_bursts - rb0 == groups * (1 + oh * ow * kh), "read bursts != Kh per window");
    foreach (mem.rd_len_log[i])
      if (mem.rd_len_log[i] != kw * dw * ABITS) begin
        // the only other burst is a kernel-group load
        if (mem.rd_len_log[i] % kwords != 0) bad++;
      end
    check(bad == 0, "burst lengths");
    if (groups > 1) n_multi_group++;
    if (ofm % NP != 0) n_partial++;
    if (perf_starve > 0) n_starve++;
    if (perf_out_wait > 0) n_out_wait++;
    $display("layer %0dx%0dx%0d k%0dx%0d ofm %0d: %0d cycles, PEN %0d, starve %0d, out-wait %0d",
             ih, iw, dw * 32, kh, kw, ofm, cycles, perf_compute, perf_starve, perf_out_wait);
  endtask

  initial begin
    cfg = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    run_layer(160, 160, 1, 3, 3, 8);   // 160x160x32 input, 3x3x32 kernels, 8 maps
    check(mem.bad_addr == 0, "access outside memory");
    check(n_partial > 0, "8 maps on 16 PEs must leave a partial group");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
