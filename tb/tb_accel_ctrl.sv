// tb_accel_ctrl: self-checking test of the sequencer on its own.
// The testbench plays the read master, input buffer and write master: it
// accepts read commands after random delays and returns the requested number
// of words with gaps, keeps the input-buffer D-bar count, and accepts write
// commands after random delays. It checks that the sequence of read and
// write commands (addresses and lengths) is exactly the depth-first schedule
// (one kernel burst per group, Kh input bursts per output pixel, one output
// burst per pixel and group), that kernel words go to bank word/kwords and
// address word%kwords, that the PEN reads D-bars 0..kwords-1 of each window
// once each with clr on the first, the PEN cycle count, done, and the
// rejection of an oversized configuration.
module tb_accel_ctrl;
  import bnn_pkg::*;
  localparam int NP = 4, KD = 64, ID = 64;

  logic clk = 0, rst_n = 1, start = 0;
  layer_cfg_t cfg;
  logic busy, done, error;
  logic [31:0] perf_compute, perf_starve, perf_out_wait;
  logic rd_cmd_valid, rd_cmd_ready = 0, rd_out_valid = 0;
  addr_t rd_cmd_addr, wr_cmd_addr;
  len_t rd_cmd_len, wr_cmd_len;
  logic kb_we, kb_re, ib_wr_start, ib_wr_valid, ib_re, pen_clr, pen_en;
  logic [1:0] kb_wbank;
  logic [5:0] kb_waddr, kb_raddr, ib_raddr;
  logic [6:0] ib_wr_count;
  logic wr_cmd_valid, wr_cmd_ready = 0;
  int checks = 0, failures = 0;
  int words = 0, kwords_seen = 0, pend = 0;
  int next_raddr = 0;
  addr_t rd_log_a [$], wr_log_a [$];
  int    rd_log_l [$], wr_log_l [$];
  int    kwords_cur = 1;

  accel_ctrl #(.NUM_PE(NP), .KDEPTH(KD), .IDEPTH(ID)) dut (.*);

  always #5 clk = ~clk;
  // a falling edge on rst_n applies the asynchronous reset before the first clock
  initial #1 rst_n = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  assign ib_wr_count = 7'(words / ABITS);

  // read master and input buffer stand-in
  always @(posedge clk) begin
    if (rd_cmd_valid && rd_cmd_ready) begin
      rd_log_a.push_back(rd_cmd_addr);
      rd_log_l.push_back(int'(rd_cmd_len));
      pend += int'(rd_cmd_len);
      if (rd_cmd_addr >= 32'h4000) kwords_seen = 0;   // kernel region: a new group
    end
    rd_cmd_ready <= (pend == 0) && !(rd_cmd_valid && rd_cmd_ready) && ($urandom % 3 == 0);
    if (rd_out_valid) pend--;
    rd_out_valid <= (pend > (rd_out_valid ? 1 : 0)) && ($urandom % 4 != 0);
    if (ib_wr_start) words = 0;
    else if (ib_wr_valid) words++;
    if (kb_we) begin
      checks++;
      if (int'(kb_wbank) != kwords_seen / kwords_cur || int'(kb_waddr) != kwords_seen % kwords_cur) begin
        failures++; $display("kernel word %0d to bank %0d addr %0d", kwords_seen, kb_wbank, kb_waddr);
      end
      kwords_seen++;
    end
    if (ib_wr_start) next_raddr = 0;
    if (ib_re) begin
      checks++;
      if (int'(ib_raddr) != next_raddr || kb_raddr != ib_raddr || int'(ib_raddr) >= int'(ib_wr_count)) begin
        failures++; $display("read %0d, expected %0d (count %0d)", ib_raddr, next_raddr, ib_wr_count);
      end
      next_raddr++;
    end
    if (pen_en && pen_clr) begin
      checks++;
      if (next_raddr != 1 && !(next_raddr == 2 && ib_re)) begin
        failures++; $display("clr not on first D-bar");
      end
    end
    if (wr_cmd_valid && wr_cmd_ready) begin
      wr_log_a.push_back(wr_cmd_addr);
      wr_log_l.push_back(int'(wr_cmd_len));
    end
    wr_cmd_ready <= !(wr_cmd_valid && wr_cmd_ready) && ($urandom % 3 == 0);
  end

  task automatic run_layer(input int ih, iw, dw, kh, kw, ofm);
    int oh = ih - kh + 1, ow = iw - kw + 1;
    int kwords = kh * kw * dw;
    int ri = 0, wi = 0;
    addr_t ib = 32'h40, kb = 32'h4000, ob = 32'h8000;
    kwords_cur = kwords;
    rd_log_a.delete(); rd_log_l.delete(); wr_log_a.delete(); wr_log_l.delete();
    cfg = '{ih: 16'(ih), iw: 16'(iw), id_words: 8'(dw), kh: 4'(kh), kw: 4'(kw),
            ofm: 16'(ofm), in_base: ib, k_base: kb, out_base: ob};
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    check(!error, "valid layer rejected");
    for (int g = 0; g < ofm; g += NP) begin
      int n = (ofm - g) < NP ? ofm - g : NP;
      check(ri < rd_log_a.size() && rd_log_a[ri] == kb + addr_t'(g * kwords) &&
            rd_log_l[ri] == n * kwords, $sformatf("kernel burst of group %0d", g));
      ri++;
      for (int y = 0; y < oh; y++)
        for (int x = 0; x < ow; x++) begin
          for (int r = 0; r < kh; r++) begin
            check(ri < rd_log_a.size() &&
                  rd_log_a[ri] == ib + addr_t'(((y + r) * iw + x) * dw * ABITS) &&
                  rd_log_l[ri] == kw * dw * ABITS, $sformatf("input burst g%0d y%0d x%0d r%0d", g, y, x, r));
            ri++;
          end
          check(wi < wr_log_a.size() && wr_log_a[wi] == ob + addr_t'((y * ow + x) * ofm + g) &&
                wr_log_l[wi] == n, $sformatf("output burst g%0d y%0d x%0d", g, y, x));
          wi++;
        end
    end
    check(ri == rd_log_a.size() && wi == wr_log_a.size(), "extra bus commands");
    check(int'(perf_compute) == ((ofm + NP - 1) / NP) * oh * ow * kwords, "PEN cycles");
  endtask

  initial begin
    cfg = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    run_layer(5, 4, 2, 3, 3, 10);
    run_layer(3, 3, 1, 1, 1, 4);
    run_layer(4, 6, 3, 2, 3, 7);
    cfg.id_words = 8'd8; cfg.kh = 4'd3; cfg.kw = 4'd3; cfg.ih = 16'd5; cfg.iw = 16'd5;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    check(error, "oversized window accepted");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
