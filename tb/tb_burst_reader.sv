// tb_burst_reader: self-checking test of the burst read master.
// A tb-side slave grants requests after a random delay and returns the words
// of a reference memory with random gaps. For random (addr, len) commands
// the test checks the request fields, that exactly len words stream out in
// address order, that done pulses once after the last word, and that a
// zero-length command finishes with no bus request.
module tb_burst_reader;
  import bnn_pkg::*;

  logic clk = 0, rst_n = 1;
  logic cmd_valid = 0, cmd_ready, out_valid, done;
  addr_t cmd_addr;
  len_t cmd_len;
  word_t out_data;
  logic rd_req, rd_gnt = 0, rd_dvalid = 0;
  addr_t rd_addr;
  len_t rd_len;
  word_t rd_data;
  int checks = 0, failures = 0;
  int got = 0, dones = 0, reqs = 0;
  addr_t exp_addr;

  burst_reader dut (.clk, .rst_n, .cmd_valid, .cmd_ready, .cmd_addr, .cmd_len,
                    .out_valid, .out_data, .done,
                    .rd_req, .rd_addr, .rd_len, .rd_gnt, .rd_data, .rd_dvalid);

  always #5 clk = ~clk;
  // a falling edge on rst_n applies the asynchronous reset before the first clock
  initial #1 rst_n = 0;

  function automatic word_t memval(addr_t a);
    return a * 32'h9E3779B1 ^ 32'h5A5A0000;
  endfunction

  // slave: grant, then return rd_len words with gaps
  initial begin
    rd_data = '0;
    forever begin
      @(posedge clk);
      if (rd_req && !rd_gnt && $urandom % 3 == 0) begin
        automatic addr_t a = rd_addr; automatic int n = int'(rd_len);
        reqs++;
        checks++;
        if (rd_addr != exp_addr) begin failures++; $display("bad rd_addr %h", rd_addr); end
        rd_gnt <= 1;
        @(posedge clk);
        rd_gnt <= 0;
        repeat ($urandom % 4) @(posedge clk);
        for (int i = 0; i < n; i++) begin
          while ($urandom % 4 == 0) begin rd_dvalid <= 0; @(posedge clk); end
          rd_dvalid <= 1; rd_data <= memval(a + addr_t'(i));
          @(posedge clk);
        end
        rd_dvalid <= 0;
      end
    end
  end

  // monitor of the output stream
  always @(posedge clk) begin
    if (out_valid) begin
      checks++;
      if (out_data != memval(exp_addr + addr_t'(got))) begin
        failures++; $display("word %0d: %h", got, out_data);
      end
      got++;
    end
    if (done) dones++;
  end

  initial begin
    cmd_addr = '0; cmd_len = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      automatic int len = (t == 5) ? 0 : 1 + $urandom % 40;
      automatic int r0 = reqs;
      got = 0; dones = 0;
      @(negedge clk);
      while (!cmd_ready) @(negedge clk);
      exp_addr = $urandom;
      cmd_valid = 1; cmd_addr = exp_addr; cmd_len = len_t'(len);
      @(negedge clk);
      cmd_valid = 0;
      while (dones == 0) @(negedge clk);
      repeat (3) @(negedge clk);
      checks++;
      if (got != len || dones != 1) begin
        failures++; $display("cmd %0d: %0d words, %0d dones, want %0d", t, got, dones, len);
      end
      checks++;
      if ((reqs - r0) != (len == 0 ? 0 : 1)) begin failures++; $display("request count"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
