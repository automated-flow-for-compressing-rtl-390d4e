// tb_out_writer: self-checking test of the burst write master.
// Hands random accumulator vectors with random lengths (0..NUM_PE) to the
// writer while a tb-side slave applies random back-pressure, and checks the
// burst address and length, that the beats carry channels 0..len-1 in order,
// the beat count, one done pulse per command, and that the writer accepts no
// command while busy.
module tb_out_writer;
  import bnn_pkg::*;
  localparam int NP = 16;

  logic clk = 0, rst_n = 1;
  logic cmd_valid = 0, cmd_ready, done;
  addr_t cmd_addr;
  len_t cmd_len;
  logic [NP-1:0][ACC_W-1:0] cmd_data, vec;
  logic wr_valid, wr_ready = 0;
  addr_t wr_addr;
  len_t wr_len;
  word_t wr_data;
  int checks = 0, failures = 0, beats = 0, dones = 0, stalls = 0;
  addr_t exp_addr;
  int exp_len;

  out_writer #(.NUM_PE(NP)) dut (.clk, .rst_n, .cmd_valid, .cmd_ready, .cmd_addr, .cmd_len,
                                 .cmd_data, .done, .wr_valid, .wr_addr, .wr_len, .wr_data,
                                 .wr_ready);

  always #5 clk = ~clk;
  // a falling edge on rst_n applies the asynchronous reset before the first clock
  initial #1 rst_n = 0;

  always @(posedge clk) begin
    if (wr_valid && wr_ready) begin
      checks++;
      if (wr_addr != exp_addr || int'(wr_len) != exp_len || wr_data != vec[beats]) begin
        failures++;
        $display("beat %0d: addr %h len %0d data %h", beats, wr_addr, wr_len, wr_data);
      end
      beats++;
    end
    if (wr_valid && !wr_ready) stalls++;
    if (done) dones++;
    wr_ready <= ($urandom % 3 != 0);
  end

  initial begin
    cmd_addr = '0; cmd_len = '0; cmd_data = '0; vec = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 100; t++) begin
      @(negedge clk);
      checks++;
      if (!cmd_ready) begin failures++; $display("not ready when idle"); end
      exp_len  = (t == 3) ? 0 : (t % 5 == 0 ? NP : 1 + $urandom % NP);
      exp_addr = $urandom;
      for (int p = 0; p < NP; p++) vec[p] = $urandom;
      beats = 0; dones = 0;
      cmd_valid = 1; cmd_addr = exp_addr; cmd_len = len_t'(exp_len); cmd_data = vec;
      @(negedge clk);
      cmd_valid = 0; cmd_data = '0;   // the writer must have captured the data
      if (exp_len != 0) begin
        checks++;
        if (cmd_ready) begin failures++; $display("ready while busy"); end
      end
      while (dones == 0) @(negedge clk);
      checks++;
      if (beats != exp_len || dones != 1) begin
        failures++; $display("cmd %0d: %0d beats, want %0d", t, beats, exp_len);
      end
    end
    checks++;
    if (stalls == 0) begin failures++; $display("no back-pressure exercised"); end
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
