// tb_input_buffer: self-checking test of the D-bar input RAM.
// Streams random bus words (plane 0 then plane 1 of each D-bar) with random
// gaps, checks wr_count after every word, then reads every entry back and
// checks that both bit-planes of each D-bar were packed into one word. A
// second fill after wr_start checks the rewind.
module tb_input_buffer;
  import bnn_pkg::*;
  localparam int D = 64;

  logic clk = 0, rst_n = 1, wr_start = 0, wr_valid = 0, re = 0;
  word_t wr_word;
  logic [6:0] wr_count;
  logic [5:0] raddr;
  dbar_t rdata;
  dbar_t ref_mem [D];
  int checks = 0, failures = 0;

  input_buffer #(.DEPTH(D)) dut (.clk, .rst_n, .wr_start, .wr_valid, .wr_word, .wr_count,
                                 .re, .raddr, .rdata);

  always #5 clk = ~clk;
  // a falling edge on rst_n applies the asynchronous reset before the first clock
  initial #1 rst_n = 0;

  task automatic fill(input int n);
    wr_start = 1; @(posedge clk); #1; wr_start = 0;
    checks++; if (wr_count != 0) failures++;
    for (int e = 0; e < n; e++)
      for (int p = 0; p < ABITS; p++) begin
        while ($urandom % 3 == 0) begin wr_valid = 0; @(posedge clk); #1; end
        wr_valid = 1; wr_word = $urandom; ref_mem[e][p] = wr_word;
        @(posedge clk); #1;
        wr_valid = 0;
        checks++;
        if (int'(wr_count) != e + (p == ABITS - 1 ? 1 : 0)) begin
          failures++;
          $display("count %0d after entry %0d plane %0d", wr_count, e, p);
        end
      end
  endtask

  task automatic check(input int n);
    for (int e = 0; e < n; e++) begin
      re = 1; raddr = 6'(e); @(posedge clk); #1; re = 0;
      checks++;
      if (rdata !== ref_mem[e]) begin
        failures++;
        $display("entry %0d: %h vs %h", e, rdata, ref_mem[e]);
      end
    end
  endtask

  initial begin
    wr_word = '0; raddr = '0;
    repeat (2) @(posedge clk);
    rst_n = 1; #1;
    fill(D); check(D);
    fill(20); check(20);
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
