// tb_bnn_pe: self-checking test of the processing element.
// Drives random packed kernel words and 2-bit input D-bars with random
// clr/en, and compares the accumulator every cycle with a reference that
// multiplies element by element (weight bit 1 = +1, 0 = -1). Also checks the
// extreme dot products (+96 and -96) and that one product is accepted per
// cycle.
module tb_bnn_pe;
  import bnn_pkg::*;

  logic clk = 0, rst_n = 1, clr = 0, en = 0;
  logic [ABITS-1:0][WORD_W-1:0] x;
  logic [WORD_W-1:0] w;
  logic signed [ACC_W-1:0] acc;
  int checks = 0, failures = 0;
  longint model = 0;

  bnn_pe dut (.clk, .rst_n, .clr, .en, .x, .w, .acc);

  always #5 clk = ~clk;
  // a falling edge on rst_n applies the asynchronous reset before the first clock
  initial #1 rst_n = 0;

  function automatic longint dot(input logic [ABITS-1:0][WORD_W-1:0] xx,
                                 input logic [WORD_W-1:0] ww);
    longint s = 0;
    for (int i = 0; i < WORD_W; i++) begin
      automatic int a = 0;
      for (int b = 0; b < ABITS; b++) a += int'(xx[b][i]) << b;
      s += ww[i] ? a : -a;
    end
    return s;
  endfunction

  task automatic step(input logic c, input logic e);
    clr = c; en = e;
    x[0] = $urandom; x[1] = $urandom; w = $urandom;
    @(posedge clk);
    if (c) model = e ? dot(x, w) : 0;
    else if (e) model += dot(x, w);
    #1;
    checks++;
    if (longint'(acc) != model) begin
      failures++;
      $display("mismatch: acc=%0d model=%0d", acc, model);
    end
  endtask

  initial begin
    x = '0; w = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    checks++; if (acc != 0) failures++;
    // extremes: all activations 3, all weights +1 then -1
    clr = 1; en = 1; x = '1; w = '1;
    @(posedge clk); #1; checks++; if (acc != 96) begin failures++; $display("max %0d", acc); end
    clr = 0; w = '0;
    @(posedge clk); #1; checks++; if (acc != 0) begin failures++; $display("min %0d", acc); end
    clr = 1; en = 1;
    @(posedge clk); #1; checks++; if (acc != -96) begin failures++; $display("neg %0d", acc); end
    model = -96;
    for (int n = 0; n < 2000; n++) step(($urandom % 16) == 0, ($urandom % 4) != 0);
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
