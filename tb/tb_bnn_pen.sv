// tb_bnn_pen: self-checking test of the processing engine.
// All PEs share one input D-bar and get different kernel words. Runs
// back-to-back dot products of random length (one D-bar per cycle, new sum
// started with clr without a bubble) and checks every PE's sum against an
// element-wise reference, and that the sums are ready one cycle after the
// last input.
module tb_bnn_pen;
  import bnn_pkg::*;
  localparam int NP = 16;

  logic clk = 0, rst_n = 1, clr = 0, en = 0;
  logic [ABITS-1:0][WORD_W-1:0] x;
  logic [NP-1:0][WORD_W-1:0] w;
  logic [NP-1:0][ACC_W-1:0] acc;
  int checks = 0, failures = 0;
  longint model [NP];

  bnn_pen #(.NUM_PE(NP)) dut (.clk, .rst_n, .clr, .en, .x, .w, .acc);

  always #5 clk = ~clk;
  // a falling edge on rst_n applies the asynchronous reset before the first clock
  initial #1 rst_n = 0;

  function automatic longint dot(input logic [ABITS-1:0][WORD_W-1:0] xx,
                                 input logic [WORD_W-1:0] ww);
    longint s = 0;
    for (int i = 0; i < WORD_W; i++) begin
      automatic int a = int'(xx[0][i]) + 2 * int'(xx[1][i]);
      s += ww[i] ? a : -a;
    end
    return s;
  endfunction

  initial begin
    x = '0; w = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      automatic int len = 1 + $urandom % 20;
      for (int k = 0; k < len; k++) begin
        clr = (k == 0); en = 1;
        x[0] = $urandom; x[1] = $urandom;
        for (int p = 0; p < NP; p++) w[p] = $urandom;
        for (int p = 0; p < NP; p++) model[p] = (k == 0 ? 0 : model[p]) + dot(x, w[p]);
        @(posedge clk); #1;
      end
      // one cycle after the last input the sums are final
      for (int p = 0; p < NP; p++) begin
        checks++;
        if (longint'($signed(acc[p])) != model[p]) begin
          failures++;
          $display("pass %0d pe %0d: %0d vs %0d", t, p, $signed(acc[p]), model[p]);
        end
      end
      // sometimes idle a cycle: sums must hold
      if (t % 3 == 0) begin
        clr = 0; en = 0; @(posedge clk); #1;
        checks++;
        if (longint'($signed(acc[NP-1])) != model[NP-1]) failures++;
      end
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
