// tb_kernel_buffer: self-checking test of the banked kernel RAM.
// Fills every bank with distinct random words through the write port, then
// reads random addresses and checks that each bank returns its own word one
// cycle after re, and that rdata holds while re is low.
module tb_kernel_buffer;
  import bnn_pkg::*;
  localparam int NP = 16, D = 64;

  logic clk = 0, we = 0, re = 0;
  logic [3:0] wbank;
  logic [5:0] waddr, raddr;
  word_t wdata;
  logic [NP-1:0][WORD_W-1:0] rdata;
  word_t ref_mem [NP][D];
  int checks = 0, failures = 0;

  kernel_buffer #(.NUM_PE(NP), .DEPTH(D)) dut (.clk, .we, .wbank, .waddr, .wdata, .re, .raddr, .rdata);

  always #5 clk = ~clk;

  initial begin
    wbank = '0; waddr = '0; raddr = '0; wdata = '0;
    for (int p = 0; p < NP; p++)
      for (int a = 0; a < D; a++) begin
        we = 1; wbank = 4'(p); waddr = 6'(a); wdata = $urandom;
        ref_mem[p][a] = wdata;
        @(posedge clk); #1;
      end
    we = 0;
    for (int n = 0; n < 300; n++) begin
      automatic int a = $urandom % D;
      re = 1; raddr = 6'(a);
      // a write to another address in the same cycle must not disturb the read
      we = 1; wbank = 4'($urandom % NP); waddr = 6'((a + 1) % D); wdata = $urandom;
      ref_mem[wbank][waddr] = wdata;
      @(posedge clk); #1;
      we = 0; re = 0;
      for (int p = 0; p < NP; p++) begin
        checks++;
        if (rdata[p] !== ref_mem[p][a]) begin
          failures++;
          $display("bank %0d addr %0d: %h vs %h", p, a, rdata[p], ref_mem[p][a]);
        end
      end
      @(posedge clk); #1;
      checks++;
      if (rdata[0] !== ref_mem[0][a]) failures++;   // held while re is low
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
