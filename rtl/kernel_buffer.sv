// kernel_buffer: on-chip RAM for the kernels of one output-channel group.
//
// One bank per PE, each DEPTH words of 32 packed one-bit weights. Bank p holds
// kernel p of the current group in depth-first order: word (kh*Kw+kw)*Dw+dc is
// the D-bar dc of kernel position (kh,kw). The read port presents the same
// address to every bank, so one access delivers one kernel D-bar for each PE.
//
// Interface: write port (we, wbank, waddr, wdata) writes one word per cycle;
// read port returns rdata[p] = bank p at raddr one cycle after re, and holds
// it otherwise (synchronous RAM, maps to FPGA block RAM).
//
// From the paper: kernels are kept in local RAM blocks, packed 32 per word in
// depth-first order so a D-bar is one access. The bank-per-PE organisation
// and DEPTH (512 words, enough for a 3x3 kernel over 1280 input channels = 360
// words) are this design's choice.
module kernel_buffer
  import bnn_pkg::*;
#(
  parameter int unsigned NUM_PE = 16,
  parameter int unsigned DEPTH  = 512,
  localparam int unsigned AW    = $clog2(DEPTH),
  localparam int unsigned BW    = NUM_PE > 1 ? $clog2(NUM_PE) : 1
) (
  input  logic                          clk,
  input  logic                          we,
  input  logic [BW-1:0]                 wbank,
  input  logic [AW-1:0]                 waddr,
  input  word_t                         wdata,
  input  logic                          re,
  input  logic [AW-1:0]                 raddr,
  output logic [NUM_PE-1:0][WORD_W-1:0] rdata
);

  for (genvar p = 0; p < NUM_PE; p++) begin : g_bank
    word_t mem [DEPTH];

    always_ff @(posedge clk) begin
      if (we && wbank == BW'(p)) mem[waddr] <= wdata;
      if (re) rdata[p] <= mem[raddr];
    end
  end

endmodule
