// bnn_pen: processing engine, a row of NUM_PE processing elements.
//
// All PEs see the same input D-bar in the same cycle; PE p gets its own
// kernel word, a D-bar of kernel p of the current output-channel group. One
// enabled cycle therefore advances NUM_PE output channels of the same output
// pixel, which is the inter-kernel parallelism (and input reuse) the design
// relies on. The accumulators come out in output-channel order, which is the
// depth-first order in which they are written back.
//
// Interface and timing are those of bnn_pe: clr/en are shared by all PEs,
// acc[p] is valid one cycle after the last enabled input.
//
// From the paper: a matrix of PEs processing the same input and elements of
// different kernels; at least 16 PEs (default 16). Arranging them as one row
// of NUM_PE kernels is this design's reading of that matrix.
module bnn_pen
  import bnn_pkg::*;
#(
  parameter int unsigned NUM_PE = 16,
  parameter int unsigned N_ELEM = WORD_W,
  parameter int unsigned A_BITS = ABITS
) (
  input  logic                                  clk,
  input  logic                                  rst_n,
  input  logic                                  clr,
  input  logic                                  en,
  input  logic [A_BITS-1:0][N_ELEM-1:0]         x,
  input  logic [NUM_PE-1:0][N_ELEM-1:0]         w,
  output logic [NUM_PE-1:0][ACC_W-1:0]          acc
);

  for (genvar p = 0; p < NUM_PE; p++) begin : g_pe
    bnn_pe #(.N_ELEM(N_ELEM), .A_BITS(A_BITS)) u_pe (
      .clk, .rst_n, .clr, .en,
      .x   (x),
      .w   (w[p]),
      .acc (acc[p])
    );
  end

endmodule
