// bnn_pe: processing element of the binary convolution accelerator.
//
// Each enabled cycle the PE takes one packed kernel word (32 one-bit weights,
// 1 = +1, 0 = -1) and one packed input D-bar (32 unsigned activations of
// ABITS bits, stored as ABITS bit-planes) and adds their dot product to a
// signed 32-bit accumulator. The dot product needs no multipliers: for each
// bit-plane b,
//     sum_i x_ib * w_i = 2*popcount(x_b & w) - popcount(x_b)
// and the planes are weighted by 2^b. An all-zero activation contributes 0
// whatever its weight, so channel padding with zero activations is exact.
//
// Interface: clr loads the accumulator with this cycle's product when en is
// high (or zero when en is low), so a new sum starts without a bubble; en
// adds the product. acc is registered: it shows the sum one cycle after the
// last enabled input. One D-bar per cycle throughput.
//
// From the paper: 32 kernel elements per PE word, 1-bit kernels, 2-bit
// activations, a 32-bit accumulator after each PE. The popcount formulation,
// the weight encoding and the clr/en protocol are this design's choice.
module bnn_pe
  import bnn_pkg::*;
#(
  parameter int unsigned N_ELEM = WORD_W,  // elements per packed word
  parameter int unsigned A_BITS = ABITS    // bits per activation
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              clr,
  input  logic                              en,
  input  logic [A_BITS-1:0][N_ELEM-1:0]     x,     // input D-bar, bit-planes
  input  logic [N_ELEM-1:0]                 w,     // kernel word
  output logic signed [ACC_W-1:0]           acc
);

  localparam int unsigned CNT_W = $clog2(N_ELEM + 1);

  function automatic logic [CNT_W-1:0] popcount(input logic [N_ELEM-1:0] v);
    logic [CNT_W-1:0] c;
    c = '0;
    for (int i = 0; i < N_ELEM; i++) c += CNT_W'(v[i]);
    return c;
  endfunction

  logic signed [ACC_W-1:0] prod;

  always_comb begin
    prod = '0;
    for (int b = 0; b < A_BITS; b++) begin
      logic signed [ACC_W-1:0] plane;
      plane = 2 * $signed(ACC_W'(popcount(x[b] & w))) - $signed(ACC_W'(popcount(x[b])));
      prod += plane <<< b;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)   acc <= '0;
    else if (clr) acc <= en ? prod : '0;
    else if (en)  acc <= acc + prod;
  end

endmodule
