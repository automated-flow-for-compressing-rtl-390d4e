// input_buffer: on-chip RAM for the receptive field of one output pixel.
//
// Each entry is one packed input D-bar: 32 activations of A_BITS bits as
// A_BITS bit-planes. Bus words arrive in depth-first order, plane 0 first, so
// A_BITS consecutive words form one D-bar; the buffer gathers them and writes
// the whole D-bar in one RAM write (the write-side bit packing). The PEN then
// reads one complete D-bar per access with no masking or shifting.
//
// Interface: wr_start rewinds the write pointer to entry 0. Every wr_valid
// cycle takes one bus word. wr_count is the number of complete D-bars written
// since wr_start, so a reader may consume entry i as soon as wr_count > i.
// Read port: rdata = entry raddr one cycle after re.
//
// From the paper: coarse, one-D-bar-per-access local RAM in depth-first
// order. The plane order on the bus, the gather register and DEPTH (512,
// enough for 3x3x1280) are this design's choice.
module input_buffer
  import bnn_pkg::*;
#(
  parameter int unsigned DEPTH  = 512,
  parameter int unsigned A_BITS = ABITS,
  localparam int unsigned AW    = $clog2(DEPTH),
  localparam int unsigned PW    = A_BITS > 1 ? $clog2(A_BITS) : 1
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          wr_start,
  input  logic                          wr_valid,
  input  word_t                         wr_word,
  output logic [AW:0]                   wr_count,
  input  logic                          re,
  input  logic [AW-1:0]                 raddr,
  output logic [A_BITS-1:0][WORD_W-1:0] rdata
);

  logic [A_BITS-1:0][WORD_W-1:0] mem [DEPTH];
  logic [A_BITS-1:0][WORD_W-1:0] gather;
  logic [PW-1:0]                 plane;

  logic [A_BITS-1:0][WORD_W-1:0] entry;
  always_comb begin
    entry = gather;
    entry[plane] = wr_word;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      plane    <= '0;
      wr_count <= '0;
      gather   <= '0;
    end else if (wr_start) begin
      plane    <= '0;
      wr_count <= '0;
    end else if (wr_valid) begin
      gather <= entry;
      if (plane == PW'(A_BITS - 1)) begin
        plane    <= '0;
        wr_count <= wr_count + 1'b1;
      end else begin
        plane <= plane + 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!wr_start && wr_valid && plane == PW'(A_BITS - 1))
      mem[wr_count[AW-1:0]] <= entry;
    if (re) rdata <= mem[raddr];
  end

endmodule
