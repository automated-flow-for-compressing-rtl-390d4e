// out_writer: write master that stores the accumulators of one PEN pass.
//
// The PEN produces NUM_PE output channels of one output pixel at once. In
// depth-first output order these are consecutive words, so they leave as one
// write burst of cmd_len (<= NUM_PE) words starting at cmd_addr; channels
// beyond the layer's last output feature map are not written.
//
// Bus protocol (this design's choice): wr_valid is high for every beat;
// wr_addr and wr_len stay constant for the whole burst and are taken by the
// slave with the first beat; a beat is transferred in a cycle with
// wr_valid && wr_ready. Command side: cmd_valid/cmd_ready, accepted only
// while idle; the accumulator vector is captured with the command so the PEN
// can start on the next pixel at once. done pulses one cycle after the last
// beat. A zero-length command only pulses done.
//
// From the paper: outputs are produced, and written to off-chip RAM, in
// depth-first order with bursts. The capture register and handshake are
// this design's choice.
module out_writer
  import bnn_pkg::*;
#(
  parameter int unsigned NUM_PE = 16
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        cmd_valid,
  output logic                        cmd_ready,
  input  addr_t                       cmd_addr,
  input  len_t                        cmd_len,
  input  logic [NUM_PE-1:0][ACC_W-1:0] cmd_data,
  output logic                        done,
  output logic                        wr_valid,
  output addr_t                       wr_addr,
  output len_t                        wr_len,
  output word_t                       wr_data,
  input  logic                        wr_ready
);

  localparam int unsigned IW = $clog2(NUM_PE + 1);

  logic [NUM_PE-1:0][ACC_W-1:0] data_q;
  logic [IW-1:0]                idx;
  logic                         busy;

  assign cmd_ready = !busy;
  assign wr_valid  = busy;
  assign wr_data   = data_q[0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy    <= 1'b0;
      idx     <= '0;
      wr_addr <= '0;
      wr_len  <= '0;
      data_q  <= '0;
      done    <= 1'b0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (cmd_valid) begin
          wr_addr <= cmd_addr;
          wr_len  <= cmd_len;
          data_q  <= cmd_data;
          idx     <= '0;
          if (cmd_len == '0) done <= 1'b1;
          else               busy <= 1'b1;
        end
      end else if (wr_ready) begin
        // shift the next channel to the front
        data_q <= data_q >> ACC_W;
        idx    <= idx + 1'b1;
        if (len_t'(idx) == wr_len - 1'b1) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  a_len_fits: assert property (@(posedge clk) disable iff (!rst_n)
    cmd_valid && cmd_ready |-> cmd_len <= len_t'(NUM_PE));
  a_burst_stable: assert property (@(posedge clk) disable iff (!rst_n)
    wr_valid && !wr_ready |=> wr_valid && $stable(wr_addr) && $stable(wr_len) && $stable(wr_data));

endmodule
