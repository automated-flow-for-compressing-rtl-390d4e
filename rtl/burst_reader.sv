// burst_reader: read master that fetches one run of contiguous words as a
// single burst from off-chip memory.
//
// Bus protocol (this design's choice, close to a pipelined memory-mapped
// bus with a burst count): the master holds rd_req with rd_addr/rd_len until
// rd_gnt; the slave then returns exactly rd_len words on rd_data, in order,
// one per cycle in which rd_dvalid is high, with any latency and gaps.
//
// Command side: cmd_valid/cmd_ready hand over (cmd_addr, cmd_len), accepted
// only while idle. Each returned word appears on out_valid/out_data in the
// same cycle it arrives (no buffering). done pulses for one cycle in the
// cycle after the last word. A zero-length command completes with a done pulse and no bus
// request.
//
// From the paper: long burst transfers over contiguous addresses, made
// possible by depth-first data order. The handshake itself is not given in
// the paper.
module burst_reader
  import bnn_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  // command
  input  logic  cmd_valid,
  output logic  cmd_ready,
  input  addr_t cmd_addr,
  input  len_t  cmd_len,
  // stream out
  output logic  out_valid,
  output word_t out_data,
  output logic  done,
  // bus
  output logic  rd_req,
  output addr_t rd_addr,
  output len_t  rd_len,
  input  logic  rd_gnt,
  input  word_t rd_data,
  input  logic  rd_dvalid
);

  typedef enum logic [1:0] {IDLE, REQ, DATA} state_t;
  state_t state;
  len_t   left;

  assign cmd_ready = (state == IDLE);
  assign rd_req    = (state == REQ);
  assign out_valid = (state == DATA) && rd_dvalid;
  assign out_data  = rd_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= IDLE;
      left    <= '0;
      rd_addr <= '0;
      rd_len  <= '0;
      done    <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        IDLE: if (cmd_valid) begin
          rd_addr <= cmd_addr;
          rd_len  <= cmd_len;
          left    <= cmd_len;
          if (cmd_len == '0) done  <= 1'b1;
          else               state <= REQ;
        end
        REQ: if (rd_gnt) state <= DATA;
        DATA: if (rd_dvalid) begin
          left <= left - 1'b1;
          if (left == len_t'(1)) begin
            state <= IDLE;
            done  <= 1'b1;
          end
        end
        default: state <= IDLE;
      endcase
    end
  end

  // The slave must not return data the master has not asked for.
  a_no_stray_data: assert property (@(posedge clk) disable iff (!rst_n)
    rd_dvalid |-> state == DATA);
  a_req_stable: assert property (@(posedge clk) disable iff (!rst_n)
    rd_req && !rd_gnt |=> rd_req && $stable(rd_addr) && $stable(rd_len));

endmodule
