// mem_model: behavioural model of the off-chip DRAM behind the bus
// subsystem, for simulation only (not synthesizable: it uses timing controls
// and $urandom). It serves the accelerator's read channel (grant after a
// random delay, then rd_len words in order with random gaps) and write
// channel (random wr_ready back-pressure, beat i of a burst goes to
// wr_addr+i). STALL_PCT sets how often the model stalls. It counts bursts and
// stall cycles so a testbench can see that each case occurred.
module mem_model
  import bnn_pkg::*;
#(
  parameter int unsigned WORDS     = 16384,
  parameter int unsigned STALL_PCT = 30
) (
  input  logic  clk,
  input  logic  rd_req,
  input  addr_t rd_addr,
  input  len_t  rd_len,
  output logic  rd_gnt,
  output word_t rd_data,
  output logic  rd_dvalid,
  input  logic  wr_valid,
  input  addr_t wr_addr,
  input  len_t  wr_len,
  input  word_t wr_data,
  output logic  wr_ready
);

  word_t mem [WORDS];
  int rd_bursts = 0, rd_stalls = 0, rd_gaps = 0;
  int wr_bursts = 0, wr_stalls = 0, wr_beats = 0, bad_addr = 0;
  int beat = 0;
  int rd_len_log [$];

  // stall probabilities in percent; a testbench may change them at run time
  int unsigned rd_pct = STALL_PCT, wr_pct = STALL_PCT;

  function automatic bit stall(input int unsigned pct);
    return ($urandom % 100) < pct;
  endfunction

  initial begin
    rd_gnt = 0; rd_dvalid = 0; rd_data = '0;
    forever begin
      @(posedge clk);
      if (rd_req && !rd_gnt) begin
        if (stall(rd_pct)) begin
          rd_stalls++;
        end else begin
          automatic addr_t a = rd_addr;
          automatic int    n = int'(rd_len);
          rd_bursts++;
          rd_len_log.push_back(n);
          rd_gnt <= 1;
          @(posedge clk);
          rd_gnt <= 0;
          for (int i = 0; i < n; i++) begin
            while (stall(rd_pct)) begin rd_dvalid <= 0; rd_gaps++; @(posedge clk); end
            rd_dvalid <= 1;
            if (int'(a) + i < WORDS) rd_data <= mem[int'(a) + i];
            else begin rd_data <= '0; bad_addr++; end
            @(posedge clk);
          end
          rd_dvalid <= 0;
        end
      end
    end
  end

  initial wr_ready = 0;
  always @(posedge clk) begin
    if (wr_valid && wr_ready) begin
      if (beat == 0) wr_bursts++;
      if (int'(wr_addr) + beat < WORDS) mem[int'(wr_addr) + beat] = wr_data;
      else bad_addr++;
      wr_beats++;
      beat = (beat == int'(wr_len) - 1) ? 0 : beat + 1;
    end
    if (wr_valid && !wr_ready) wr_stalls++;
    wr_ready <= !stall(wr_pct);
  end

endmodule
