// dvsi: Dynamic Vision Sensor interface. Converts the sensor's event stream into
// SNE event words and stores them in an L2 buffer.
//
// Each sensor event (x, y, polarity) becomes a COO spike word whose channel is
// the polarity (0 = negative, 1 = positive), as the paper describes. When the
// sensor marks the end of an event-frame (dvs_frame_end together with a valid
// event slot, or alone) the interface first writes any pending spike, then a
// time event carrying a 28-bit frame counter, and increments the counter.
// Words go to L2 through one memory master port at cfg_base + 4*n for
// n = 0 .. cfg_len-1. Once cfg_len words are written, further events are
// dropped and counted in overflow_cnt (this buffer-full behaviour, the sensor
// handshake and the direct L2 path are this design's choices; in the chip the
// IO subsystem moves the data).
// Timing: one word per granted memory request; dvs_ready is high while no word
// is waiting for the memory.
module dvsi
  import sne_pkg::*;
#(
  parameter int unsigned TS_BITS = sne_pkg::TS_W
) (
  input  logic        clk,
  input  logic        rst_n,
  // configuration
  input  logic        cfg_en,
  input  logic        cfg_clear,      // restart at cfg_base, timestamp 0
  input  logic [31:0] cfg_base,
  input  logic [31:0] cfg_len,        // buffer size in words
  output logic [31:0] wr_count,       // words written so far
  output logic [31:0] overflow_cnt,   // events dropped because the buffer was full
  output logic [TS_BITS-1:0] cur_ts,
  // sensor side
  input  logic        dvs_valid,
  output logic        dvs_ready,
  input  logic [7:0]  dvs_x,
  input  logic [7:0]  dvs_y,
  input  logic        dvs_pol,
  input  logic        dvs_frame_end,  // event-frame boundary (may come without a spike)
  // L2 master port
  output logic        mem_req,
  output logic        mem_we,
  output logic [31:0] mem_addr,
  output logic [31:0] mem_wdata,
  input  logic        mem_gnt
);
  logic        spk_pend, tim_pend;
  logic [31:0] spk_word, tim_word;
  logic        full;

  assign full      = (wr_count >= cfg_len);
  assign dvs_ready = cfg_en && !spk_pend && !tim_pend;

  // spike first, then the time event of a closing frame
  assign mem_req   = (spk_pend || tim_pend) && !full;
  assign mem_we    = 1'b1;
  assign mem_wdata = spk_pend ? spk_word : tim_word;
  assign mem_addr  = cfg_base + {wr_count[29:0], 2'b00};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      spk_pend <= 1'b0;
      tim_pend <= 1'b0;
      spk_word <= '0;
      tim_word <= '0;
      wr_count <= '0;
      overflow_cnt <= '0;
      cur_ts <= '0;
    end else if (cfg_clear) begin
      spk_pend <= 1'b0;
      tim_pend <= 1'b0;
      wr_count <= '0;
      overflow_cnt <= '0;
      cur_ts <= '0;
    end else begin
      // drain one word
      if (mem_req && mem_gnt) begin
        wr_count <= wr_count + 1;
        if (spk_pend) spk_pend <= 1'b0;
        else          tim_pend <= 1'b0;
      end else if ((spk_pend || tim_pend) && full) begin
        // buffer full: drop what is waiting
        overflow_cnt <= overflow_cnt + 1;
        if (spk_pend) spk_pend <= 1'b0;
        else          tim_pend <= 1'b0;
      end
      // accept a new sensor event / frame boundary
      if (dvs_valid && dvs_ready) begin
        spk_pend <= 1'b1;
        spk_word <= mk_spike(dvs_x, dvs_y, {7'd0, dvs_pol});
      end
      if (dvs_frame_end && dvs_ready) begin
        tim_pend <= 1'b1;
        tim_word <= mk_time(TS_W'(cur_ts + 1'b1));
        cur_ts   <= cur_ts + 1'b1;
      end
    end
  end
endmodule
