// sne_streamer: programmable DMA engine of SNE that turns L2 buffers into event
// streams and back.
//
// Read mode (mode = 0): after start, reads len words from base, base+4, ... and
// emits them in order on rd_valid/rd_data. Requests are pipelined: a request
// is issued only while the FIFO has room for every outstanding reply, so the
// stream never loses data under back-pressure.
// Write mode (mode = 1): after start and until stop, every word on
// wr_valid/wr_data is written to base + 4*count; count is the number of words
// written. Written words pass through a small FIFO, so wr_ready never depends
// combinationally on the memory grant; wr_empty is high when that FIFO is
// drained. busy is high while a read is unfinished or a write session is open.
// Memory port: req/we/addr/wdata, gnt when accepted, rvalid/rdata one or more
// cycles later, in order. Two streamers acting as DMA engines are the paper's;
// the read/write split and the protocol are this design's.
module sne_streamer #(
  parameter int unsigned FIFO_DEPTH = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic        stop,
  input  logic        mode,
  input  logic [31:0] base,
  input  logic [31:0] len,
  output logic        busy,
  output logic [31:0] count,
  // memory port
  output logic        mem_req,
  output logic        mem_we,
  output logic [31:0] mem_addr,
  output logic [31:0] mem_wdata,
  input  logic        mem_gnt,
  input  logic        mem_rvalid,
  input  logic [31:0] mem_rdata,
  // read stream
  output logic        rd_valid,
  input  logic        rd_ready,
  output logic [31:0] rd_data,
  // write stream
  input  logic        wr_valid,
  output logic        wr_ready,
  input  logic [31:0] wr_data,
  output logic        wr_empty
);
  localparam int unsigned CW = $clog2(FIFO_DEPTH + 1);
  logic        active, mode_q;
  logic [31:0] base_q, len_q, issued;
  logic [CW-1:0] outstanding, fcount;
  logic        fifo_in_ready;
  logic        rd_issue;
  logic        wf_valid;
  logic [31:0] wf_data;
  logic [1:0]  wf_count;

  assign rd_issue = active && !mode_q && (issued < len_q) &&
                    ((32'(outstanding) + 32'(fcount)) < FIFO_DEPTH);

  always_comb begin
    mem_we    = mode_q;
    mem_wdata = wf_data;
    if (mode_q) begin
      mem_req  = wf_valid;
      mem_addr = base_q + {count[29:0], 2'b00};
    end else begin
      mem_req  = rd_issue;
      mem_addr = base_q + {issued[29:0], 2'b00};
    end
  end

  logic wf_in_ready;
  assign wr_ready = active && mode_q && wf_in_ready;
  assign wr_empty = (wf_count == '0);

  sync_fifo #(.WIDTH(32), .DEPTH(2)) i_wfifo (
    .clk, .rst_n,
    .in_valid (wr_valid && active && mode_q), .in_ready(wf_in_ready), .in_data(wr_data),
    .out_valid(wf_valid), .out_ready(mode_q && mem_gnt), .out_data(wf_data),
    .count    (wf_count)
  );

  sync_fifo #(.WIDTH(32), .DEPTH(FIFO_DEPTH)) i_fifo (
    .clk, .rst_n,
    .in_valid (mem_rvalid && !mode_q), .in_ready(fifo_in_ready), .in_data(mem_rdata),
    .out_valid(rd_valid), .out_ready(rd_ready), .out_data(rd_data),
    .count    (fcount)
  );

  assign busy = active || (fcount != '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0;
      mode_q <= 1'b0;
      base_q <= '0;
      len_q  <= '0;
      issued <= '0;
      count  <= '0;
      outstanding <= '0;
    end else begin
      if (start) begin
        active <= 1'b1;
        mode_q <= mode;
        base_q <= base;
        len_q  <= len;
        issued <= '0;
        count  <= '0;
      end else begin
        if (mode_q) begin
          if (mem_req && mem_gnt) count <= count + 1;
          if (stop) active <= 1'b0;
        end else begin
          if (mem_req && mem_gnt) issued <= issued + 1;
          if (mem_rvalid) count <= count + 1;
          if ((count == len_q) && (outstanding == '0)) active <= 1'b0;
        end
      end
      outstanding <= outstanding + CW'(!mode_q && mem_req && mem_gnt)
                                 - CW'(!mode_q && mem_rvalid);
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    mem_rvalid && !mode_q |-> fifo_in_ready);
endmodule
