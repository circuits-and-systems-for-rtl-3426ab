// sne_collector: buffering and arbitration unit that merges N_IN event streams
// into one.
//
// Each input has a DEPTH-entry FIFO so that several sources can produce an
// event in the same cycle; a round-robin arbiter moves one event per cycle from
// the FIFOs to the output (out_valid/out_ready). Used twice in SNE: inside a
// slice to merge its 16 clusters and at the engine level to merge the 8
// slices. Merging through buffering and arbitration is the paper's; FIFO depth
// and round-robin order are this design's choices.
module sne_collector #(
  parameter int unsigned N_IN  = 16,
  parameter int unsigned DEPTH = 2,
  parameter int unsigned W     = 32
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [N_IN-1:0] in_valid,
  output logic [N_IN-1:0] in_ready,
  input  logic [W-1:0]    in_data [N_IN],
  output logic            out_valid,
  input  logic            out_ready,
  output logic [W-1:0]    out_data,
  output logic            empty
);
  localparam int unsigned IW = (N_IN > 1) ? $clog2(N_IN) : 1;
  logic [N_IN-1:0] f_valid, f_ready;
  logic [W-1:0]    f_data [N_IN];
  logic [IW-1:0]   rr, sel;
  logic            found;

  for (genvar i = 0; i < N_IN; i++) begin : g_fifo
    logic [$clog2(DEPTH+1)-1:0] occupancy;   // not needed here
    sync_fifo #(.WIDTH(W), .DEPTH(DEPTH)) i_fifo (
      .clk, .rst_n,
      .in_valid (in_valid[i]), .in_ready (in_ready[i]), .in_data (in_data[i]),
      .out_valid(f_valid[i]),  .out_ready(f_ready[i]),  .out_data(f_data[i]),
      .count    (occupancy)
    );
  end

  always_comb begin
    found = 1'b0;
    sel = '0;
    for (int k = 0; k < N_IN; k++) begin
      int i;
      i = (int'(rr) + k) % N_IN;
      if (!found && f_valid[i]) begin
        found = 1'b1;
        sel = IW'(i);
      end
    end
  end

  assign out_valid = found;
  assign out_data  = f_data[sel];
  always_comb begin
    f_ready = '0;
    if (found && out_ready) f_ready[sel] = 1'b1;
  end

  assign empty = (f_valid == '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rr <= '0;
    else if (out_valid && out_ready) rr <= (int'(sel) == N_IN - 1) ? '0 : sel + 1'b1;
  end
endmodule
