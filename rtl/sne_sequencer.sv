// sne_sequencer: the per-slice controller that runs the 16 clusters of an SNE
// slice in lockstep.
//
// It accepts one event word at a time (in_valid/in_ready). A time event sets
// the SNN time (cur_time) in one cycle. A spike event is latched and played as
// a 12-cycle sequence: steps k = 0..8 (step_valid high, one neuron update per
// cluster per cycle) followed by 3 restart cycles. The next event is accepted
// in the last restart cycle, so back-to-back spikes take exactly 12 cycles
// each, as in the paper. While stall is high (a cluster's output is blocked)
// the update steps are held. init_start runs a 64-cycle sweep of init_we /
// init_addr that clears every neuron memory. The 12-cycle schedule is the
// paper's; the one-cycle time event and the stall rule are this design's.
module sne_sequencer
  import sne_pkg::*;
#(
  parameter int unsigned N_NEURONS    = 64,
  parameter int unsigned N_STEPS      = 9,
  parameter int unsigned SPIKE_CYCLES = 12
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        init_start,
  input  logic        in_valid,
  output logic        in_ready,
  input  logic [31:0] in_data,
  input  logic        stall,
  output logic        step_valid,
  output logic [3:0]  step_k,
  output logic [7:0]  ev_x,
  output logic [7:0]  ev_y,
  output logic [7:0]  ev_c,
  output logic [TS_W-1:0] cur_time,
  output logic        init_we,
  output logic [$clog2(N_NEURONS)-1:0] init_addr,
  output logic        busy
);
  typedef enum logic [1:0] {S_IDLE, S_INIT, S_SPIKE} state_e;
  state_e state;
  logic [3:0] cnt;
  spike_ev_t sev;
  time_ev_t  tev;
  logic      last;

  assign sev = spike_ev_t'(in_data);
  assign tev = time_ev_t'(in_data);
  assign last = (state == S_SPIKE) && (cnt == 4'(SPIKE_CYCLES - 1));
  assign in_ready   = ((state == S_IDLE) && !init_start) || last;
  assign step_valid = (state == S_SPIKE) && (cnt < 4'(N_STEPS)) && !stall;
  assign step_k     = cnt;
  assign init_we    = (state == S_INIT);
  assign busy       = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      cnt <= '0;
      ev_x <= '0; ev_y <= '0; ev_c <= '0;
      cur_time <= '0;
      init_addr <= '0;
    end else begin
      case (state)
        S_INIT: begin
          init_addr <= init_addr + 1'b1;
          if (init_addr == '1) state <= S_IDLE;
        end
        S_SPIKE: begin
          if (!(cnt < 4'(N_STEPS) && stall)) cnt <= cnt + 1'b1;
          if (last) state <= S_IDLE;
        end
        default: begin
          if (init_start) begin
            state <= S_INIT;
            init_addr <= '0;
          end
        end
      endcase
      if (in_valid && in_ready) begin
        if (sev.op == EV_SPIKE) begin
          ev_x <= sev.x; ev_y <= sev.y; ev_c <= sev.c;
          cnt <= '0;
          state <= S_SPIKE;
        end else if (tev.op == EV_TIME) begin
          cur_time <= tev.ts;
        end
      end
    end
  end
endmodule
