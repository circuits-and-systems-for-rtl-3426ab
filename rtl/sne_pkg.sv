// sne_pkg: event word format and constants shared by the Sparse Neural Engine (SNE).
//
// Every event that moves through SNE (L2 buffers, streamers, crossbar, slices,
// collectors) is one 32-bit word. The top four bits carry the operation, the
// low 28 bits the payload:
//   spike event : op = EV_SPIKE, payload = {4'b0, c[7:0], y[7:0], x[7:0]}
//                 (COO "list of coordinates" format with channel c)
//   time event  : op = EV_TIME,  payload = 28-bit timestamp
// The 28-bit timestamp width is the paper's; the bit layout is this design's choice.
package sne_pkg;

  localparam int unsigned EV_W   = 32;
  localparam int unsigned TS_W   = 28;
  localparam int unsigned COORD_W = 8;

  typedef enum logic [3:0] {
    EV_NONE  = 4'h0,
    EV_SPIKE = 4'h1,
    EV_TIME  = 4'h2
  } ev_op_e;

  typedef struct packed {
    ev_op_e       op;
    logic [3:0]   rsv;
    logic [7:0]   c;
    logic [7:0]   y;
    logic [7:0]   x;
  } spike_ev_t;

  typedef struct packed {
    ev_op_e            op;
    logic [TS_W-1:0]   ts;
  } time_ev_t;

  function automatic logic [EV_W-1:0] mk_spike(logic [7:0] x, logic [7:0] y, logic [7:0] c);
    spike_ev_t e;
    e.op = EV_SPIKE; e.rsv = '0; e.c = c; e.y = y; e.x = x;
    return e;
  endfunction

  function automatic logic [EV_W-1:0] mk_time(logic [TS_W-1:0] ts);
    time_ev_t e;
    e.op = EV_TIME; e.ts = ts;
    return e;
  endfunction

endpackage
