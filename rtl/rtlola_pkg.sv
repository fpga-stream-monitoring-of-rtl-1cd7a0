// rtlola_pkg: types and constants shared by the stream monitor.
//
// The monitor is generated per specification: the generic parts (prescaler,
// external interface, time select, scheduler, event delay, input buffer,
// queue interfaces, evaluation controller and the stream/window components)
// are parameterised, and this package holds the constants of the one
// specification that the top level implements, the network-traffic monitor:
//
//   constant server: Int32
//   input src, dst: Int32      input fin, push, syn: bool     input length: Int32
//   output receiver      := dst = server
//   output received      := if receiver & push then 0 else length
//   output opened        := opened.offset(-1).defaults(0) + (dst = server & syn ? 1 : 0)
//   output closed        := closed.offset(-1).defaults(0) + (dst = server & fin ? 1 : 0)
//   trigger              opened - closed < 0
//   trigger @1Hz         receiver.aggregate(over: 0.5s, using: sum) > 10000
//   output workload @1Hz := received.aggregate(over: 1s, using: sum)
//   trigger              workload > 10^7
//
// Time stamps are unsigned nanosecond counts of TS_W bits (the width and the
// unit are this design's choice). An event is a packed vector holding, per
// input stream, its value followed by one bit that says whether the event
// carries a value for that stream. A queue entry is the event, a time stamp
// and one bit per output stream saying whether the stream is evaluated.
package rtlola_pkg;

  // ---------------------------------------------------------------- generic
  typedef enum logic {
    MODE_ONLINE  = 1'b0,   // time is the monitor's own clock
    MODE_OFFLINE = 1'b1    // time is carried by every event
  } mode_e;

  typedef enum logic [2:0] {
    AGG_SUM   = 3'd0,
    AGG_COUNT = 3'd1,
    AGG_MIN   = 3'd2,
    AGG_MAX   = 3'd3,
    AGG_AVG   = 3'd4
  } agg_e;

  localparam int unsigned TS_W = 64;
  typedef logic [TS_W-1:0] ts_t;

  // One nanosecond time unit; 100 MHz system clock.
  localparam longint unsigned NS_PER_S = 64'd1_000_000_000;
  localparam longint unsigned CLK_PERIOD_NS = 64'd10;

  // -------------------------------------------------- network specification
  localparam int unsigned N_IN   = 6;
  localparam int unsigned N_OUT  = 8;
  localparam int unsigned N_TRIG = 3;
  localparam int unsigned N_LAYERS = 4;
  localparam int unsigned N_WIN  = 2;

  // Input stream indices.
  localparam int unsigned I_SRC = 0, I_DST = 1, I_FIN = 2, I_PUSH = 3, I_SYN = 4, I_LEN = 5;

  // Output stream indices.
  localparam int unsigned O_RECEIVER = 0, O_OPENED = 1, O_CLOSED = 2, O_RECEIVED = 3,
                          O_TRIG_CLOSED = 4, O_MANY_CONN = 5, O_WORKLOAD = 6,
                          O_TRIG_WORKLOAD = 7;

  typedef struct packed {
    logic [31:0] src;    logic src_v;
    logic [31:0] dst;    logic dst_v;
    logic        fin;    logic fin_v;
    logic        push;   logic push_v;
    logic        syn;    logic syn_v;
    logic [31:0] length; logic length_v;
  } net_event_t;

  localparam int unsigned EV_W = $bits(net_event_t);   // 105 = sum(s_i + 1)

  typedef logic [N_OUT-1:0] out_mask_t;

  typedef struct packed {
    net_event_t ev;
    ts_t        ts;
    out_mask_t  aff;
  } qentry_t;

  localparam int unsigned QE_W = $bits(qentry_t);      // s_ev = 105 + 64 + 8

  // Bit position of each input stream's "value present" flag inside the event.
  typedef int unsigned in_pos_t [N_IN];
  localparam in_pos_t IN_VALID_POS = '{72, 39, 37, 35, 33, 0};

  // dep(i): output streams that transitively depend on input i through
  // synchronous (event-based) accesses. Bit j = output stream j.
  typedef out_mask_t in_dep_t [N_IN];
  localparam in_dep_t DEP = '{
    8'b0000_0000,   // src: unused by the specification
    8'b0001_1111,   // dst: receiver, opened, closed, received, trigger(opened-closed)
    8'b0001_0100,   // fin: closed, trigger(opened-closed)
    8'b0000_1000,   // push: received
    8'b0001_0010,   // syn: opened, trigger(opened-closed)
    8'b0000_1000    // length: received
  };

  // Evaluation layer of every output stream (1 .. N_LAYERS).
  typedef int unsigned out_layer_t [N_OUT];
  localparam out_layer_t LAYER = '{1, 1, 1, 2, 2, 2, 3, 4};

  // Periodic schedule: all periodic streams run at 1 Hz, so the hyper-period
  // is 1 s and holds a single deadline at its end.
  localparam int unsigned NUM_DL = 1;
  localparam longint unsigned HYPER_PERIOD = NS_PER_S;
  typedef ts_t dl_off_t [NUM_DL];
  localparam dl_off_t DL_OFFSET = '{NS_PER_S};
  typedef out_mask_t dl_tgt_t [NUM_DL];
  localparam dl_tgt_t DL_TARGET = '{8'b1110_0000};

  // Value of the server constant (the specification leaves it open).
  localparam logic [31:0] SERVER_IP = 32'h0A00_0001;

  localparam longint signed MANY_CONN_LIMIT = 64'sd10_000;
  localparam longint signed WORKLOAD_LIMIT  = 64'sd10_000_000;

endpackage
