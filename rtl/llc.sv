// llc: low-level controller for the network-traffic specification
// (see rtlola_pkg for the specification text and the stream numbering).
//
// llq_interface pops one queue entry at a time and hands it to
// eval_controller, which steps the stream components through an evaluation:
//   state 1   inputs present in the event take their values, affected outputs
//             are pseudo-extended, both windows evict outdated buckets;
//   state 2.1 receiver, opened, closed;
//   state 2.2 received, the opened/closed trigger and the 1 Hz trigger on the
//             0.5 s sum of receiver (window w0 is updated with receiver and
//             read here);
//   state 2.3 workload, the 1 Hz, 1 s sum of received (window w1 is updated
//             with received and read here);
//   state 2.4 the workload trigger.
// Components: six in_stream (src is stored although the specification never
// reads it), eight out_stream (opened and closed keep their previous value
// for the offset -1 lookup, DEPTH 2), two sliding_window of one bucket each
// (window length times stream frequency: 0.5 s * 1 Hz rounds up to one
// bucket of 0.5 s, 1 s * 1 Hz is one bucket of 1 s).
// Stream expressions are combinational and take one cycle, so done2 is
// always high. Missing values fall back to the specification's defaults
// (0 for the offsets) and to 0 for a window that is not yet valid (the
// specification gives no default there).
// Reporting: one cycle after an evaluation ends, `report` pulses with the
// entry's time stamp, its affected mask, the newest value and valid bit of
// every output stream, and `trig`, set for each trigger stream evaluated to
// true in this evaluation: trig[0] closed > opened, trig[1] many incoming
// connections, trig[2] workload too high.
// Latency: 1 (pop) + 1 (idle->1) + cycles in state 1 + 2 * 4 + 1 (report).
module llc
  import rtlola_pkg::*;
#(
  parameter logic [31:0] SERVER = SERVER_IP
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      empty,
  input  logic [QE_W-1:0]           q_out,
  output logic                      pop,
  output logic                      report,
  output logic [N_TRIG-1:0]         trig,
  output logic [TS_W-1:0]           eval_ts,
  output logic [N_OUT-1:0]          eval_aff,
  output logic signed [63:0]        out_val [N_OUT],
  output logic [N_OUT-1:0]          out_valid,
  output logic                      busy
);
  logic [QE_W-1:0] d_in_raw;
  qentry_t         d_in;
  logic            een, eval_done, start1, evict, done1;
  logic [N_LAYERS:1] layer_req, layer_eval;
  logic            done_q;

  llq_interface #(.W(QE_W)) u_llq (
    .clk, .rst_n, .empty, .q_out, .eval_done, .pop, .een, .d_in(d_in_raw)
  );
  assign d_in = qentry_t'(d_in_raw);

  eval_controller #(.N_LAYERS(N_LAYERS)) u_ec (
    .clk, .rst_n, .een, .done1, .done2(1'b1), .start1, .evict,
    .layer_req, .layer_eval, .eval_done, .busy
  );

  // ------------------------------------------------------------ inputs
  logic [0:0][32:0] src_q, dst_q, len_q;
  logic [0:0][1:0]  fin_q, push_q, syn_q;
  logic [N_IN-1:0]  in_done;

  in_stream #(.W(32), .DEPTH(1)) u_in_src (.clk, .rst_n,
    .upd(start1 && d_in.ev.src_v), .d_in(d_in.ev.src), .done(in_done[I_SRC]), .d_out(src_q));
  in_stream #(.W(32), .DEPTH(1)) u_in_dst (.clk, .rst_n,
    .upd(start1 && d_in.ev.dst_v), .d_in(d_in.ev.dst), .done(in_done[I_DST]), .d_out(dst_q));
  in_stream #(.W(1), .DEPTH(1)) u_in_fin (.clk, .rst_n,
    .upd(start1 && d_in.ev.fin_v), .d_in(d_in.ev.fin), .done(in_done[I_FIN]), .d_out(fin_q));
  in_stream #(.W(1), .DEPTH(1)) u_in_push (.clk, .rst_n,
    .upd(start1 && d_in.ev.push_v), .d_in(d_in.ev.push), .done(in_done[I_PUSH]), .d_out(push_q));
  in_stream #(.W(1), .DEPTH(1)) u_in_syn (.clk, .rst_n,
    .upd(start1 && d_in.ev.syn_v), .d_in(d_in.ev.syn), .done(in_done[I_SYN]), .d_out(syn_q));
  in_stream #(.W(32), .DEPTH(1)) u_in_len (.clk, .rst_n,
    .upd(start1 && d_in.ev.length_v), .d_in(d_in.ev.length), .done(in_done[I_LEN]), .d_out(len_q));

  logic [31:0] dst_v, len_v;
  logic        fin_v, push_v, syn_v;
  assign dst_v  = dst_q[0][32:1];
  assign len_v  = len_q[0][32:1];
  assign fin_v  = fin_q[0][1];
  assign push_v = push_q[0][1];
  assign syn_v  = syn_q[0][1];

  // ------------------------------------------------------------ outputs
  logic [N_OUT-1:0] pe, ev_j, out_done;
  always_comb begin
    for (int j = 0; j < N_OUT; j++) begin
      pe[j]   = start1 && d_in.aff[j];
      ev_j[j] = layer_eval[LAYER[j]] && d_in.aff[j];
    end
  end

  logic [0:0][1:0]  receiver_q, trig_closed_q, many_conn_q, trig_work_q;
  logic [1:0][32:0] opened_q, closed_q;
  logic [0:0][32:0] received_q;
  logic [0:0][64:0] workload_q;

  logic        receiver_e, trig_closed_e, many_conn_e, trig_work_e;
  logic [31:0] opened_e, closed_e, received_e;
  logic [63:0] workload_e;

  // window results
  logic signed [63:0] w0_val, w1_val;
  logic               w0_valid, w1_valid, w0_done, w1_done;

  // expressions
  logic signed [31:0] opened_prev, closed_prev;
  always_comb begin
    opened_prev   = opened_q[0][0] ? opened_q[0][32:1] : 32'sd0;   // .offset(-1).defaults(0)
    closed_prev   = closed_q[0][0] ? closed_q[0][32:1] : 32'sd0;
    receiver_e    = (dst_v == SERVER);
    opened_e      = opened_prev + ((dst_v == SERVER && syn_v) ? 32'sd1 : 32'sd0);
    closed_e      = closed_prev + ((dst_v == SERVER && fin_v) ? 32'sd1 : 32'sd0);
    received_e    = (receiver_q[0][1] && push_v) ? 32'd0 : len_v;
    trig_closed_e = ($signed(opened_q[1][32:1]) - $signed(closed_q[1][32:1])) < 0;
    many_conn_e   = (w0_valid ? w0_val : 64'sd0) > MANY_CONN_LIMIT;
    workload_e    = w1_valid ? w1_val : 64'sd0;
    trig_work_e   = $signed(workload_q[0][64:1]) > WORKLOAD_LIMIT;
  end

  out_stream #(.W(1),  .DEPTH(1)) u_receiver (.clk, .rst_n, .pe(pe[O_RECEIVER]),
    .eval(ev_j[O_RECEIVER]), .value(receiver_e), .done(out_done[O_RECEIVER]), .d_out(receiver_q));
  out_stream #(.W(32), .DEPTH(2)) u_opened (.clk, .rst_n, .pe(pe[O_OPENED]),
    .eval(ev_j[O_OPENED]), .value(opened_e), .done(out_done[O_OPENED]), .d_out(opened_q));
  out_stream #(.W(32), .DEPTH(2)) u_closed (.clk, .rst_n, .pe(pe[O_CLOSED]),
    .eval(ev_j[O_CLOSED]), .value(closed_e), .done(out_done[O_CLOSED]), .d_out(closed_q));
  out_stream #(.W(32), .DEPTH(1)) u_received (.clk, .rst_n, .pe(pe[O_RECEIVED]),
    .eval(ev_j[O_RECEIVED]), .value(received_e), .done(out_done[O_RECEIVED]), .d_out(received_q));
  out_stream #(.W(1),  .DEPTH(1)) u_trig_closed (.clk, .rst_n, .pe(pe[O_TRIG_CLOSED]),
    .eval(ev_j[O_TRIG_CLOSED]), .value(trig_closed_e), .done(out_done[O_TRIG_CLOSED]), .d_out(trig_closed_q));
  out_stream #(.W(1),  .DEPTH(1)) u_many_conn (.clk, .rst_n, .pe(pe[O_MANY_CONN]),
    .eval(ev_j[O_MANY_CONN]), .value(many_conn_e), .done(out_done[O_MANY_CONN]), .d_out(many_conn_q));
  out_stream #(.W(64), .DEPTH(1)) u_workload (.clk, .rst_n, .pe(pe[O_WORKLOAD]),
    .eval(ev_j[O_WORKLOAD]), .value(workload_e), .done(out_done[O_WORKLOAD]), .d_out(workload_q));
  out_stream #(.W(1),  .DEPTH(1)) u_trig_work (.clk, .rst_n, .pe(pe[O_TRIG_WORKLOAD]),
    .eval(ev_j[O_TRIG_WORKLOAD]), .value(trig_work_e), .done(out_done[O_TRIG_WORKLOAD]), .d_out(trig_work_q));

  // ------------------------------------------------------------ windows
  sliding_window #(.W(32), .ACC_W(64), .TS_W(TS_W), .BUCKETS(1),
                   .BUCKET_PERIOD(NS_PER_S / 2), .AGG(AGG_SUM)) u_w0 (
    .clk, .rst_n, .ts(d_in.ts), .evict,
    .upd(layer_req[LAYER[O_RECEIVER] + 1] && d_in.aff[O_RECEIVER] && receiver_q[0][0]),
    .d_in({31'd0, receiver_q[0][1]}),
    .req(layer_req[LAYER[O_MANY_CONN]] && d_in.aff[O_MANY_CONN]),
    .done(w0_done), .d_out(w0_val), .d_out_valid(w0_valid)
  );

  sliding_window #(.W(32), .ACC_W(64), .TS_W(TS_W), .BUCKETS(1),
                   .BUCKET_PERIOD(NS_PER_S), .AGG(AGG_SUM)) u_w1 (
    .clk, .rst_n, .ts(d_in.ts), .evict,
    .upd(layer_req[LAYER[O_RECEIVED] + 1] && d_in.aff[O_RECEIVED] && received_q[0][0]),
    .d_in(received_q[0][32:1]),
    .req(layer_req[LAYER[O_WORKLOAD]] && d_in.aff[O_WORKLOAD]),
    .done(w1_done), .d_out(w1_val), .d_out_valid(w1_valid)
  );

  // Phase 1 is complete when every enabled component is done; inputs and
  // outputs finish in their first cycle, windows once they have caught up.
  logic [N_IN-1:0] in_upd;
  assign in_upd = {start1 && d_in.ev.length_v, start1 && d_in.ev.syn_v, start1 && d_in.ev.push_v,
                   start1 && d_in.ev.fin_v, start1 && d_in.ev.dst_v, start1 && d_in.ev.src_v};
  assign done1 = w0_done && w1_done && ((in_upd & ~in_done) == '0) && ((pe & ~out_done) == '0);

  // ------------------------------------------------------------ report
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) done_q <= 1'b0;
    else        done_q <= eval_done;
  end

  always_comb begin
    report   = done_q;
    eval_ts  = d_in.ts;
    eval_aff = d_in.aff;
    out_val[O_RECEIVER]      = 64'(receiver_q[0][1]);
    out_val[O_OPENED]        = 64'($signed(opened_q[1][32:1]));
    out_val[O_CLOSED]        = 64'($signed(closed_q[1][32:1]));
    out_val[O_RECEIVED]      = 64'($signed(received_q[0][32:1]));
    out_val[O_TRIG_CLOSED]   = 64'(trig_closed_q[0][1]);
    out_val[O_MANY_CONN]     = 64'(many_conn_q[0][1]);
    out_val[O_WORKLOAD]      = $signed(workload_q[0][64:1]);
    out_val[O_TRIG_WORKLOAD] = 64'(trig_work_q[0][1]);
    out_valid = {trig_work_q[0][0], workload_q[0][0], many_conn_q[0][0], trig_closed_q[0][0],
                 received_q[0][0], closed_q[1][0], opened_q[1][0], receiver_q[0][0]};
    trig[0] = d_in.aff[O_TRIG_CLOSED]   && trig_closed_q[0][1];
    trig[1] = d_in.aff[O_MANY_CONN]     && many_conn_q[0][1];
    trig[2] = d_in.aff[O_TRIG_WORKLOAD] && trig_work_q[0][1];
  end
endmodule
