// sliding_window: a real-time sliding window over one stream, evaluated with
// a fixed number of buckets.
//
// The aggregation must be a list homomorphism: a map from a value to an
// intermediate (here {acc, cnt}), an associative reduction with a neutral
// element epsilon = {0, 0}, and a finalisation. A window of duration
// BUCKETS * BUCKET_PERIOD, read by a stream with period BUCKET_PERIOD, keeps
// BUCKETS intermediates R[0] (oldest) .. R[BUCKETS-1] (newest); values that
// arrive between two reads are equivalent and are pre-aggregated into R[last].
//   evict (phase 1): T is the time at which the newest bucket closes. While
//        ts > T, each cycle drops R[0], moves the others down, opens an empty
//        R[last] and adds BUCKET_PERIOD to T; done = (ts <= T). The paper's
//        update "T + f" is read as adding the bucket period 1/f.
//   upd  : R[last] = R[last] (+) map(d_in).
//   req  : d_out = fin(R[0] (+) ... (+) R[last]) through a binary tree of the
//        reduction (logarithmic depth), registered; if upd is high in the
//        same cycle its value is included. d_out_valid is low while ts is
//        below the window duration (the expression's default applies, as in
//        the paper's sliding-average example) or, for AVG/MIN/MAX, while the
//        window holds no value.
// Aggregations (AGG): SUM, COUNT, MIN, MAX, AVG (integer quotient acc/cnt).
// The bucket scheme, eviction by T, tree reduction and finalisation follow
// the paper; the {acc, cnt} intermediate shared by all aggregations, the
// widths and the same-cycle bypass are this design's choices. T starts at 0,
// so bucket boundaries are multiples of BUCKET_PERIOD.
module sliding_window
#(
  parameter int unsigned     W             = 32,
  parameter int unsigned     ACC_W         = 64,
  parameter int unsigned     CNT_W         = 32,
  parameter int unsigned     TS_W          = 64,
  parameter int unsigned     BUCKETS       = 3,
  parameter longint unsigned BUCKET_PERIOD = 1_000_000_000,
  parameter rtlola_pkg::agg_e            AGG           = rtlola_pkg::AGG_SUM
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [TS_W-1:0]         ts,
  input  logic                    evict,
  input  logic                    upd,
  input  logic signed [W-1:0]     d_in,
  input  logic                    req,
  output logic                    done,
  output logic signed [ACC_W-1:0] d_out,
  output logic                    d_out_valid
);
  localparam int unsigned   P        = 1 << $clog2(BUCKETS);
  localparam longint unsigned DURATION = BUCKETS * BUCKET_PERIOD;

  typedef struct packed {
    logic signed [ACC_W-1:0] acc;
    logic        [CNT_W-1:0] cnt;
  } bucket_t;

  localparam bucket_t EPS = '0;

  function automatic bucket_t map_v(logic signed [W-1:0] v);
    bucket_t b;
    b.acc = ACC_W'(v);
    b.cnt = CNT_W'(1);
    return b;
  endfunction

  function automatic bucket_t reduce(bucket_t a, bucket_t b);
    bucket_t r;
    r.cnt = a.cnt + b.cnt;
    unique case (AGG)
      rtlola_pkg::AGG_MIN: r.acc = (a.cnt == 0) ? b.acc : (b.cnt == 0) ? a.acc : (a.acc < b.acc ? a.acc : b.acc);
      rtlola_pkg::AGG_MAX: r.acc = (a.cnt == 0) ? b.acc : (b.cnt == 0) ? a.acc : (a.acc > b.acc ? a.acc : b.acc);
      default: r.acc = a.acc + b.acc;
    endcase
    return r;
  endfunction

  bucket_t         r [BUCKETS];
  logic [TS_W-1:0] t_close;
  bucket_t         last_upd;
  bucket_t         node [2*P];
  bucket_t         total;
  logic            shift;

  assign shift    = evict && (ts > t_close);
  assign done     = (ts <= t_close);
  assign last_upd = reduce(r[BUCKETS-1], map_v(d_in));

  always_comb begin
    for (int k = 0; k < 2 * P; k++) node[k] = EPS;
    for (int k = 0; k < P; k++) begin
      if (k < BUCKETS - 1)       node[P+k] = r[k];
      else if (k == BUCKETS - 1) node[P+k] = upd ? last_upd : r[k];
    end
    for (int k = P - 1; k >= 1; k--) node[k] = reduce(node[2*k], node[2*k+1]);
    total = node[1];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      t_close <= '0;
      for (int k = 0; k < BUCKETS; k++) r[k] <= EPS;
    end else if (shift) begin
      t_close <= t_close + TS_W'(BUCKET_PERIOD);
      for (int k = 0; k < BUCKETS - 1; k++) r[k] <= r[k+1];
      r[BUCKETS-1] <= EPS;
    end else if (upd) begin
      r[BUCKETS-1] <= last_upd;
    end
  end

  // signed quotient for AVG (kept out of a mixed-sign expression)
  logic signed [ACC_W-1:0] avg_q, cnt_s;
  always_comb begin
    cnt_s = $signed(ACC_W'(total.cnt));
    avg_q = (total.cnt == 0) ? ACC_W'(0) : total.acc / cnt_s;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      d_out       <= '0;
      d_out_valid <= 1'b0;
    end else if (req) begin
      unique case (AGG)
        rtlola_pkg::AGG_COUNT: d_out <= ACC_W'(total.cnt);
        rtlola_pkg::AGG_AVG:   d_out <= avg_q;
        default:   d_out <= total.acc;
      endcase
      d_out_valid <= (ts >= TS_W'(DURATION)) &&
                     ((AGG == rtlola_pkg::AGG_SUM || AGG == rtlola_pkg::AGG_COUNT) || total.cnt != 0);
    end
  end
endmodule
