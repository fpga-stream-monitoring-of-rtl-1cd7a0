// prescaler: derives the high-level controller's clock rates from the system
// clock.
//
// The high-level controller (HLC) runs slower than the system clock sclk: its
// clock hclk is sclk divided by DIV, and its queue interface runs at twice the
// hclk rate, still slower than sclk. Rather than generating new clocks, this
// design keeps one clock domain and produces clock-enable pulses, one sclk
// cycle wide:
//   hclk_en  - once every DIV sclk cycles (the hclk tick),
//   qclk_en  - twice every DIV sclk cycles (the queue-interface tick),
//   q_odd    - qualifies qclk_en: 0 on the even tick (events), 1 on the odd
//              tick, which coincides with hclk_en (deadlines).
// The paper gives the ratios (hclk < qclk = 2*hclk < sclk) but not DIV; DIV = 4
// is this design's choice, the smallest even value that keeps qclk below sclk.
module prescaler #(
  parameter int unsigned DIV = 4
) (
  input  logic clk,
  input  logic rst_n,
  output logic hclk_en,
  output logic qclk_en,
  output logic q_odd
);
  localparam int unsigned CW = (DIV > 2) ? $clog2(DIV) : 1;

  logic [CW-1:0] cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                  cnt <= '0;
    else if (cnt == CW'(DIV-1))  cnt <= '0;
    else                         cnt <= cnt + 1'b1;
  end

  assign hclk_en = (cnt == CW'(DIV-1));
  assign q_odd   = hclk_en;
  assign qclk_en = hclk_en || (cnt == CW'(DIV/2-1));

  initial begin
    assert (DIV >= 4 && DIV % 2 == 0)
      else $error("prescaler: DIV must be even and at least 4");
  end
endmodule
