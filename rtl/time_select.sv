// time_select: the HLC's internal time stamp `its`.
//
// Online mode: a TS_W-bit register starts at 0 and grows by CLK_PERIOD (the
// system clock period in time units, 10 ns for the paper's 100 MHz clock) on
// every system clock cycle, so its = t * CLK_PERIOD and it is always valid.
// Offline mode: the time stamp extracted from the event passes straight
// through (a wire, no delay) and is valid together with the event.
// Both behaviours follow the paper; the nanosecond unit is this design's
// choice.
module time_select
#(
  parameter rtlola_pkg::mode_e           MODE       = rtlola_pkg::MODE_ONLINE,
  parameter int unsigned     TS_W       = 64,
  parameter longint unsigned CLK_PERIOD = 10
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [TS_W-1:0] ext_ts,
  input  logic            valid_ext_ts,
  output logic [TS_W-1:0] its,
  output logic            valid_its
);
  logic [TS_W-1:0] reg_its;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                   reg_its <= '0;
    else if (MODE == rtlola_pkg::MODE_ONLINE) reg_its <= reg_its + TS_W'(CLK_PERIOD);
    else                          reg_its <= ext_ts;
  end

  always_comb begin
    if (MODE == rtlola_pkg::MODE_ONLINE) begin
      its       = reg_its;
      valid_its = 1'b1;
    end else begin
      its       = ext_ts;
      valid_its = valid_ext_ts;
    end
  end
endmodule
