// tap_unit16: one 16-tap multiply-accumulate unit of the decimation filter.
//
// Each enabled clock with vin high the unit takes a window of TAPS samples
// from the signal router, x[n], x[n-1], ..., x[n-TAPS+1], multiplies tap j by
// coefficient h[j] and adds the products:
//   dout = sat((sum_j h[j] * win[j]) >>> SHIFT).
// The coefficients are run-time inputs. There is one multiplier per tap, so a
// unit delivers one decimated output per clock; the filter uses two units to
// keep up with up to two outputs per block of eight input samples.
//
// Interface: vin, win[TAPS] (W-bit signed), coef[TAPS] (Q1.17), vout, dout.
// Timing: latency 2 enabled clocks (product register, sum register); vout
// follows vin with the same delay.
//
// Follows the paper: the structure of one branch of the fixed decimation
// filter (a multiplier per tap followed by an adder chain) with tunable taps,
// 16 taps per unit. The sum is written as one adder tree here, and widths and
// pipeline depth are this design's choices.
module tap_unit16 #(
  parameter int TAPS  = tdd_pkg::TDF_TAPS,
  parameter int W     = tdd_pkg::DATA_W,
  parameter int CW    = tdd_pkg::COEF_W,
  parameter int SHIFT = tdd_pkg::TDF_SHIFT
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                en,
  input  logic                vin,
  input  logic signed [W-1:0] win  [TAPS],
  input  logic signed [CW-1:0] coef [TAPS],
  output logic                vout,
  output logic signed [W-1:0] dout
);
  localparam int PW = W + CW;
  localparam int SW = PW + $clog2(TAPS) + 1;

  logic signed [PW-1:0] prod [TAPS];
  logic                 pv;
  logic signed [SW-1:0] acc;

  always_comb begin
    acc = '0;
    for (int j = 0; j < TAPS; j++) acc += SW'(prod[j]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int j = 0; j < TAPS; j++) prod[j] <= '0;
      pv   <= 1'b0;
      vout <= 1'b0;
      dout <= '0;
    end else if (en) begin
      for (int j = 0; j < TAPS; j++) prod[j] <= PW'(win[j]) * PW'(coef[j]);
      pv   <= vin;
      vout <= pv;
      dout <= W'(tdd_pkg::sat(48'(acc >>> SHIFT)));
    end
  end
endmodule
