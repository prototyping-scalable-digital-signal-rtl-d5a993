// tunable_fir: non-decimating FIR filter with run-time taps over eight lanes.
//
// Every clock the filter takes a block of LANES consecutive samples (lane 0 is
// the oldest) and produces LANES filtered samples. Lane i of block c computes
//   y[8c+i] = sum_{j=0..TAPS-1} h[j] * x[8c+i-j]
// so the previous block is kept as history. One multiplier per lane and tap
// (64 at the defaults), as a fully parallel polyphase FIR needs at one block per
// clock. With low-pass taps it is the baseband filter, with band-pass taps it
// selects the band that the mixer moves to baseband.
//
// Interface: din[LANES] (IN_W-bit signed), coef[TAPS] (COEF_W-bit signed,
// Q1.17), dout[LANES] = (sum >>> SHIFT) saturated to OUT_W bits.
// Timing: latency 2 enabled clocks (product register, sum register); en is a
// clock enable that freezes the whole pipeline.
//
// Follows the paper: a tunable FIR with up to 8 taps, set by software
// registers, that does not decimate, on 8 parallel lanes. This design's own
// choices: direct-form structure, widths, scaling and latency.
module tunable_fir #(
  parameter int LANES  = tdd_pkg::LANES,
  parameter int TAPS   = tdd_pkg::FIR_TAPS,
  parameter int IN_W   = tdd_pkg::ADC_W,
  parameter int OUT_W  = tdd_pkg::DATA_W,
  parameter int CW     = tdd_pkg::COEF_W,
  parameter int SHIFT  = tdd_pkg::FIR_SHIFT
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    en,
  input  logic signed [IN_W-1:0]  din  [LANES],
  input  logic signed [CW-1:0]    coef [TAPS],
  output logic signed [OUT_W-1:0] dout [LANES]
);
  localparam int HB   = (TAPS - 1 + LANES - 1) / LANES;  // history blocks
  localparam int WIN  = (HB + 1) * LANES;
  localparam int PW   = IN_W + CW;
  localparam int SW   = PW + $clog2(TAPS) + 1;

  logic signed [IN_W-1:0] hist [HB*LANES];  // previous blocks, oldest first
  logic signed [IN_W-1:0] win  [WIN];
  logic signed [PW-1:0]   prod [LANES][TAPS];
  logic signed [SW-1:0]   acc  [LANES];

  always_comb begin
    for (int k = 0; k < HB*LANES; k++) win[k] = hist[k];
    for (int k = 0; k < LANES; k++)    win[HB*LANES + k] = din[k];
    for (int i = 0; i < LANES; i++) begin
      acc[i] = '0;
      for (int j = 0; j < TAPS; j++) acc[i] += SW'(prod[i][j]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < HB*LANES; k++) hist[k] <= '0;
      for (int i = 0; i < LANES; i++)
        for (int j = 0; j < TAPS; j++) prod[i][j] <= '0;
      for (int i = 0; i < LANES; i++) dout[i] <= '0;
    end else if (en) begin
      for (int k = 0; k < HB*LANES; k++) hist[k] <= win[k + LANES];
      for (int i = 0; i < LANES; i++)
        for (int j = 0; j < TAPS; j++)
          prod[i][j] <= PW'(win[HB*LANES + i - j]) * PW'(coef[j]);
      for (int i = 0; i < LANES; i++)
        dout[i] <= OUT_W'(tdd_pkg::sat(48'(acc[i] >>> SHIFT)));
    end
  end
endmodule
