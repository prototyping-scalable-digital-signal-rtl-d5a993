// mixer: real mixer, eight lanes in parallel.
//
// Each lane multiplies a band-pass filtered sample by the oscillator's cosine
// sample for the same instant, dout = sat((din * lo) >>> SHIFT). Multiplying
// a band centred on C_f by cos(2*pi*f_LO*t) shifts it down by f_LO (and up by
// f_LO); the decimation filter that follows removes the upper image. With the
// cosine in Q1.17 and SHIFT = 17 the output keeps the input's scale, halved by
// the mixing itself.
//
// Interface: din[LANES] (IN_W-bit signed), lo[LANES] (LO_W-bit signed),
// dout[LANES] (OUT_W-bit signed, saturated).
// Timing: latency 2 enabled clocks (product register, output register).
//
// Follows the paper: a real mixer fed by the FIR output and the NCO, with the
// sine output of the oscillator discarded. Widths, scaling and latency are this
// design's choices.
module mixer #(
  parameter int LANES = tdd_pkg::LANES,
  parameter int IN_W  = tdd_pkg::DATA_W,
  parameter int LO_W  = tdd_pkg::LO_W,
  parameter int OUT_W = tdd_pkg::DATA_W,
  parameter int SHIFT = tdd_pkg::MIX_SHIFT
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    en,
  input  logic signed [IN_W-1:0]  din  [LANES],
  input  logic signed [LO_W-1:0]  lo   [LANES],
  output logic signed [OUT_W-1:0] dout [LANES]
);
  localparam int PW = IN_W + LO_W;
  logic signed [PW-1:0] prod [LANES];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < LANES; k++) begin
        prod[k] <= '0;
        dout[k] <= '0;
      end
    end else if (en) begin
      for (int k = 0; k < LANES; k++) begin
        prod[k] <= PW'(din[k]) * PW'(lo[k]);
        dout[k] <= OUT_W'(tdd_pkg::sat(48'(prod[k] >>> SHIFT)));
      end
    end
  end
endmodule
