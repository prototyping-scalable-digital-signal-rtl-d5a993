// select_mux: the "select" block of the downconverter, a registered 2:1
// multiplexer over eight lanes.
//
// In baseband mode (sel_mix = 0) the FIR output goes straight to the
// decimation filter and the mixer is bypassed; in band mode (sel_mix = 1) the
// mixer output is passed on. Together with the wire fan-out of the FIR output
// (the dataflow "fork") it forms the bypass around the mixer.
//
// Interface: sel_mix, din_direct[LANES], din_mix[LANES], dout[LANES].
// Timing: 1 enabled clock. The two inputs are not delay-matched: the mixer
// path is 2 clocks longer than the direct one, which only shifts the output
// instants by two blocks after a mode change.
//
// Follows the paper: fork and select route the FIR output around the mixer in
// baseband mode. The register and the mode encoding are this design's choice.
module select_mux #(
  parameter int LANES = tdd_pkg::LANES,
  parameter int W     = tdd_pkg::DATA_W
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                en,
  input  logic                sel_mix,
  input  logic signed [W-1:0] din_direct [LANES],
  input  logic signed [W-1:0] din_mix    [LANES],
  output logic signed [W-1:0] dout       [LANES]
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < LANES; k++) dout[k] <= '0;
    end else if (en) begin
      for (int k = 0; k < LANES; k++)
        dout[k] <= sel_mix ? din_mix[k] : din_direct[k];
    end
  end
endmodule
