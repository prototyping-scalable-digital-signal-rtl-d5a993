// nco: numerically controlled oscillator producing eight samples per clock.
//
// A phase accumulator advances by LANES * phase_inc every enabled clock; lane
// k uses the phase acc + k * phase_inc, so the eight lanes are eight
// consecutive samples of cos(2*pi * f_LO * t) with
//   f_LO = phase_inc / 2^PHASE_W * f_s   (f_s = 1.6 GHz at the defaults).
// The top AW bits of each lane's phase address one dual-port sine memory per
// lane: port A gives the sine, port B (phase + quarter period) the cosine.
// The mixer uses the cosine; the sine is brought out for completeness and is
// left unused in the downconverter, which has a real mixer.
//
// Interface: phase_inc (PHASE_W bits), sync (zero the accumulator, e.g. after
// a frequency change), cos_out[LANES], sin_out[LANES] (W-bit signed).
// Timing: the samples for accumulator value acc(t) leave 2 enabled clocks
// later (address register, memory register). After sync at clock t the
// accumulator is 0 at clock t+1, so lane k at clock t+3 carries phase
// k*phase_inc.
//
// Follows the paper: NCO from dual-port RAMs with pre-computed sinusoids, each
// reading sine and cosine at once, frequency set by a software register. The
// phase-accumulator structure and widths are this design's choices.
module nco #(
  parameter int LANES   = tdd_pkg::LANES,
  parameter int PHASE_W = tdd_pkg::PHASE_W,
  parameter int AW      = tdd_pkg::LUT_AW,
  parameter int W       = tdd_pkg::LO_W
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                en,
  input  logic                sync,
  input  logic [PHASE_W-1:0]  phase_inc,
  output logic signed [W-1:0] cos_out [LANES],
  output logic signed [W-1:0] sin_out [LANES]
);
  localparam logic [AW-1:0] QUARTER = AW'(1 << (AW - 2));

  logic [PHASE_W-1:0] acc;
  logic [AW-1:0]      addr [LANES];
  logic [PHASE_W-1:0] ph   [LANES];   // lane phases; the top AW bits address the table

  always_comb
    for (int k = 0; k < LANES; k++) ph[k] = acc + PHASE_W'(k) * phase_inc;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc <= '0;
      for (int k = 0; k < LANES; k++) addr[k] <= '0;
    end else if (sync) begin
      acc <= '0;
    end else if (en) begin
      acc <= acc + PHASE_W'(LANES) * phase_inc;
      for (int k = 0; k < LANES; k++) addr[k] <= ph[k][PHASE_W-1 -: AW];
    end
  end

  for (genvar k = 0; k < LANES; k++) begin : g_lane
    nco_dpram #(.AW(AW), .W(W)) u_mem (
      .clk    (clk),
      .en     (en),
      .addr_a (addr[k]),
      .addr_b (addr[k] + QUARTER),
      .q_a    (sin_out[k]),
      .q_b    (cos_out[k])
    );
  end
endmodule
