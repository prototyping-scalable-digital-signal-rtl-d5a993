// tdf: tunable decimation filter, 8 in, 8 out (computes only the kept outputs, as a polyphase decimator does).
//
// Computes y[m] = sat((sum_{j=0..15} h[j] * x[m*D - j]) >>> 17) for an
// integer decimation factor D from 5 to 12, at the full rate of eight input
// samples per clock. Only the outputs that are kept are computed: the signal
// router picks, for each output instant, the 16 input samples that the taps
// need, two 16-tap units (32 multipliers) compute up to two outputs per
// clock, and the output MUX puts each result on the next output lane with its
// valid bit. D, the routing sequence and the taps come from software
// registers and can change while the stream runs; a restart realigns the
// routing sequence and the output lane to sample 0 / lane 0.
//
// Interface: restart, decim, route[SEQ_MAX], coef[TAPS], din[LANES],
// dout[LANES], dvalid[LANES].
// Timing: 4 enabled clocks from the block holding x[m*D] to y[m] on its lane
// (router 1, unit 2, MUX 1). No back-pressure: one block every enabled clock.
// After a restart at clock t the block at clock t+1 holds samples 0..7.
//
// Follows the paper: signal router driven by the decimation factor and a
// routing sequence, two 16-tap units in tandem, an output MUX, 8 outputs, up
// to 16 taps, D from 5 to 12. Widths, the sequence encoding and the latency
// are this design's choices.
module tdf #(
  parameter int LANES   = tdd_pkg::LANES,
  parameter int TAPS    = tdd_pkg::TDF_TAPS,
  parameter int UNITS   = tdd_pkg::TDF_UNITS,
  parameter int SEQ_MAX = tdd_pkg::SEQ_MAX,
  parameter int W       = tdd_pkg::DATA_W,
  parameter int CW      = tdd_pkg::COEF_W,
  parameter int SHIFT   = tdd_pkg::TDF_SHIFT
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  en,
  input  logic                  restart,
  input  logic [3:0]            decim,
  input  tdd_pkg::route_entry_t route [SEQ_MAX],
  input  logic signed [CW-1:0]  coef  [TAPS],
  input  logic signed [W-1:0]   din   [LANES],
  output logic signed [W-1:0]   dout  [LANES],
  output logic [LANES-1:0]      dvalid
);
  logic signed [W-1:0] win  [UNITS][TAPS];
  logic [UNITS-1:0]    wvalid;
  logic signed [W-1:0] udata [UNITS];
  logic [UNITS-1:0]    uvalid;
  logic                restart_d1, restart_d2, restart_d3, restart_d4;

  tdf_router #(.LANES(LANES), .TAPS(TAPS), .UNITS(UNITS), .SEQ_MAX(SEQ_MAX), .W(W)) u_router (
    .clk, .rst_n, .en, .restart, .decim, .route, .din, .win, .wvalid
  );

  for (genvar u = 0; u < UNITS; u++) begin : g_unit
    tap_unit16 #(.TAPS(TAPS), .W(W), .CW(CW), .SHIFT(SHIFT)) u_unit (
      .clk, .rst_n, .en,
      .vin  (wvalid[u]),
      .win  (win[u]),
      .coef (coef),
      .vout (uvalid[u]),
      .dout (udata[u])
    );
  end

  // The MUX lane pointer restarts together with the first result that follows
  // the restart, four enabled clocks later.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      restart_d1 <= 1'b0;
      restart_d2 <= 1'b0;
      restart_d3 <= 1'b0;
      restart_d4 <= 1'b0;
    end else if (en) begin
      restart_d1 <= restart;
      restart_d2 <= restart_d1;
      restart_d3 <= restart_d2;
      restart_d4 <= restart_d3;
    end else if (restart) begin
      restart_d1 <= 1'b1;
    end
  end

  tdf_outmux #(.LANES(LANES), .UNITS(UNITS), .W(W)) u_mux (
    .clk, .rst_n, .en,
    .restart (restart_d4),
    .vin     (uvalid),
    .din     (udata),
    .dout, .dvalid
  );

  a_decim_range : assert property (@(posedge clk) disable iff (!rst_n)
    en |-> (decim >= 4'(tdd_pkg::D_MIN) && decim <= 4'(tdd_pkg::D_MAX)));
endmodule
