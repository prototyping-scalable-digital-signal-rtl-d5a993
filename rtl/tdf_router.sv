// tdf_router: signal router of the tunable decimation filter.
//
// The decimation filter produces y[m] = sum_j h[j] * x[m*D - j], i.e. one
// output at every D-th input sample (the first sample after a restart being
// the first output instant). With eight samples per clock and D >= 5, a clock's
// block holds zero, one or two output instants, and the pattern repeats every
// P = D / gcd(D, 8) clocks. Software works this pattern out and stores it as
// the routing sequence: entry c says, for each of the two 16-tap units,
// whether an output instant n falls in the block of clock c of the period and
// on which lane. The router keeps the two previous blocks plus the current one
// (24 samples) and hands unit u the window x[n], x[n-1], ..., x[n-TAPS+1].
// A sequence counter steps through entries 0..P-1; P is derived from D here,
// so changing D and the sequence retunes the filter with no new hardware.
//
// Interface: decim (D), route[SEQ_MAX], restart (counter to entry 0),
// din[LANES], win[UNITS][TAPS] (tap 0 = newest), wvalid[UNITS].
// Timing: win/wvalid are registered, 1 enabled clock after the block.
//
// Follows the paper: a signal router driven by the decimation factor and a
// software-computed routing sequence feeding two 16-tap units. The encoding of
// the sequence and the window structure are this design's own.
module tdf_router #(
  parameter int LANES   = tdd_pkg::LANES,
  parameter int TAPS    = tdd_pkg::TDF_TAPS,
  parameter int UNITS   = tdd_pkg::TDF_UNITS,
  parameter int SEQ_MAX = tdd_pkg::SEQ_MAX,
  parameter int W       = tdd_pkg::DATA_W
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  en,
  input  logic                  restart,
  input  logic [3:0]            decim,
  input  tdd_pkg::route_entry_t route [SEQ_MAX],
  input  logic signed [W-1:0]   din   [LANES],
  output logic signed [W-1:0]   win   [UNITS][TAPS],
  output logic [UNITS-1:0]      wvalid
);
  localparam int HB  = (TAPS - 1 + LANES - 1) / LANES;  // previous blocks kept
  localparam int WIN = (HB + 1) * LANES;
  localparam int CW  = $clog2(SEQ_MAX);

  logic signed [W-1:0] hist [HB*LANES];
  logic signed [W-1:0] w    [WIN];
  logic [CW-1:0]       cnt;
  logic [3:0]          period;
  tdd_pkg::route_entry_t ent;
  logic [2:0]          off [UNITS];
  logic [UNITS-1:0]    v;

  assign period = tdd_pkg::seq_period(decim);
  assign ent    = route[cnt];

  always_comb begin
    for (int k = 0; k < HB*LANES; k++) w[k] = hist[k];
    for (int k = 0; k < LANES; k++)    w[HB*LANES + k] = din[k];
    for (int u = 0; u < UNITS; u++) begin
      off[u] = '0;
      v[u]   = 1'b0;
    end
    off[0] = ent.off0;
    v[0]   = ent.v0;
    if (UNITS > 1) begin
      off[UNITS-1] = ent.off1;
      v[UNITS-1]   = ent.v1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt    <= '0;
      wvalid <= '0;
      for (int k = 0; k < HB*LANES; k++) hist[k] <= '0;
      for (int u = 0; u < UNITS; u++)
        for (int j = 0; j < TAPS; j++) win[u][j] <= '0;
    end else if (en) begin
      for (int k = 0; k < HB*LANES; k++) hist[k] <= w[k + LANES];
      for (int u = 0; u < UNITS; u++) begin
        wvalid[u] <= v[u] && !restart;
        for (int j = 0; j < TAPS; j++)
          win[u][j] <= w[HB*LANES + int'(off[u]) - j];
      end
      if (restart || 4'(cnt) + 4'd1 >= period) cnt <= '0;
      else                                     cnt <= cnt + 1'b1;
    end else if (restart) begin
      cnt <= '0;
    end
  end

  // A second output in a block needs a first one before it.
  a_order : assert property (@(posedge clk) disable iff (!rst_n)
    en |-> !(ent.v1 && !ent.v0) || (int'(period) == 0));
  a_order2 : assert property (@(posedge clk) disable iff (!rst_n)
    (en && ent.v1 && ent.v0) |-> ent.off1 > ent.off0);
endmodule
