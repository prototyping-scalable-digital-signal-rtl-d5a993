// tdd_top: tunable digital downconverter (TDD).
//
// Extracts a sub-band of centre C_f and width B_w from an 800 MHz-wide IF
// sampled at 1.6 GS/s, moves it to baseband and decimates it by an integer
// D = 5..12 to its Nyquist rate, with every setting changeable at run time.
// The ADC delivers eight consecutive 8-bit samples per 200 MHz clock, and
// every block below processes eight lanes per clock:
//
//   adc_data -> tunable_fir -+-> select_mux -> tdf -> tdd_out / tdd_valid
//                            |      ^
//                            +-> mixer (x nco cosine)
//
// Baseband mode (CTRL bit0 = 0): the FIR is a low-pass filter and its output
// goes straight to the decimation filter. Band mode (bit0 = 1): the FIR is a
// band-pass filter, the real mixer multiplies by cos(2*pi*f_LO*t) from the NCO,
// and the decimation filter's low-pass taps remove the upper image. For a band
// [C_f - B_w/2, C_f + B_w/2] a natural choice is f_LO = C_f - B_w/2 and
// D = 800 MHz / B_w. The fork of the dataflow graph is the fan-out of the FIR
// output to the select block and the mixer.
//
// Interface: adc_data[8] (signed 8-bit, lane 0 oldest); en, a clock enable
// shared by every block (low = the whole pipeline holds); a register port
// (see sw_regs); tdd_out[8] (signed 18-bit) with tdd_valid[8], one bit per
// lane, high for the clock in which that lane carries a new output sample.
// Output samples appear on lanes 0,1,2,...,7,0,... in order.
// Timing: baseband path 2 (FIR) + 1 (select) + 4 (TDF) = 7 enabled clocks
// from the block holding x[m*D] (FIR input) to y[m]; band path 9.
//
// Follows the paper: the block diagram (ADC, tunable FIR, fork, NCO and real
// mixer, select, tunable decimation filter, output to the downstream link),
// software-register tuning, 8 lanes and per-block enables. The register map,
// widths, latencies and the restart strobe are this design's choices.
module tdd_top (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  en,
  input  tdd_pkg::adc_t         adc_data  [tdd_pkg::LANES],
  input  logic                  wr_en,
  input  logic [7:0]            wr_addr,
  input  logic [31:0]           wr_data,
  input  logic [7:0]            rd_addr,
  output logic [31:0]           rd_data,
  output tdd_pkg::sample_t      tdd_out   [tdd_pkg::LANES],
  output logic [tdd_pkg::LANES-1:0] tdd_valid
);
  localparam int LANES = tdd_pkg::LANES;

  tdd_pkg::cfg_t         cfg;
  tdd_pkg::route_entry_t route    [tdd_pkg::SEQ_MAX];
  tdd_pkg::coef_t        fir_coef [tdd_pkg::FIR_TAPS];
  tdd_pkg::coef_t        tdf_coef [tdd_pkg::TDF_TAPS];
  logic                  restart;

  tdd_pkg::sample_t fir_out [LANES];
  tdd_pkg::sample_t lo_cos  [LANES];
  tdd_pkg::sample_t lo_sin  [LANES];   // discarded: real mixer
  tdd_pkg::sample_t mix_out [LANES];
  tdd_pkg::sample_t sel_out [LANES];

  sw_regs u_regs (
    .clk, .rst_n, .wr_en, .wr_addr, .wr_data, .rd_addr, .rd_data,
    .cfg, .route, .fir_coef, .tdf_coef, .restart
  );

  tunable_fir u_fir (
    .clk, .rst_n, .en,
    .din  (adc_data),
    .coef (fir_coef),
    .dout (fir_out)
  );

  nco u_nco (
    .clk, .rst_n, .en,
    .sync      (restart),
    .phase_inc (cfg.phase_inc),
    .cos_out   (lo_cos),
    .sin_out   (lo_sin)
  );

  mixer u_mixer (
    .clk, .rst_n, .en,
    .din  (fir_out),
    .lo   (lo_cos),
    .dout (mix_out)
  );

  select_mux u_select (
    .clk, .rst_n, .en,
    .sel_mix    (cfg.mix_en),
    .din_direct (fir_out),
    .din_mix    (mix_out),
    .dout       (sel_out)
  );

  tdf u_tdf (
    .clk, .rst_n, .en, .restart,
    .decim  (cfg.decim),
    .route  (route),
    .coef   (tdf_coef),
    .din    (sel_out),
    .dout   (tdd_out),
    .dvalid (tdd_valid)
  );
endmodule
