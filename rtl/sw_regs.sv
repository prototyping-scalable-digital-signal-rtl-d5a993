// sw_regs: run-time ("software") registers of the downconverter.
//
// The host writes the configuration through a simple synchronous write port
// while the datapath keeps running, so the decimation factor, the routing
// sequence of the decimation filter, the NCO frequency and both filters' taps
// change without rebuilding the hardware. Map (word addresses, see tdd_pkg):
//   0x00 CTRL       bit0 mixer mode (1 = band mode through the mixer)
//                   bit1 restart: writing 1 emits a one-clock restart pulse
//                        (re-phases the NCO and the routing sequence); reads 0
//   0x01 DECIM      decimation factor D (5..12)
//   0x02 PHASE_INC  NCO phase step per input sample
//   0x10..0x1B      routing sequence entries (route_entry_t, 8 bits)
//   0x20..0x27      tunable FIR taps, 18-bit Q1.17
//   0x30..0x3F      decimation filter taps, 18-bit Q1.17
// Reset state: baseband mode, D = 8 with its one-entry sequence (an output on
// lane 0 of every block), FIR taps an identity (h0 = 2^17-1), TDF taps 0,
// NCO step 0.
//
// Interface: wr_en/wr_addr/wr_data, rd_addr/rd_data (combinational read),
// cfg (decoded struct), route[SEQ_MAX], fir_coef[FIR_TAPS], tdf_coef[TDF_TAPS],
// restart. Timing: a write takes effect on the clock after wr_en; restart is
// high for exactly that clock.
//
// Follows the paper: parameters held in software registers set at run time
// from the board's shell. The bus, map and reset values are this design's.
module sw_regs #(
  parameter int ADDR_W = 8,
  parameter int REG_W  = 32
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  wr_en,
  input  logic [ADDR_W-1:0]     wr_addr,
  input  logic [REG_W-1:0]      wr_data,
  input  logic [ADDR_W-1:0]     rd_addr,
  output logic [REG_W-1:0]      rd_data,
  output tdd_pkg::cfg_t         cfg,
  output tdd_pkg::route_entry_t route    [tdd_pkg::SEQ_MAX],
  output tdd_pkg::coef_t        fir_coef [tdd_pkg::FIR_TAPS],
  output tdd_pkg::coef_t        tdf_coef [tdd_pkg::TDF_TAPS],
  output logic                  restart
);
  localparam int SEQ_MAX  = tdd_pkg::SEQ_MAX;
  localparam int FIR_TAPS = tdd_pkg::FIR_TAPS;
  localparam int TDF_TAPS = tdd_pkg::TDF_TAPS;
  localparam int CW       = tdd_pkg::COEF_W;
  localparam int A_ROUTE  = 'h10;
  localparam int A_FIR    = 'h20;
  localparam int A_TDF    = 'h30;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg.mix_en    <= 1'b0;
      cfg.decim     <= 4'd8;
      cfg.phase_inc <= '0;
      for (int e = 0; e < SEQ_MAX; e++) route[e] <= '0;
      route[0]      <= '{v1: 1'b0, off1: 3'd0, v0: 1'b1, off0: 3'd0};
      for (int j = 0; j < FIR_TAPS; j++) fir_coef[j] <= '0;
      fir_coef[0]   <= tdd_pkg::coef_t'((1 << (CW - 1)) - 1);
      for (int j = 0; j < TDF_TAPS; j++) tdf_coef[j] <= '0;
      restart       <= 1'b0;
    end else begin
      restart <= 1'b0;
      if (wr_en) begin
        if (int'(wr_addr) == int'(tdd_pkg::REG_CTRL)) begin
          cfg.mix_en <= wr_data[0];
          restart    <= wr_data[1];
        end
        if (int'(wr_addr) == int'(tdd_pkg::REG_DECIM))     cfg.decim     <= wr_data[3:0];
        if (int'(wr_addr) == int'(tdd_pkg::REG_PHASE_INC)) cfg.phase_inc <= wr_data[tdd_pkg::PHASE_W-1:0];
        for (int e = 0; e < SEQ_MAX; e++)
          if (int'(wr_addr) == A_ROUTE + e) route[e] <= tdd_pkg::route_entry_t'(wr_data[7:0]);
        for (int j = 0; j < FIR_TAPS; j++)
          if (int'(wr_addr) == A_FIR + j) fir_coef[j] <= tdd_pkg::coef_t'(wr_data[CW-1:0]);
        for (int j = 0; j < TDF_TAPS; j++)
          if (int'(wr_addr) == A_TDF + j) tdf_coef[j] <= tdd_pkg::coef_t'(wr_data[CW-1:0]);
      end
    end
  end

  always_comb begin
    rd_data = '0;
    if (int'(rd_addr) == int'(tdd_pkg::REG_CTRL))      rd_data = REG_W'(cfg.mix_en);
    if (int'(rd_addr) == int'(tdd_pkg::REG_DECIM))     rd_data = REG_W'(cfg.decim);
    if (int'(rd_addr) == int'(tdd_pkg::REG_PHASE_INC)) rd_data = REG_W'(cfg.phase_inc);
    for (int e = 0; e < SEQ_MAX; e++)
      if (int'(rd_addr) == A_ROUTE + e) rd_data = REG_W'(route[e]);
    for (int j = 0; j < FIR_TAPS; j++)
      if (int'(rd_addr) == A_FIR + j) rd_data = REG_W'($signed(fir_coef[j]));
    for (int j = 0; j < TDF_TAPS; j++)
      if (int'(rd_addr) == A_TDF + j) rd_data = REG_W'($signed(tdf_coef[j]));
  end
endmodule
