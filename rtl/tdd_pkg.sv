// tdd_pkg: constants and types shared by the tunable digital downconverter.
//
// The downconverter processes an ADC stream that arrives as eight consecutive
// 8-bit samples per clock (1.6 GS/s on a 200 MHz clock). Inside, samples are
// 18-bit signed, coefficients are 18-bit signed Q1.17 so that each product
// fits an 18x18 multiplier. The lane count, ADC width, tap counts, number of
// 16-tap units and the 5..12 decimation range follow the paper; the internal
// widths, NCO table size, routing-table size and register map are choices of
// this design.
package tdd_pkg;

  localparam int LANES     = 8;   // samples per clock
  localparam int ADC_W     = 8;   // ADC sample width
  localparam int DATA_W    = 18;  // internal sample width
  localparam int COEF_W    = 18;  // coefficient width, Q1.17
  localparam int FIR_TAPS  = 8;   // tunable FIR filter taps
  localparam int TDF_TAPS  = 16;  // taps per 16-tap unit of the decimation filter
  localparam int TDF_UNITS = 2;   // 16-tap units working in tandem
  localparam int D_MIN     = 5;
  localparam int D_MAX     = 12;
  localparam int SEQ_MAX   = 12;  // entries of the signal-routing sequence
  localparam int PHASE_W   = 32;  // NCO phase accumulator
  localparam int LUT_AW    = 10;  // NCO table address width (1024 entries)
  localparam int LO_W      = 18;  // NCO output width
  localparam int FIR_SHIFT = 10;  // FIR: 8-bit in, Q1.17 taps -> 18-bit out
  localparam int MIX_SHIFT = 17;  // mixer: undo the Q1.17 scale of the cosine
  localparam int TDF_SHIFT = 17;  // TDF: undo the Q1.17 scale of the taps

  typedef logic signed [ADC_W-1:0]  adc_t;
  typedef logic signed [DATA_W-1:0] sample_t;
  typedef logic signed [COEF_W-1:0] coef_t;

  // One step of the signal-routing sequence: for each 16-tap unit, whether an
  // output instant n = m*D falls inside this clock's block of eight samples,
  // and on which lane (0 = oldest sample of the block).
  typedef struct packed {
    logic       v1;
    logic [2:0] off1;
    logic       v0;
    logic [2:0] off0;
  } route_entry_t;

  // Register map of the software registers (word addresses).
  typedef enum logic [7:0] {
    REG_CTRL      = 8'h00,  // bit0: mixer mode, bit1: restart (self-clearing)
    REG_DECIM     = 8'h01,  // decimation factor D, 5..12
    REG_PHASE_INC = 8'h02,  // NCO phase step per sample
    REG_ROUTE0    = 8'h10,  // 0x10..0x1B: routing sequence entries
    REG_FIR0      = 8'h20,  // 0x20..0x27: tunable FIR taps
    REG_TDF0      = 8'h30   // 0x30..0x3F: decimation filter taps
  } reg_addr_e;

  // Decoded configuration driven by the software registers.
  typedef struct packed {
    logic                mix_en;
    logic [3:0]          decim;
    logic [PHASE_W-1:0]  phase_inc;
  } cfg_t;

  // Samples per period of the routing sequence: D / gcd(D, LANES), i.e. D with
  // its factors of two removed (LANES = 8).
  function automatic logic [3:0] seq_period(input logic [3:0] d);
    if (d[0])      return d;
    else if (d[1]) return {1'b0, d[3:1]};
    else if (d[2]) return {2'b0, d[3:2]};
    else           return {3'b0, d[3]};
  endfunction

  // Saturate a wide signed value to DATA_W bits.
  function automatic sample_t sat(input logic signed [47:0] v);
    localparam logic signed [47:0] MAXV = (48'sd1 <<< (DATA_W-1)) - 48'sd1;
    localparam logic signed [47:0] MINV = -(48'sd1 <<< (DATA_W-1));
    if (v > MAXV)      return sample_t'(MAXV[DATA_W-1:0]);
    else if (v < MINV) return sample_t'(MINV[DATA_W-1:0]);
    else               return sample_t'(v[DATA_W-1:0]);
  endfunction

endpackage
