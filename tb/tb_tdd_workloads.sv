// tb_tdd_workloads: runs the downconverter on tones in two band settings and
// checks it behaves as a downconverter, not sample by sample:
//   A  baseband, B_w = 160 MHz (D = 5), C_f = 80 MHz: a 40 MHz tone must pass
//      with about unity gain, a 600 MHz tone must be strongly attenuated.
//   B  band mode, B_w = 80 MHz (D = 10), C_f = 400 MHz, f_LO = 360 MHz: a
//      410 MHz tone must come out as a 50 MHz tone in the 160 MS/s output, a
//      200 MHz tone must be strongly attenuated.
// Taps are designed here: the decimation filter is a 16-tap Hamming-windowed
// sinc low-pass with cut-off B_w, the FIR an 8-tap windowed low-pass (A) or
// band-pass centred on C_f (B); both are scaled to unity gain in Q1.17.
// The sample clock is 1.6 GS/s, eight samples per 200 MHz clock.
module tb_tdd_workloads;
  localparam int LANES = 8;
  localparam real FS = 1600.0e6;
  localparam real PI = 3.14159265358979323846;
  logic clk = 0, rst_n = 0, en = 0;
  tdd_pkg::adc_t adc_data [LANES];
  logic wr_en = 0;
  logic [7:0] wr_addr = 0, rd_addr = 0;
  logic [31:0] wr_data = 0, rd_data;
  tdd_pkg::sample_t tdd_out [LANES];
  logic [LANES-1:0] tdd_valid;
  int checks = 0, failures = 0;

  tdd_top dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) failures++;
    $display("%s %s", ok ? "ok  " : "FAIL", what);
  endtask

  task automatic wr(input int a, input longint d);
    @(negedge clk);
    wr_en = 1; wr_addr = 8'(a); wr_data = 32'(d);
    @(negedge clk);
    wr_en = 0;
  endtask

  // Output collection: samples leave on lanes 0,1,2,... in turn.
  real ys [$];
  int  next_lane = 0;
  bit  collect = 0;
  always @(negedge clk) if (rst_n && collect) begin
    for (int k = 0; k < 2; k++)
      if (tdd_valid[next_lane]) begin
        ys.push_back(real'(tdd_out[next_lane]));
        next_lane = (next_lane + 1) % LANES;
      end
  end

  function automatic real hamming(input int j, input int n);
    return 0.54 - 0.46 * $cos(2.0 * PI * j / (n - 1));
  endfunction

  // fc: cut-off (Hz); f0: centre for a band-pass (0 = low-pass)
  task automatic set_taps(input int d, input real fir_fc, input real fir_f0, input real tdf_fc);
    real g [8], h [16], s;
    logic [7:0] r [12];
    int p;
    s = 0.0;
    for (int j = 0; j < 8; j++) begin
      real t, x;
      t = j - 3.5;
      x = 2.0 * PI * fir_fc / FS * t;
      g[j] = hamming(j, 8) * $sin(x) / x * $cos(2.0 * PI * fir_f0 / FS * t);
      s += g[j] * $cos(2.0 * PI * fir_f0 / FS * t);
    end
    for (int j = 0; j < 8; j++) wr('h20 + j, longint'($rtoi(g[j] / s * 131071.0)));
    s = 0.0;
    for (int j = 0; j < 16; j++) begin
      real t, x;
      t = j - 7.5;
      x = 2.0 * PI * tdf_fc / FS * t;
      h[j] = hamming(j, 16) * $sin(x) / x;
      s += h[j];
    end
    for (int j = 0; j < 16; j++) wr('h30 + j, longint'($rtoi(h[j] / s * 131071.0)));
    tdd_ref_pkg::route_for(d, r, p);
    wr('h01, d);
    for (int e = 0; e < 12; e++) wr('h10 + e, r[e]);
  endtask

  // Run a tone of frequency f (amplitude 100 LSB) and return the output RMS
  // and the fraction of output power at frequency fo (output rate FS/d).
  task automatic run_tone(input real f, input int d, input bit band, input real fo,
                          output real rms, output real frac);
    real p_tot, re, im;
    int n0;
    en = 0;
    wr('h00, {30'b0, 1'b1, band});
    @(negedge clk);
    ys.delete();
    next_lane = 0;
    collect = 1;
    en = 1;
    for (int c = 0; c < 900; c++) begin
      for (int i = 0; i < LANES; i++)
        adc_data[i] = 8'($rtoi($floor(100.0 * $cos(2.0 * PI * f / FS * (c * LANES + i)) + 0.5)));
      @(negedge clk);
    end
    collect = 0;
    n0 = 40;                                  // skip the filters' start-up
    p_tot = 0.0; re = 0.0; im = 0.0;
    for (int m = n0; m < ys.size(); m++) begin
      p_tot += ys[m] * ys[m];
      re += ys[m] * $cos(2.0 * PI * fo * d / FS * m);
      im += ys[m] * $sin(2.0 * PI * fo * d / FS * m);
    end
    rms  = $sqrt(p_tot / (ys.size() - n0));
    frac = 2.0 * (re * re + im * im) / (ys.size() - n0) / (p_tot + 1.0e-9);
    $display("tone %0.0f MHz, D=%0d, %s: %0d outputs, rms %0.1f, power at %0.0f MHz %0.3f",
             f / 1.0e6, d, band ? "band" : "baseband", ys.size(), rms, fo / 1.0e6, frac);
  endtask

  initial begin
    real rms_in, rms_out, frac, frac2;
    for (int i = 0; i < LANES; i++) adc_data[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // A: Fig. 6(a) style: B_w = 160 MHz, C_f = 80 MHz, baseband, D = 5
    set_taps(5, 160.0e6, 0.0, 160.0e6);
    run_tone(40.0e6, 5, 0, 40.0e6, rms_in, frac);
    check(ys.size() > 900 * 8 / 5 - 10, "A: output rate 8/5 samples per clock");
    // 100 LSB in, x128 FIR scale: amplitude 12800, rms 9051 at unity gain
    check(rms_in > 0.8 * 9051.0 && rms_in < 1.2 * 9051.0, "A: in-band tone at unity gain");
    check(frac > 0.9, "A: output is the 40 MHz tone");
    run_tone(600.0e6, 5, 0, 40.0e6, rms_out, frac2);
    check(rms_out < 0.1 * rms_in, "A: 600 MHz tone attenuated by more than 20 dB");

    // B: Table 3 band setting: B_w = 80 MHz, C_f = 400 MHz, band mode, D = 10
    set_taps(10, 40.0e6, 400.0e6, 80.0e6);
    wr('h02, longint'($rtoi(360.0e6 / FS * 4294967296.0 + 0.5)));   // f_LO = 360 MHz
    run_tone(410.0e6, 10, 1, 50.0e6, rms_in, frac);
    check(ys.size() > 900 * 8 / 10 - 10, "B: output rate 8/10 samples per clock");
    // mixing halves the amplitude: 6400, rms 4525
    check(rms_in > 0.6 * 4525.0 && rms_in < 1.3 * 4525.0, "B: in-band tone moved down with the mixer's gain of 1/2");
    check(frac > 0.9, "B: 410 MHz tone appears at 50 MHz");
    run_tone(200.0e6, 10, 1, 50.0e6, rms_out, frac2);
    check(rms_out < 0.1 * rms_in, "B: 200 MHz tone attenuated by more than 20 dB");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
