// tb_tdd_top: end-to-end test of the downconverter at its default sizes.
//
// The testbench configures the design through its register port only, the
// way host software would: it computes the routing sequence for each D,
// loads random FIR and decimation taps and an NCO step, selects baseband
// (mixer bypassed) or band mode and issues a restart. It then streams random
// 8-bit ADC blocks with random stalls (en low) and checks every output sample
// against a chained model:
//   FIR  f[n] = sat18((sum_j g[j] a[n-j]) >>> 10)
//   mix  b[n] = sat18((f[n] * cos_table[phase(n)]) >>> 17)   (band mode)
//   TDF  y[m] = sat18((sum_j h[j] s[m*D-j]) >>> 17), s = f or b,
// with y[m] on lane m mod 8 and the pipeline latencies documented in the
// RTL (FIR 2, mixer 2, select 1, TDF 4 clocks). Samples whose oscillator
// phase is undefined right after a restart are not checked. All eight
// decimation factors are visited, alternating modes, and the test counts
// that each mechanism happened: stall, bypass (baseband) outputs, mixer
// outputs, mode switches, retuning of D, restarts, clocks where both 16-tap
// units deliver, and output saturation.
module tb_tdd_top;
  localparam int LANES = 8, FT = 8, TT = 16;
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
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- configuration shadow ----------------
  longint g [FT];          // FIR taps
  longint h [TT];          // TDF taps
  int     d_cur = 8;
  bit     mode = 0;        // 1 = band mode
  longint unsigned inc = 0;
  int     k_s = 0;         // enabled-edge count at the last restart

  // ---------------- stream model ----------------
  typedef struct { longint v; bit dc; } smp_t;
  longint adc [$];                 // all accepted ADC samples
  smp_t   fir [int][LANES];        // FIR output per enabled edge E
  bit     mode_at [int];           // mode seen by the select at edge k
  int     kseg_at [int];           // restart count in force at edge k
  longint unsigned inc_at [int];
  smp_t   tin [$];                 // TDF input samples, index (k-1)*8 + lane
  int     ecount = 0;

  typedef struct { int idx; longint y; bit dc; int due; } exp_t;
  exp_t   pend [$];
  int     base = 0, m = 0, mux_restart_at = -1;
  bit     pend_restart = 0;

  // mechanism counters
  int n_stall = 0, n_bypass = 0, n_mix = 0, n_modesw = 0, n_retune = 0;
  int n_restart = 0, n_two = 0, n_sat = 0, n_checked = 0, n_skipped = 0;

  function automatic smp_t mix_of(input int e, input int lane);
    smp_t r;
    int j, idx;
    longint unsigned ph;
    j = e - kseg_at[e] - 1;
    r.dc = (e < 1) || (j < 0) || fir[e][lane].dc;
    if (r.dc) begin r.v = 0; return r; end
    ph  = (longint'(j) * LANES + lane) * inc_at[e];
    idx = int'(ph[31:22]);
    r.v = tdd_ref_pkg::sat18((fir[e][lane].v * tdd_ref_pkg::sine_ref((idx + 256) % 1024, 10, 18)) >>> 17);
    return r;
  endfunction

  always @(posedge clk) if (rst_n && en) begin
    int first, u;
    ecount++;
    mode_at[ecount] = mode;
    kseg_at[ecount] = k_s;
    inc_at[ecount]  = inc;
    // FIR of this block (taps in force now)
    for (int i = 0; i < LANES; i++) adc.push_back(longint'(adc_data[i]));
    for (int i = 0; i < LANES; i++) begin
      longint s;
      int n;
      n = adc.size() - LANES + i;
      s = 0;
      for (int j = 0; j < FT; j++) if (n - j >= 0) s += g[j] * adc[n - j];
      fir[ecount][i].v  = tdd_ref_pkg::sat18(s >>> 10);
      fir[ecount][i].dc = 0;
    end
    // TDF input accepted at this edge
    for (int i = 0; i < LANES; i++) begin
      smp_t s;
      if (ecount - 1 < 1) begin s.v = 0; s.dc = 0; end
      else if (!mode_at[ecount - 1]) begin
        if (ecount - 3 < 1) begin s.v = 0; s.dc = 0; end
        else s = fir[ecount - 3][i];
      end else begin
        s = mix_of(ecount - 5, i);
      end
      tin.push_back(s);
    end
    // TDF
    if (ecount == mux_restart_at) m = 0;
    if (pend_restart) begin
      base = tin.size() - LANES;
      pend_restart = 0;
      mux_restart_at = ecount + 3;
    end
    foreach (pend[i]) if (pend[i].due - 2 == ecount) begin
      longint s;
      s = 0;
      for (int j = 0; j < TT; j++) begin
        s += tin[pend[i].idx - j].v * h[j];
        if (tin[pend[i].idx - j].dc) pend[i].dc = 1;
      end
      pend[i].y = tdd_ref_pkg::sat18(s >>> 17);
    end
    first = tin.size() - LANES;
    u = 0;
    for (int i = 0; i < LANES; i++)
      if ((first + i - base) % d_cur == 0) begin
        exp_t e;
        e.idx = first + i;
        e.y = 0;
        e.dc = (first + i - (TT - 1) < 0);
        e.due = ecount + 3;
        pend.push_back(e);
        u++;
      end
    if (u == 2) n_two++;
  end

  bit en_seen = 0;
  always @(posedge clk) en_seen <= rst_n && en;

  always @(negedge clk) if (rst_n) begin
    logic [LANES-1:0] vexp;
    vexp = '0;
    while (en_seen && pend.size() > 0 && pend[0].due == ecount) begin
      int lane;
      lane = m % LANES;
      m++;
      vexp[lane] = 1'b1;
      if (pend[0].dc) n_skipped++;
      else begin
        checks++;
        n_checked++;
        if (mode_at[pend[0].due - 7]) n_mix++; else n_bypass++;
        if (pend[0].y == 131071 || pend[0].y == -131072) n_sat++;
        if (longint'(tdd_out[lane]) != pend[0].y) begin
          failures++;
          if (failures < 10) $display("FAIL D=%0d mode %0d lane %0d: %0d vs %0d", d_cur, mode, lane, tdd_out[lane], pend[0].y);
        end
      end
      void'(pend.pop_front());
    end
    checks++;
    if (tdd_valid != vexp) begin
      failures++;
      if (failures < 10) $display("FAIL valid %b vs %b at edge %0d", tdd_valid, vexp, ecount);
    end
  end

  // ---------------- register access ----------------
  task automatic wr(input int a, input longint d);
    @(negedge clk);
    wr_en = 1; wr_addr = 8'(a); wr_data = 32'(d);
    @(negedge clk);
    wr_en = 0;
  endtask

  task automatic configure(input int d, input bit band, input int tap_scale);
    logic [7:0] r [12];
    int p;
    en = 0;
    if (d != d_cur) n_retune++;
    if (band != mode) n_modesw++;
    tdd_ref_pkg::route_for(d, r, p);
    wr('h01, d);
    for (int e = 0; e < 12; e++) wr('h10 + e, r[e]);
    for (int j = 0; j < FT; j++) begin
      g[j] = longint'($urandom_range(0, 65535)) - 32768;
      if (tap_scale == 0 && g[j] < 0) g[j] = -g[j];
      wr('h20 + j, g[j]);
    end
    g[0] = 131071 >> tap_scale;
    wr('h20, g[0]);
    for (int j = 0; j < TT; j++) begin
      h[j] = (longint'($urandom_range(0, 262143)) - 131072) >>> tap_scale;
      if (tap_scale == 0 && h[j] < 0) h[j] = -h[j];   // loud segment: all taps positive
      wr('h30 + j, h[j]);
    end
    inc = longint'({$urandom(), 1'b1}) & 64'hFFFF_FFFF;
    wr('h02, inc);
    rd_addr = 8'h01;
    #1;
    checks++;
    if (rd_data != 32'(d)) failures++;
    // mode and restart in one write; the pulse comes on the next clock,
    // while the stream is stalled
    @(negedge clk);
    wr_en = 1; wr_addr = 8'h00; wr_data = {30'b0, 1'b1, band};
    @(posedge clk);
    #1;
    d_cur = d;
    mode = band;
    k_s = ecount;
    pend_restart = 1;
    n_restart++;
    @(negedge clk);
    wr_en = 0;
  endtask

  task automatic stream(input int nblk, input bit loud);
    for (int b = 0; b < nblk; b++) begin
      @(negedge clk);
      en = ($urandom_range(0, 7) != 0);
      if (!en) n_stall++;
      for (int i = 0; i < LANES; i++)
        adc_data[i] = (loud && b % 40 < 20) ? 8'sd127 : 8'($urandom_range(0, 255));
    end
  endtask

  initial begin
    int dl [8]  = '{5, 12, 7, 10, 6, 8, 9, 11};
    bit bl [8]  = '{0, 1, 1, 0, 1, 0, 1, 0};
    for (int i = 0; i < LANES; i++) adc_data[i] = '0;
    for (int j = 0; j < FT; j++) g[j] = 0;
    g[0] = 131071;
    for (int j = 0; j < TT; j++) h[j] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    foreach (dl[s]) begin
      configure(dl[s], bl[s], (s == 3) ? 0 : 2);
      stream(150, s == 3);
    end
    @(negedge clk);
    en = 1;
    repeat (10) @(negedge clk);
    en = 0;
    @(negedge clk);
    $display("checked %0d outputs (%0d skipped), bypass %0d, mixer %0d, stalls %0d, mode switches %0d, retunes %0d, restarts %0d, two-unit clocks %0d, saturated %0d",
             n_checked, n_skipped, n_bypass, n_mix, n_stall, n_modesw, n_retune, n_restart, n_two, n_sat);
    checks++;
    if (n_bypass == 0 || n_mix == 0 || n_stall == 0 || n_modesw == 0 || n_retune == 0 ||
        n_restart == 0 || n_two == 0 || n_sat == 0 || n_skipped > 40 * n_restart) begin
      failures++;
      $display("FAIL: a mechanism never happened");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
