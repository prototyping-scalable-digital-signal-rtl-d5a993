// tb_tdf: checks the tunable decimation filter for every D from 5 to 12.
// For each D the testbench loads random taps, the routing sequence it
// computes itself and a restart, then streams random samples (with stalls).
// The model: y[m] = sat18((sum_j h[j] * x[m*D - j]) >>> 17), x counted from
// the restart, on lane m mod 8, exactly 4 enabled clocks after the block
// holding x[m*D]; every other lane's valid bit low. Some restarts arrive
// while the stream is stalled. It also counts the
// outputs per D against the number of instants (rate 8/D per clock).
module tb_tdf;
  localparam int LANES = 8, TAPS = 16;
  logic clk = 0, rst_n = 0, en = 0, restart = 0;
  logic [3:0] decim = 4'd8;
  tdd_pkg::route_entry_t route [12];
  logic signed [17:0] coef [TAPS];
  logic signed [17:0] din  [LANES];
  logic signed [17:0] dout [LANES];
  logic [LANES-1:0] dvalid;
  int checks = 0, failures = 0;

  tdf dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef struct {
    longint w [TAPS];
    longint y;
    int     lane;
    int     due;       // enabled-edge count after which it is visible
  } exp_t;

  longint xs [$];
  exp_t   pend [$];
  int     base, d_cur, ecount = 0, m = 0, mux_restart_at = -1;
  bit     pend_restart = 0;
  int     n_found [16], n_seen [16], stalls = 0, n_two = 0;

  always @(posedge clk) if (rst_n) begin
    if (en) begin
      int first, u;
      ecount++;
      if (ecount == mux_restart_at) m = 0;
      if (pend_restart && !restart) begin
        base = xs.size();
        pend_restart = 0;
        mux_restart_at = ecount + 3;
      end
      if (restart) mux_restart_at = ecount + 4;
      // products are formed one enabled edge after the window: use the taps now
      foreach (pend[i]) if (pend[i].due - 2 == ecount) begin
        longint s;
        s = 0;
        for (int j = 0; j < TAPS; j++) s += pend[i].w[j] * longint'(coef[j]);
        pend[i].y = tdd_ref_pkg::sat18(s >>> 17);
      end
      first = xs.size();
      for (int i = 0; i < LANES; i++) xs.push_back(longint'(din[i]));
      u = 0;
      if (!restart && !pend_restart)
        for (int i = 0; i < LANES; i++)
          if ((first + i - base) % d_cur == 0) begin
            exp_t e;
            for (int j = 0; j < TAPS; j++) e.w[j] = xs[first + i - j];
            e.y = 0;
            e.due = ecount + 3;
            e.lane = -1;
            pend.push_back(e);
            n_found[d_cur]++;
            u++;
          end
      if (u == 2) n_two++;
    end
    if (restart) pend_restart = 1;
  end

  // At the clock a result is visible, assign its lane in order and compare.
  always @(negedge clk) if (rst_n) begin
    logic [LANES-1:0] vexp;
    vexp = '0;
    while (pend.size() > 0 && pend[0].due == ecount && en_seen) begin
      int lane;
      lane = m % LANES;
      m++;
      vexp[lane] = 1'b1;
      checks++;
      if (longint'(dout[lane]) != pend[0].y) begin
        failures++;
        if (failures < 10) $display("FAIL D=%0d lane %0d: %0d vs %0d", d_cur, lane, dout[lane], pend[0].y);
      end
      n_seen[d_cur]++;
      void'(pend.pop_front());
    end
    checks++;
    if (dvalid != vexp) begin
      failures++;
      if (failures < 10) $display("FAIL D=%0d valid %b vs %b (ecount %0d)", d_cur, dvalid, vexp, ecount);
    end
    en_seen = 0;
  end

  bit en_seen = 0;
  always @(posedge clk) en_seen <= rst_n && en;

  task automatic load(input int d);
    logic [7:0] r [12];
    int p;
    tdd_ref_pkg::route_for(d, r, p);
    decim = 4'(d);
    for (int e = 0; e < 12; e++) route[e] = tdd_pkg::route_entry_t'(r[e]);
    for (int j = 0; j < TAPS; j++) coef[j] = 18'($urandom_range(0, 262143));
  endtask

  task automatic feed(input int nblk);
    for (int b = 0; b < nblk; b++) begin
      @(negedge clk);
      en = ($urandom_range(0, 6) != 0);
      if (!en) stalls++;
      for (int i = 0; i < LANES; i++) din[i] = 18'($urandom_range(0, 262143));
    end
  endtask

  initial begin
    for (int i = 0; i < LANES; i++) din[i] = '0;
    foreach (n_found[i]) begin n_found[i] = 0; n_seen[i] = 0; end
    d_cur = 8; base = 0;
    load(8);
    repeat (3) @(posedge clk);
    rst_n = 1;
    feed(4);
    for (int d = 5; d <= 12; d++) begin
      @(negedge clk);
      en = 1;
      @(negedge clk);
      load(d);
      d_cur = d;
      restart = 1;
      en = (d % 3 != 0);          // D = 6, 9, 12: restart while the stream is stalled
      @(negedge clk);
      restart = 0;
      feed(80);
      // drain, then compare counts for this D
      @(negedge clk);
      en = 1;
      for (int i = 0; i < 5; i++) begin
        @(negedge clk);
        for (int k = 0; k < LANES; k++) din[k] = 18'($urandom_range(0, 262143));
      end
    end
    @(negedge clk);
    en = 0;
    for (int d = 5; d <= 12; d++) begin
      checks++;
      if (n_found[d] < 40) begin
        failures++;
        $display("FAIL D=%0d: %0d outputs expected, %0d seen", d, n_found[d], n_seen[d]);
      end
    end
    begin
      int tf, ts;
      tf = 0; ts = 0;
      for (int d = 5; d <= 12; d++) begin tf += n_found[d]; ts += n_seen[d]; end
      checks++;
      if (tf != ts + pend.size() || pend.size() > 4) begin
        failures++;
        $display("FAIL: %0d outputs expected, %0d seen", tf, ts);
      end
    end
    checks++;
    if (n_two == 0 || stalls == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
