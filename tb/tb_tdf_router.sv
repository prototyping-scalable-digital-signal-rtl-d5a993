// tb_tdf_router: checks the signal router for every decimation factor 5..12.
// The routing sequence is computed by the testbench; the expected output
// instants are found directly as the samples n (counted from the restart)
// with n mod D = 0. For each instant the window must be x[n], x[n-1], ...,
// x[n-15], one clock after the block holding x[n]; the first instant goes to
// unit 0 and a second one in the same block to unit 1. Stalls and a restart
// issued with the enable low are included.
module tb_tdf_router;
  localparam int LANES = 8, TAPS = 16, UNITS = 2;
  logic clk = 0, rst_n = 0, en = 0, restart = 0;
  logic [3:0] decim = 4'd8;
  tdd_pkg::route_entry_t route [12];
  logic signed [17:0] din [LANES];
  logic signed [17:0] win [UNITS][TAPS];
  logic [UNITS-1:0] wvalid;
  int checks = 0, failures = 0;

  tdf_router dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint xs [$];          // all accepted samples
  int     base;            // index in xs of sample 0 after the last restart
  bit     pend_restart;    // restart seen, block 0 is the next accepted block
  int     d_cur;
  bit     expv [UNITS];
  longint expw [UNITS][TAPS];
  bit     have_exp = 0;
  int     n_two = 0, n_out = 0, stalls = 0;

  always @(posedge clk) if (rst_n) begin
    if (en) begin
      int first;
      if (pend_restart && !restart) begin
        base = xs.size();
        pend_restart = 0;
      end
      first = xs.size();
      for (int i = 0; i < LANES; i++) xs.push_back(longint'(din[i]));
      for (int u = 0; u < UNITS; u++) expv[u] = 0;
      if (!restart && !pend_restart) begin
        int u;
        u = 0;
        for (int i = 0; i < LANES; i++) begin
          int n;
          n = first + i - base;
          if (n % d_cur == 0) begin
            expv[u] = 1;
            for (int j = 0; j < TAPS; j++) expw[u][j] = xs[first + i - j];
            u++;
          end
        end
        if (u == 2) n_two++;
        n_out += u;
      end
      have_exp = 1;
    end
    if (restart) pend_restart = 1;
  end

  always @(negedge clk) if (rst_n && have_exp) begin
    for (int u = 0; u < UNITS; u++) begin
      checks++;
      if (wvalid[u] != expv[u]) begin
        failures++;
        if (failures < 10) $display("FAIL D=%0d unit %0d valid %0d exp %0d", d_cur, u, wvalid[u], expv[u]);
      end else if (expv[u]) begin
        for (int j = 0; j < TAPS; j++) begin
          checks++;
          if (longint'(win[u][j]) != expw[u][j]) begin
            failures++;
            if (failures < 10) $display("FAIL D=%0d unit %0d tap %0d: %0d vs %0d", d_cur, u, j, win[u][j], expw[u][j]);
          end
        end
      end
    end
  end

  task automatic load_route(input int d);
    logic [7:0] r [12];
    int p;
    tdd_ref_pkg::route_for(d, r, p);
    decim = 4'(d);
    for (int e = 0; e < 12; e++) route[e] = tdd_pkg::route_entry_t'(r[e]);
  endtask

  task automatic feed(input int nblk, input bit stall);
    for (int b = 0; b < nblk; b++) begin
      @(negedge clk);
      en = stall ? ($urandom_range(0, 6) != 0) : 1'b1;
      if (!en) stalls++;
      for (int i = 0; i < LANES; i++) din[i] = 18'($urandom_range(0, 262143));
    end
  endtask

  initial begin
    for (int i = 0; i < LANES; i++) din[i] = '0;
    d_cur = 8;
    base = 0;
    pend_restart = 0;
    load_route(8);
    repeat (3) @(posedge clk);
    rst_n = 1;
    feed(4, 0);
    for (int d = 5; d <= 12; d++) begin
      @(negedge clk);
      // change D and sequence together with a restart
      load_route(d);
      d_cur = d;
      en = (d != 9);              // D = 9: restart while the stream is stalled
      restart = 1;
      @(negedge clk);
      restart = 0;
      feed(60, 1);
    end
    @(negedge clk);
    en = 0;
    checks++;
    if (n_two == 0 || stalls == 0 || n_out < 100) begin
      failures++;
      $display("FAIL: two-output blocks %0d stalls %0d outputs %0d", n_two, stalls, n_out);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
