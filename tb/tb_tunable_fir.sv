// tb_tunable_fir: checks the 8-lane tunable FIR against a sample-by-sample
// model y[n] = sat18((sum_j h[j] x[n-j]) >>> 10), including the 2-clock
// latency, stalls with the enable low, a tap change in mid-stream, and
// saturation.
module tb_tunable_fir;
  localparam int LANES = 8, TAPS = 8, NBLK = 400;
  logic clk = 0, rst_n = 0, en = 0;
  logic signed [7:0]  din  [LANES];
  logic signed [17:0] coef [TAPS];
  logic signed [17:0] dout [LANES];
  int checks = 0, failures = 0;

  tunable_fir dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint xs [$];               // every accepted sample, in order
  longint expq [$][LANES];      // expected output per accepted block
  int     ecount = 0;           // enabled clock edges so far
  int     stalls = 0, sats = 0;

  function automatic longint fir_ref(input int n);
    longint s = 0;
    for (int j = 0; j < TAPS; j++)
      if (n - j >= 0) s += longint'(coef[j]) * xs[n - j];
    return tdd_ref_pkg::sat18(s >>> 10);
  endfunction

  always @(posedge clk) if (rst_n && en) begin
    longint e [LANES];
    for (int i = 0; i < LANES; i++) xs.push_back(longint'(din[i]));
    for (int i = 0; i < LANES; i++) begin
      e[i] = fir_ref(xs.size() - LANES + i);
      if (e[i] == 131071 || e[i] == -131072) sats++;
    end
    expq.push_back(e);
    ecount++;
  end

  // Output of block b is visible after enabled edge b+2 (counting from 1).
  always @(negedge clk) if (rst_n && ecount >= 2) begin
    for (int i = 0; i < LANES; i++) begin
      checks++;
      if (longint'(dout[i]) != expq[ecount - 2][i]) begin
        failures++;
        if (failures < 10)
          $display("FAIL blk %0d lane %0d: got %0d exp %0d", ecount - 2, i, dout[i], expq[ecount - 2][i]);
      end
    end
  end

  initial begin
    for (int j = 0; j < TAPS; j++) coef[j] = 18'($urandom_range(0, 262143));
    for (int i = 0; i < LANES; i++) din[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int b = 0; b < NBLK; b++) begin
      @(negedge clk);
      en = ($urandom_range(0, 9) != 0);
      if (!en) stalls++;
      if (b == NBLK / 2)
        for (int j = 0; j < TAPS; j++) coef[j] = 18'($urandom_range(0, 262143));
      if (b >= NBLK - 40) begin
        for (int j = 0; j < TAPS; j++) coef[j] = -18'sd131072;
        for (int i = 0; i < LANES; i++) din[i] = -8'sd128;
      end else begin
        for (int i = 0; i < LANES; i++) din[i] = 8'($urandom_range(0, 255));
      end
    end
    @(negedge clk);
    en = 1;
    repeat (4) @(negedge clk);
    en = 0;
    checks++;
    if (stalls == 0 || sats == 0) begin
      failures++;
      $display("FAIL: stalls=%0d saturations=%0d", stalls, sats);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
