// tb_tap_unit16: checks one 16-tap unit, dout = sat18((sum h[j]*win[j]) >>> 17)
// and vout = vin, both 2 clocks later, with stalls and saturation.
module tb_tap_unit16;
  localparam int TAPS = 16;
  logic clk = 0, rst_n = 0, en = 0, vin = 0, vout;
  logic signed [17:0] win  [TAPS];
  logic signed [17:0] coef [TAPS];
  logic signed [17:0] dout;
  int checks = 0, failures = 0;

  tap_unit16 dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint expd [$];
  bit     expv [$];
  int ecount = 0, stalls = 0, sats = 0;

  always @(posedge clk) if (rst_n && en) begin
    longint s;
    s = 0;
    for (int j = 0; j < TAPS; j++) s += longint'(win[j]) * longint'(coef[j]);
    s = tdd_ref_pkg::sat18(s >>> 17);
    if (s == 131071 || s == -131072) sats++;
    expd.push_back(s);
    expv.push_back(vin);
    ecount++;
  end

  always @(negedge clk) if (rst_n && ecount >= 2) begin
    checks++;
    if (longint'(dout) != expd[ecount - 2] || vout != expv[ecount - 2]) begin
      failures++;
      if (failures < 10) $display("FAIL %0d: %0d/%0d vs %0d/%0d", ecount - 2, dout, vout, expd[ecount - 2], expv[ecount - 2]);
    end
  end

  initial begin
    for (int j = 0; j < TAPS; j++) begin win[j] = '0; coef[j] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int b = 0; b < 400; b++) begin
      @(negedge clk);
      en  = ($urandom_range(0, 9) != 0);
      if (!en) stalls++;
      vin = $urandom_range(0, 1) == 1;
      if (b % 100 == 0) for (int j = 0; j < TAPS; j++) coef[j] = 18'($urandom_range(0, 262143));
      for (int j = 0; j < TAPS; j++) win[j] = 18'($urandom_range(0, 262143));
      if (b % 60 == 30) for (int j = 0; j < TAPS; j++) win[j] = coef[j][17] ? -18'sd131072 : 18'sd131071;
    end
    @(negedge clk); en = 1;
    repeat (3) @(negedge clk);
    en = 0;
    checks++;
    if (stalls == 0 || sats == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
