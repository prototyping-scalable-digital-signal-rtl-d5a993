// tb_mixer: checks the 8-lane real mixer, dout = sat18((din * lo) >>> 17),
// with its 2-clock latency, stalls, and saturation at full-scale inputs.
module tb_mixer;
  localparam int LANES = 8;
  logic clk = 0, rst_n = 0, en = 0;
  logic signed [17:0] din [LANES];
  logic signed [17:0] lo  [LANES];
  logic signed [17:0] dout [LANES];
  int checks = 0, failures = 0;

  mixer dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint expq [$][LANES];
  int ecount = 0, stalls = 0, sats = 0;

  always @(posedge clk) if (rst_n && en) begin
    longint e [LANES];
    for (int k = 0; k < LANES; k++) begin
      e[k] = tdd_ref_pkg::sat18((longint'(din[k]) * longint'(lo[k])) >>> 17);
      if (e[k] == 131071) sats++;
    end
    expq.push_back(e);
    ecount++;
  end

  always @(negedge clk) if (rst_n && ecount >= 2) begin
    for (int k = 0; k < LANES; k++) begin
      checks++;
      if (longint'(dout[k]) != expq[ecount - 2][k]) begin
        failures++;
        if (failures < 10) $display("FAIL blk %0d lane %0d: %0d vs %0d", ecount - 2, k, dout[k], expq[ecount - 2][k]);
      end
    end
  end

  initial begin
    for (int k = 0; k < LANES; k++) begin din[k] = '0; lo[k] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int b = 0; b < 300; b++) begin
      @(negedge clk);
      en = ($urandom_range(0, 9) != 0);
      if (!en) stalls++;
      for (int k = 0; k < LANES; k++) begin
        din[k] = 18'($urandom_range(0, 262143));
        lo[k]  = 18'($urandom_range(0, 262143));
        if (b % 50 == 7) begin din[k] = -18'sd131072; lo[k] = -18'sd131072; end
      end
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
