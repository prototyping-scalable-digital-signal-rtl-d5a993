// tb_tdf_outmux: checks the output MUX. Results arriving on the two unit
// inputs must appear on successive output lanes (m mod 8 for the m-th result
// since the last restart), unit 0 before unit 1, one clock later, with only
// those lanes' valid bits high; lanes hold their data otherwise.
module tb_tdf_outmux;
  localparam int LANES = 8, UNITS = 2;
  logic clk = 0, rst_n = 0, en = 0, restart = 0;
  logic [UNITS-1:0] vin = '0;
  logic signed [17:0] din  [UNITS];
  logic signed [17:0] dout [LANES];
  logic [LANES-1:0] dvalid;
  int checks = 0, failures = 0;

  tdf_outmux dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int m = 0;                       // results placed since the last restart
  logic signed [17:0] lane_q [LANES];
  logic [LANES-1:0]   v_q;
  int n_two = 0, n_restart = 0;

  always @(posedge clk) if (rst_n) begin
    v_q = '0;
    if (en) begin
      if (restart) begin m = 0; n_restart++; end
      for (int u = 0; u < UNITS; u++) if (vin[u]) begin
        lane_q[m % LANES] = din[u];
        v_q[m % LANES] = 1'b1;
        m++;
      end
      if (vin == 2'b11) n_two++;
    end else if (restart) m = 0;
  end

  always @(negedge clk) if (rst_n) begin
    checks++;
    if (dvalid != v_q) begin
      failures++;
      if (failures < 10) $display("FAIL valid %b vs %b", dvalid, v_q);
    end
    for (int k = 0; k < LANES; k++) if (v_q[k]) begin
      checks++;
      if (dout[k] != lane_q[k]) begin
        failures++;
        if (failures < 10) $display("FAIL lane %0d: %0d vs %0d", k, dout[k], lane_q[k]);
      end
    end
  end

  initial begin
    for (int k = 0; k < LANES; k++) lane_q[k] = '0;
    v_q = '0;
    din[0] = '0; din[1] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < 500; c++) begin
      @(negedge clk);
      en      = ($urandom_range(0, 7) != 0);
      restart = ($urandom_range(0, 60) == 0);
      case ($urandom_range(0, 3))
        0: vin = 2'b00;
        1: vin = 2'b01;
        default: vin = 2'b11;
      endcase
      din[0] = 18'($urandom_range(0, 262143));
      din[1] = 18'($urandom_range(0, 262143));
    end
    @(negedge clk);
    en = 0; restart = 0;
    @(negedge clk);
    checks++;
    if (n_two == 0 || n_restart == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
