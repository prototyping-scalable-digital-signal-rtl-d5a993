// tb_select_mux: checks the select block: with sel_mix low the direct input,
// with it high the mixer input, one clock later; holds when the enable is low.
module tb_select_mux;
  localparam int LANES = 8;
  logic clk = 0, rst_n = 0, en = 0, sel_mix = 0;
  logic signed [17:0] din_direct [LANES];
  logic signed [17:0] din_mix    [LANES];
  logic signed [17:0] dout       [LANES];
  int checks = 0, failures = 0;

  select_mux dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic signed [17:0] exp_q [LANES];
  int ecount = 0, n_direct = 0, n_mix = 0;

  always @(posedge clk) if (rst_n && en) begin
    for (int k = 0; k < LANES; k++) exp_q[k] <= sel_mix ? din_mix[k] : din_direct[k];
    if (sel_mix) n_mix++; else n_direct++;
    ecount++;
  end

  always @(negedge clk) if (rst_n && ecount >= 1)
    for (int k = 0; k < LANES; k++) begin
      checks++;
      if (dout[k] != exp_q[k]) begin
        failures++;
        if (failures < 10) $display("FAIL lane %0d: %0d vs %0d", k, dout[k], exp_q[k]);
      end
    end

  initial begin
    for (int k = 0; k < LANES; k++) begin din_direct[k] = '0; din_mix[k] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int b = 0; b < 200; b++) begin
      @(negedge clk);
      en = ($urandom_range(0, 5) != 0);
      sel_mix = $urandom_range(0, 1) == 1;
      for (int k = 0; k < LANES; k++) begin
        din_direct[k] = 18'($urandom_range(0, 262143));
        din_mix[k]    = 18'($urandom_range(0, 262143));
      end
    end
    @(negedge clk);
    en = 0;
    @(negedge clk);
    checks++;
    if (n_direct == 0 || n_mix == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
