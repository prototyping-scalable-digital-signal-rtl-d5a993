// tb_sw_regs: checks the run-time register block.
// Reset values, write and read-back of every register class, the decoded
// outputs, and that the restart strobe is exactly one clock wide.
module tb_sw_regs;
  logic clk = 0, rst_n = 0;
  logic wr_en = 0;
  logic [7:0] wr_addr = 0, rd_addr = 0;
  logic [31:0] wr_data = 0, rd_data;
  tdd_pkg::cfg_t cfg;
  tdd_pkg::route_entry_t route [12];
  tdd_pkg::coef_t fir_coef [8];
  tdd_pkg::coef_t tdf_coef [16];
  logic restart;
  int checks = 0, failures = 0;
  int cyc = 0;

  sw_regs dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic wr(input int a, input int d);
    @(negedge clk);
    wr_en = 1; wr_addr = 8'(a); wr_data = 32'(d);
    @(negedge clk);
    wr_en = 0;
  endtask

  int restart_cycles;
  always @(posedge clk) if (restart) restart_cycles++;

  initial begin
    int fir_v [8];
    int tdf_v [16];
    restart_cycles = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    // reset values
    check(cfg.mix_en == 0, "reset mix_en");
    check(cfg.decim == 8, "reset decim");
    check(cfg.phase_inc == 0, "reset phase_inc");
    check(route[0] == 8'h08, "reset route[0]");
    check(fir_coef[0] == 18'h1FFFF, "reset fir h0");
    check(tdf_coef[5] == 0, "reset tdf h5");
    check(restart == 0, "no restart after reset");
    // scalar registers
    wr('h01, 11);
    check(cfg.decim == 11, "decim write");
    rd_addr = 8'h01; #1 check(rd_data == 11, "decim read");
    wr('h02, 32'h1234_5678);
    check(cfg.phase_inc == 32'h1234_5678, "phase_inc write");
    rd_addr = 8'h02; #1 check(rd_data == 32'h1234_5678, "phase_inc read");
    // routing table
    for (int e = 0; e < 12; e++) wr('h10 + e, (e * 37 + 5) & 8'hFF);
    for (int e = 0; e < 12; e++) begin
      check(route[e] == 8'((e * 37 + 5) & 8'hFF), $sformatf("route[%0d]", e));
      rd_addr = 8'(16 + e); #1 check(rd_data == 32'((e * 37 + 5) & 8'hFF), "route read");
    end
    // coefficients, signed
    for (int j = 0; j < 8; j++) begin
      fir_v[j] = int'($urandom_range(0, 262143)) - 131072;
      wr('h20 + j, fir_v[j]);
    end
    for (int j = 0; j < 16; j++) begin
      tdf_v[j] = int'($urandom_range(0, 262143)) - 131072;
      wr('h30 + j, tdf_v[j]);
    end
    for (int j = 0; j < 8; j++) begin
      check(int'(fir_coef[j]) == fir_v[j], $sformatf("fir_coef[%0d]", j));
      rd_addr = 8'(32 + j); #1 check(int'(rd_data) == fir_v[j], "fir read sign-extended");
    end
    for (int j = 0; j < 16; j++) begin
      check(int'(tdf_coef[j]) == tdf_v[j], $sformatf("tdf_coef[%0d]", j));
      rd_addr = 8'(48 + j); #1 check(int'(rd_data) == tdf_v[j], "tdf read");
    end
    // control: mode bit and restart strobe
    check(restart_cycles == 0, "no restart before CTRL write");
    wr('h00, 3);
    check(cfg.mix_en == 1, "mix_en set");
    rd_addr = 8'h00; #1 check(rd_data == 1, "ctrl reads mode only");
    repeat (3) @(negedge clk);
    check(restart_cycles == 1, "restart is one clock");
    wr('h00, 0);
    check(cfg.mix_en == 0, "mix_en clear");
    repeat (2) @(negedge clk);
    check(restart_cycles == 1, "no restart without bit1");
    // unmapped address does not disturb anything
    wr('h7F, 32'hFFFF_FFFF);
    check(cfg.decim == 11 && cfg.phase_inc == 32'h1234_5678, "unmapped write ignored");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
