// tb_nco: checks the 8-lane oscillator. After a sync the lanes must carry
// consecutive samples of cos and sin at phase s * phase_inc (s = sample index
// from the sync), addressed by the top 10 phase bits, 2 clocks after the
// accumulator; the accumulator must hold while the enable is low. Several
// frequencies are tried, each started with a sync.
module tb_nco;
  localparam int LANES = 8;
  logic clk = 0, rst_n = 0, en = 0, sync = 0;
  logic [31:0] phase_inc = 0;
  logic signed [17:0] cos_out [LANES];
  logic signed [17:0] sin_out [LANES];
  int checks = 0, failures = 0;

  nco dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Model: block index of the accumulator value, counted in enabled edges
  // since the sync edge. The accumulator holds block b between its edges; its
  // samples are visible after two further enabled edges.
  int blk [$];      // block index (or -1) produced after each enabled edge
  int cur;          // block index the accumulator holds now
  int stalls = 0;

  always @(posedge clk) if (rst_n) begin
    if (sync) cur <= 0;
    else if (en) begin
      blk.push_back(cur);
      cur <= cur + 1;
    end
  end


  task automatic check_lanes(input int b);
    for (int k = 0; k < LANES; k++) begin
      longint unsigned ph;
      int idx;
      ph  = (longint'(b) * LANES + k) * longint'(phase_inc);
      idx = int'(ph[31:22]);
      checks++;
      if (longint'(cos_out[k]) != tdd_ref_pkg::sine_ref((idx + 256) % 1024, 10, 18) ||
          longint'(sin_out[k]) != tdd_ref_pkg::sine_ref(idx, 10, 18)) begin
        failures++;
        if (failures < 10)
          $display("FAIL blk %0d lane %0d: cos %0d sin %0d idx %0d", b, k, cos_out[k], sin_out[k], idx);
      end
    end
  endtask

  initial begin
    int n;
    int incs [4] = '{32'h0100_0000, 32'h0CCC_CCCD, 32'h3456_789A, 32'h8000_0000};
    cur = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    foreach (incs[f]) begin
      @(negedge clk);
      phase_inc = incs[f];
      sync = 1; en = 1;
      @(negedge clk);
      sync = 0;
      blk.delete();
      n = 0;
      for (int c = 0; c < 200; c++) begin
        en = ($urandom_range(0, 7) != 0);
        if (!en) stalls++;
        @(negedge clk);
        // after each enabled edge, the output shows the block loaded into the address register one enabled edge earlier
        if (en && blk.size() >= 2) begin
          check_lanes(blk[blk.size() - 2]);
          n++;
        end
      end
      checks++;
      if (n < 100) begin
        failures++;
        $display("FAIL: only %0d blocks checked", n);
      end
    end
    checks++;
    if (stalls == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
