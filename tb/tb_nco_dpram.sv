// tb_nco_dpram: checks the dual-port sine memory against
// round((2^17-1) * sin(2*pi*i/1024)) on both ports, with the one-clock read
// latency and the hold behaviour when the enable is low.
module tb_nco_dpram;
  logic clk = 0, en = 0;
  logic [9:0] addr_a = 0, addr_b = 0;
  logic signed [17:0] q_a, q_b;
  int checks = 0, failures = 0;

  nco_dpram dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    logic [9:0] pa, pb;
    @(negedge clk);
    // every entry through port A, and the quarter-shifted entry through port B
    for (int i = 0; i < 1024; i++) begin
      en = 1; addr_a = 10'(i); addr_b = 10'(i + 256);
      @(negedge clk);
      check(longint'(q_a) == tdd_ref_pkg::sine_ref(i, 10, 18), $sformatf("sin[%0d]=%0d", i, q_a));
      check(longint'(q_b) == tdd_ref_pkg::sine_ref(i + 256, 10, 18), $sformatf("port b [%0d]", i));
    end
    // spot values
    addr_a = 0; addr_b = 256; @(negedge clk);
    check(q_a == 0 && q_b == 18'sd131071, "sin(0)=0, sin(pi/2)=max");
    addr_a = 512; addr_b = 768; @(negedge clk);
    check(q_a == 0 && q_b == -18'sd131071, "sin(pi)=0, sin(3pi/2)=-max");
    // hold with en low
    pa = 10'd100; pb = 10'd900;
    addr_a = pa; addr_b = pb; @(negedge clk);
    en = 0; addr_a = 10'd3; addr_b = 10'd4; @(negedge clk);
    check(longint'(q_a) == tdd_ref_pkg::sine_ref(100, 10, 18) &&
          longint'(q_b) == tdd_ref_pkg::sine_ref(900, 10, 18), "hold when en low");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
