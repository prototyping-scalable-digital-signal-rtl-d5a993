// tdd_ref_pkg: reference arithmetic for the downconverter testbenches.
//
// Integer models of what each block should compute, written from the
// specification rather than from the RTL: saturation to 18 bits, the sine
// table formula, and the routing sequence for a decimation factor D (which
// output instants n = m*D fall into which block of eight samples).
package tdd_ref_pkg;

  function automatic longint sat18(input longint v);
    if (v > 131071)       return 131071;
    else if (v < -131072) return -131072;
    else                  return v;
  endfunction

  // Arithmetic shift right of a signed value (floor division by 2^s).
  function automatic longint asr(input longint v, input int s);
    return v >>> s;
  endfunction

  function automatic longint sine_ref(input int idx, input int aw, input int w);
    real a;
    a = (2.0 ** (w - 1)) - 1.0;
    return longint'($rtoi($floor(a * $sin(2.0 * 3.14159265358979323846 * idx / (1 << aw)) + 0.5)));
  endfunction

  // Routing sequence for D with 8 lanes: entry c lists the output instants in
  // samples 8c..8c+7, c = 0 .. P-1, P = lcm(D, 8) / 8. Returned as bytes
  // {v1, off1[2:0], v0, off0[2:0]}.
  function automatic void route_for(input int d, output logic [7:0] r [12], output int period);
    int l;
    l = d;
    while (l % 8 != 0) l += d;
    period = l / 8;
    for (int c = 0; c < 12; c++) r[c] = 8'h00;
    for (int c = 0; c < period; c++) begin
      int cnt;
      cnt = 0;
      for (int i = 0; i < 8; i++) begin
        if ((8 * c + i) % d == 0) begin
          if (cnt == 0) r[c][3:0] = {1'b1, 3'(i)};
          else          r[c][7:4] = {1'b1, 3'(i)};
          cnt++;
        end
      end
    end
  endfunction

endpackage
