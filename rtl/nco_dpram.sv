// nco_dpram: dual-port sine memory of the numerically controlled oscillator.
//
// Holds one period of a sinusoid, 2^AW entries of W-bit signed samples,
//   mem[i] = round((2^(W-1)-1) * sin(2*pi*i / 2^AW)),
// computed when the design is elaborated, so the memory is pre-loaded as a
// block RAM initial image. Both ports read at the same time: the oscillator
// drives port A with a phase and port B with the same phase plus a quarter
// period, so q_a is the sine and q_b the cosine of that phase.
//
// Interface: addr_a, addr_b (AW bits), q_a, q_b (W-bit signed).
// Timing: synchronous read, data one enabled clock after the address.
//
// Follows the paper: an NCO built from dual-port RAM blocks loaded with
// pre-computed sinusoid values, each reading sine and cosine from its two
// ports. Table depth and sample width are this design's choices.
module nco_dpram #(
  parameter int AW = tdd_pkg::LUT_AW,
  parameter int W  = tdd_pkg::LO_W
) (
  input  logic                clk,
  input  logic                en,
  input  logic [AW-1:0]       addr_a,
  input  logic [AW-1:0]       addr_b,
  output logic signed [W-1:0] q_a,
  output logic signed [W-1:0] q_b
);
  localparam int N = 1 << AW;
  typedef logic signed [W-1:0] table_t [N];

  function automatic table_t sine_table();
    table_t t;
    for (int i = 0; i < N; i++)
      t[i] = W'($rtoi($floor(((2.0 ** (W - 1)) - 1.0)
                 * $sin(2.0 * 3.14159265358979323846 * i / N) + 0.5)));
    return t;
  endfunction

  localparam table_t MEM = sine_table();

  always_ff @(posedge clk) begin
    if (en) begin
      q_a <= MEM[addr_a];
      q_b <= MEM[addr_b];
    end
  end
endmodule
