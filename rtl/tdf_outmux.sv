// tdf_outmux: output multiplexer of the decimation filter.
//
// Decimated samples leave on the eight output lanes in turn: output sample m
// (counted from the last restart) appears on lane m mod LANES, in the clock
// after its 16-tap unit finishes it, with that lane's valid bit high for one
// clock. Unit 0 carries the earlier of two samples finished in the same clock,
// unit 1 the later. A lane pointer advances by the number of samples placed.
// The valid bits are the downconverter's output enable: a downstream block
// takes a lane's sample when its valid bit is high. A lane's data register
// holds its last sample in between.
//
// Interface: restart (pointer to lane 0), vin[UNITS], din[UNITS],
// dout[LANES], dvalid[LANES].
// Timing: registered, 1 enabled clock; dvalid is low on clocks with en low.
//
// Follows the paper: a MUX after the two 16-tap units, with each decimated
// sample on the next output in turn, as in the cyclo-static decimator model.
// The lane pointer and per-lane valid bits are this design's own.
module tdf_outmux #(
  parameter int LANES = tdd_pkg::LANES,
  parameter int UNITS = tdd_pkg::TDF_UNITS,
  parameter int W     = tdd_pkg::DATA_W
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                en,
  input  logic                restart,
  input  logic [UNITS-1:0]    vin,
  input  logic signed [W-1:0] din    [UNITS],
  output logic signed [W-1:0] dout   [LANES],
  output logic [LANES-1:0]    dvalid
);
  localparam int PW = $clog2(LANES);
  logic [PW-1:0] ptr;
  logic [PW-1:0] lane [UNITS];   // lane of each unit's result this clock
  logic [PW-1:0] next_ptr;

  always_comb begin
    logic [PW-1:0] p;
    p = restart ? '0 : ptr;
    for (int u = 0; u < UNITS; u++) begin
      lane[u] = p;
      if (vin[u]) p = p + 1'b1;
    end
    next_ptr = p;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ptr    <= '0;
      dvalid <= '0;
      for (int k = 0; k < LANES; k++) dout[k] <= '0;
    end else if (en) begin
      dvalid <= '0;
      for (int u = 0; u < UNITS; u++) begin
        if (vin[u]) begin
          dout[lane[u]]   <= din[u];
          dvalid[lane[u]] <= 1'b1;
        end
      end
      ptr <= next_ptr;
    end else begin
      dvalid <= '0;
      if (restart) ptr <= '0;
    end
  end
endmodule
