// fx_mult -- pipelined signed multiplier.
//
// Plays the part of the multiplier core of each multiply-add lane. The
// published design generates this core from a vendor IP with speed
// optimisation (four DSP slices per multiplier, which is what a 32x32
// product needs); here it is a plain registered multiply with the same
// function: operands are registered, then the full-width product passes
// through LAT-1 more register stages, so p is a*b of LAT cycles earlier.
// The pipeline depth is this design's choice.
//
// Interface: en advances every stage (clock enable); a, b signed DATA_W;
// p signed 2*DATA_W. Timing: p(t) = a(t-LAT) * b(t-LAT) while en is high.
module fx_mult #(
  parameter int unsigned DATA_W = 32,
  parameter int unsigned LAT    = 2     // >= 1
) (
  input  logic                       clk,
  input  logic                       en,
  input  logic signed [DATA_W-1:0]   a,
  input  logic signed [DATA_W-1:0]   b,
  output logic signed [2*DATA_W-1:0] p
);
  logic signed [DATA_W-1:0]   a_r, b_r;
  logic signed [2*DATA_W-1:0] pipe [LAT];

  always_ff @(posedge clk) begin
    if (en) begin
      a_r <= a;
      b_r <= b;
    end
  end

  // pipe[0] is the product of the registered operands; later stages only
  // delay it. With LAT = 1 the product is combinational from a_r, b_r.
  always_comb pipe[0] = a_r * b_r;

  for (genvar i = 1; i < LAT; i++) begin : g_stage
    always_ff @(posedge clk) begin
      if (en) pipe[i] <= pipe[i-1];
    end
  end

  assign p = pipe[LAT-1];
endmodule
