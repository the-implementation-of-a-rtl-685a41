// mac_lane -- one multiply-add lane of a processing element.
//
// Each lane is a multiplier followed by an adder, as drawn inside a PE of
// the accelerator; the adder closes a loop over its own register, so the
// lane accumulates x*w over the words of one batch. The product of a
// batch's last word is added and the finished sum is handed out on a
// one-cycle strobe, while the accumulator restarts from zero, so the next
// batch can follow without a gap.
//
// Interface: in_valid marks a word (x, w) to be used; in_last marks the
// batch's last word. sum_valid pulses when sum takes a new complete sum;
// sum then holds it until the next batch's sum replaces it.
// Timing: when the batch's last word is presented in clock cycle t,
// sum_valid is high in cycle t + MULT_LAT + 1. One word per cycle, no back-pressure: the lane never
// stalls. Reset: synchronous, active low, clears the accumulator (the
// reset style and the accumulator width are this design's choice).
module mac_lane #(
  parameter int unsigned DATA_W   = 32,
  parameter int unsigned ACC_W    = 70,
  parameter int unsigned MULT_LAT = 2
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic                     in_last,
  input  logic signed [DATA_W-1:0] x,
  input  logic signed [DATA_W-1:0] w,
  output logic                     sum_valid,
  output logic signed [ACC_W-1:0]  sum
);
  logic signed [2*DATA_W-1:0] prod;
  logic [MULT_LAT-1:0]        v_pipe, l_pipe;
  logic signed [ACC_W-1:0]    acc, acc_plus;

  fx_mult #(.DATA_W(DATA_W), .LAT(MULT_LAT)) u_mult (
    .clk(clk), .en(1'b1), .a(x), .b(w), .p(prod)
  );

  // valid / last travel alongside the operands through the multiplier
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      v_pipe <= '0;
      l_pipe <= '0;
    end else begin
      v_pipe <= MULT_LAT'({v_pipe, in_valid});
      l_pipe <= MULT_LAT'({l_pipe, in_last});
    end
  end

  assign acc_plus = acc + ACC_W'(prod);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      acc       <= '0;
      sum       <= '0;
      sum_valid <= 1'b0;
    end else begin
      sum_valid <= 1'b0;
      if (v_pipe[MULT_LAT-1]) begin
        if (l_pipe[MULT_LAT-1]) begin
          sum       <= acc_plus;
          sum_valid <= 1'b1;
          acc       <= '0;
        end else begin
          acc <= acc_plus;
        end
      end
    end
  end
endmodule
