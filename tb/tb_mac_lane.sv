// tb_mac_lane -- self-checking test of one multiply-add lane.
// Sends batches of random length with random signed x, w (and gaps where
// in_valid is low), keeps a reference dot product per batch, and checks
// each sum and that it appears exactly MULT_LAT + 1 cycles after the
// batch's last word. Two batches run back to back without a gap.
module tb_mac_lane;
  localparam int unsigned DATA_W   = 32;
  localparam int unsigned ACC_W    = 70;
  localparam int unsigned MULT_LAT = 2;
  logic clk = 1'b0, rst_n;
  logic in_valid, in_last;
  logic signed [DATA_W-1:0] x, w;
  logic sum_valid;
  logic signed [ACC_W-1:0] sum;
  int checks = 0, failures = 0;
  longint cycle = 0;
  logic signed [ACC_W-1:0] exp_q [$];
  longint due_q [$];

  mac_lane #(.DATA_W(DATA_W), .ACC_W(ACC_W), .MULT_LAT(MULT_LAT)) dut (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_last(in_last),
    .x(x), .w(w), .sum_valid(sum_valid), .sum(sum));

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // result checker
  always @(posedge clk) begin
    if (rst_n && sum_valid) begin
      checks += 2;
      if (exp_q.size() == 0) begin
        failures += 2; $display("unexpected sum %0d", sum);
      end else begin
        logic signed [ACC_W-1:0] e;
        longint d;
        e = exp_q.pop_front();
        d = due_q.pop_front();
        if (sum !== e) begin failures++; $display("sum=%0d exp=%0d", sum, e); end
        if (cycle != d) begin failures++; $display("sum at cycle %0d, expected %0d", cycle, d); end
      end
    end
  end

  initial begin
    logic signed [ACC_W-1:0] acc;
    int n;
    rst_n = 1'b0; in_valid = 1'b0; in_last = 1'b0; x = '0; w = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int b = 0; b < 40; b++) begin
      n = (b == 0) ? 50 : int'($urandom_range(1, 60));
      acc = '0;
      for (int k = 0; k < n; k++) begin
        // occasional idle cycle inside a batch (not in batches 3 and 4)
        if (b != 3 && b != 4 && ($urandom_range(9) == 0)) begin
          @(negedge clk); in_valid = 1'b0; in_last = 1'b0; x = $urandom; w = $urandom;
        end
        @(negedge clk);
        in_valid = 1'b1;
        in_last  = (k == n - 1);
        if (b == 0) begin x = 32'(k + 1); w = 32'sd7; end
        else if (b == 5) begin x = 32'sh80000000; w = 32'sh80000000; end
        else begin x = $urandom; w = $urandom; end
        acc += ACC_W'(x) * ACC_W'(w);
        if (in_last) begin
          exp_q.push_back(acc);
          due_q.push_back(cycle + longint'(MULT_LAT) + 1);
        end
      end
      if (b != 3) begin @(negedge clk); in_valid = 1'b0; in_last = 1'b0; end
    end
    @(negedge clk); in_valid = 1'b0; in_last = 1'b0;
    repeat (MULT_LAT + 5) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("%0d sums missing", exp_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
