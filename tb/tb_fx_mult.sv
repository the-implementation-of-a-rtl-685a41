// tb_fx_mult -- self-checking test of the pipelined multiplier.
// Drives random signed operands every cycle (with a few cycles of en low)
// and compares p with a reference product computed in the testbench and
// delayed by LAT enabled cycles.
module tb_fx_mult;
  localparam int unsigned DATA_W = 32;
  localparam int unsigned LAT    = 2;
  logic clk = 1'b0;
  logic en;
  logic signed [DATA_W-1:0]   a, b;
  logic signed [2*DATA_W-1:0] p;
  logic signed [2*DATA_W-1:0] ref_q [$];
  int checks = 0, failures = 0;

  fx_mult #(.DATA_W(DATA_W), .LAT(LAT)) dut (.clk(clk), .en(en), .a(a), .b(b), .p(p));

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic signed [2*DATA_W-1:0] exp_p;
    en = 1'b1; a = '0; b = '0;
    // fill the pipeline with zeros
    repeat (LAT + 1) @(posedge clk);
    for (int i = 0; i < LAT - 1; i++) ref_q.push_back('0);
    for (int i = 0; i < 400; i++) begin
      @(negedge clk);
      en = (i % 37) != 5;          // occasional hold
      case (i % 4)
        0: begin a = $urandom; b = $urandom; end
        1: begin a = 32'sh7fffffff; b = 32'sh80000000; end
        2: begin a = -$signed(32'($urandom_range(1000))); b = $signed(32'($urandom_range(1000))); end
        default: begin a = 32'($urandom_range(50)); b = 32'($urandom_range(50)); end
      endcase
      if (en) begin
        ref_q.push_back(64'(a) * 64'(b));
        exp_p = ref_q.pop_front();
        @(posedge clk); #1;
        checks++;
        if (p !== exp_p) begin
          failures++;
          $display("mismatch %0d: p=%0d exp=%0d", i, p, exp_p);
        end
      end else begin
        exp_p = p;
        @(posedge clk); #1;
        checks++;
        if (p !== exp_p) begin failures++; $display("hold broken at %0d", i); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
