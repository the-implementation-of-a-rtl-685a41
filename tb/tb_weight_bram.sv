// tb_weight_bram -- self-checking test of the weight memory.
// Writes random words to every address, then reads them back in random
// order (with a write to another address in the same cycle), checks the
// one-cycle read latency and that rdata holds while re is low.
module tb_weight_bram;
  localparam int unsigned DATA_W = 32;
  localparam int unsigned DEPTH  = 50;
  localparam int unsigned AW     = $clog2(DEPTH);
  logic clk = 1'b0;
  logic we, re;
  logic [AW-1:0] waddr, raddr;
  logic [DATA_W-1:0] wdata, rdata;
  logic [DATA_W-1:0] model [DEPTH];
  int checks = 0, failures = 0;

  weight_bram #(.DATA_W(DATA_W), .DEPTH(DEPTH)) dut (
    .clk(clk), .we(we), .waddr(waddr), .wdata(wdata), .re(re), .raddr(raddr), .rdata(rdata));

  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [DATA_W-1:0] held;
    int a, a2;
    we = 0; re = 0; waddr = '0; raddr = '0; wdata = '0;
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk);
      we = 1; waddr = AW'(i); wdata = $urandom; model[i] = wdata;
    end
    @(negedge clk); we = 0;
    for (int i = 0; i < 300; i++) begin
      @(negedge clk);
      a  = $urandom_range(DEPTH - 1);
      a2 = (a + 1 + $urandom_range(DEPTH - 2)) % DEPTH;
      re = 1; raddr = AW'(a);
      we = 1; waddr = AW'(a2); wdata = $urandom;
      @(posedge clk); #1;
      model[a2] = wdata;
      checks++;
      if (rdata !== model[a]) begin failures++; $display("addr %0d: %h exp %h", a, rdata, model[a]); end
      // hold check: re low for a cycle
      @(negedge clk); we = 0; re = 0; raddr = AW'(a2); held = rdata;
      @(posedge clk); #1;
      checks++;
      if (rdata !== held) begin failures++; $display("rdata changed with re low"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
