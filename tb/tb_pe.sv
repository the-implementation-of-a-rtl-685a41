// tb_pe -- self-checking test of one processing element.
// Loads random signed weights into all LANES x BATCH_LEN places, then sends
// batches of random data words (full, short and one-word batches, some
// back to back,
// one with values that saturate the output). It acts as the enclosing
// accelerator: a word is accepted when the PE's s_ready allows it. The
// result sink applies random back-pressure. Checked: every result against
// a reference dot product, the A0-first order and TLAST, the latency from
// the last word to the first result (MULT_LAT + 3 cycles, when no earlier
// result is outstanding), and that the batch-end stall and output stalls both happened.
module tb_pe;
  localparam int unsigned LANES     = 10;
  localparam int unsigned BATCH_LEN = 50;
  localparam int unsigned DATA_W    = 32;
  localparam int unsigned MULT_LAT  = 2;
  localparam int unsigned LW = $clog2(LANES);
  localparam int unsigned KW = $clog2(BATCH_LEN);
  localparam int unsigned NB = 30;

  logic clk = 1'b0, rst_n;
  logic s_valid, s_last, s_ready, want;
  logic [DATA_W-1:0] s_data;
  logic w_we;
  logic [LW-1:0] w_lane;
  logic [KW-1:0] w_addr;
  logic [DATA_W-1:0] w_data;
  logic m_tvalid, m_tready, m_tlast;
  logic [DATA_W-1:0] m_tdata;
  int checks = 0, failures = 0;
  longint cycle = 0;
  int s_stalls = 0, m_stalls = 0, lat_checked = 0;

  logic signed [DATA_W-1:0] W [LANES][BATCH_LEN];
  logic signed [DATA_W-1:0] exp_q [$];
  longint last_cycle_q [$];

  pe #(.LANES(LANES), .BATCH_LEN(BATCH_LEN), .DATA_W(DATA_W), .FRAC_W(0), .MULT_LAT(MULT_LAT)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic signed [DATA_W-1:0] satw(longint unsigned hi, logic signed [127:0] v);
    logic signed [127:0] mx, mn;
    mx = (128'sd1 <<< (DATA_W - 1)) - 1;
    mn = -(128'sd1 <<< (DATA_W - 1));
    if (v > mx) return mx[DATA_W-1:0];
    if (v < mn) return mn[DATA_W-1:0];
    return v[DATA_W-1:0];
  endfunction

  assign s_valid = want && s_ready;
  always @(posedge clk) if (rst_n && want && !s_ready) s_stalls++;
  always_ff @(posedge clk) m_tready <= ($urandom_range(4) != 0);

  // sink
  int nres = 0;
  logic in_packet = 1'b0;
  always @(posedge clk) begin
    if (rst_n && m_tvalid && !m_tready) m_stalls++;
    if (rst_n && m_tvalid && !in_packet) begin
      // first cycle of a packet: check latency from the batch's last word
      longint lc;
      lc = last_cycle_q.pop_front();
      if (lc >= 0) begin
        checks++; lat_checked++;
        if (cycle != lc + longint'(MULT_LAT) + 3) begin
          failures++; $display("first result at %0d, last word at %0d", cycle, lc);
        end
      end
      in_packet <= 1'b1;
    end
    if (rst_n && m_tvalid && m_tready) begin
      logic signed [DATA_W-1:0] e;
      checks += 2;
      e = exp_q.pop_front();
      if (m_tdata !== e) begin failures++; $display("result %0d: %0d exp %0d", nres, $signed(m_tdata), e); end
      if (m_tlast !== ((nres % LANES) == LANES - 1)) begin failures++; $display("result %0d tlast %0b", nres, m_tlast); end
      if (m_tlast) in_packet <= 1'b0;
      nres++;
    end
  end

  initial begin
    int n;
    logic signed [127:0] acc [LANES];
    logic signed [DATA_W-1:0] xv;
    longint t_acc;
    logic stalled;
    rst_n = 1'b0; want = 1'b0; s_last = 1'b0; s_data = '0;
    w_we = 1'b0; w_lane = '0; w_addr = '0; w_data = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int l = 0; l < LANES; l++)
      for (int k = 0; k < BATCH_LEN; k++) begin
        @(negedge clk);
        w_we = 1'b1; w_lane = LW'(l); w_addr = KW'(k);
        W[l][k] = (l == 3) ? 32'sh7fffffff : $signed(32'($urandom_range(2000)) - 32'sd1000);
        w_data = W[l][k];
      end
    @(negedge clk) w_we = 1'b0;
    for (int b = 0; b < NB; b++) begin
      n = (b >= 20 && b < 26) ? 1 :
          (b % 5 == 2) ? int'($urandom_range(1, BATCH_LEN - 1)) : int'(BATCH_LEN);
      for (int l = 0; l < LANES; l++) acc[l] = '0;
      for (int k = 0; k < n; k++) begin
        @(negedge clk);
        // back-to-back batches for b < 10, random gaps after
        if (b >= 10 && !(b >= 19 && b < 26) && $urandom_range(7) == 0) begin
          want = 1'b0; @(negedge clk);
        end
        want   = 1'b1;
        s_last = (k == n - 1);
        if (b == 4)      xv = 32'sh7fffffff;
        else if (b == 6) xv = 32'sh80000000;
        else if (b == 0) xv = 32'(k + 1);
        else             xv = $signed(32'($urandom_range(2000)) - 32'sd1000);
        s_data = xv;
        for (int l = 0; l < LANES; l++) acc[l] += 128'(xv) * 128'(W[l][k]);
        // s_ready depends only on s_last and the PE's state: sample it
        // between edges, so the word is taken at the next rising edge
        #1;
        stalled = !s_ready;
        while (!s_ready) @(negedge clk);
        t_acc = cycle;
        @(posedge clk);
        if (s_last) begin
          // latency is checked only when the buffer was free on arrival
          last_cycle_q.push_back((stalled || exp_q.size() != 0) ? -1 : t_acc);
          for (int l = 0; l < LANES; l++) exp_q.push_back(satw(0, acc[l]));
        end
      end
      if (b >= 10 && !(b >= 19 && b < 26)) begin @(negedge clk); want = 1'b0; s_last = 1'b0; end
    end
    @(negedge clk); want = 1'b0; s_last = 1'b0;
    wait (nres == int'(NB * LANES));
    repeat (10) @(posedge clk);
    checks += 4;
    if (m_tvalid)        begin failures++; $display("extra result"); end
    if (s_stalls == 0)   begin failures++; $display("batch-end stall never happened"); end
    if (m_stalls == 0)   begin failures++; $display("output stall never happened"); end
    if (lat_checked == 0) begin failures++; $display("latency never checked"); end
    $display("s_stalls=%0d m_stalls=%0d lat_checked=%0d", s_stalls, m_stalls, lat_checked);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
