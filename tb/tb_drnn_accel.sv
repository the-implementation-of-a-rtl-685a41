// tb_drnn_accel -- end-to-end test of the accelerator at its default size.
//
// The accelerator is instantiated without parameter overrides (5 PEs x 10
// lanes, 50-word batches, 32-bit words). The testbench acts as the two DMA
// engines (stream source and sink) and as the host that loads weights.
//   1. Reference run: row r of the weight matrix holds the constant r+1 and
//      the input is 1, 2, ..., 50, so result r must be 1275*(r+1)
//      (1275, 2550, ..., 63750). The first result must appear
//      MULT_LAT + 3 cycles after the last input word.
//   2. Rate run: random weights are loaded and 20 batches are streamed with
//      the output always ready; every word must be accepted without a stall,
//      i.e. one 50 x 50 matrix-vector product every 50 cycles.
//   3. Stress run: random gaps on the input, random back-pressure on the
//      output, short batches, one-word batches and batches that saturate
//      the 32-bit output.
// Every result is compared with a dot product computed here, TLAST must
// mark each 50th result, and each mechanism (input stall, output stall,
// short batch, saturation, weight reload, back-to-back batches) must have
// happened at least once.
module tb_drnn_accel;
  import drnn_pkg::*;
  localparam int unsigned ROWS = NUM_PE * LANES;
  localparam int unsigned PW = $clog2(NUM_PE);
  localparam int unsigned LW = $clog2(LANES);
  localparam int unsigned KW = $clog2(BATCH_LEN);

  logic aclk = 1'b0, aresetn;
  logic s_axis_tvalid, s_axis_tready, s_axis_tlast;
  logic [DATA_W-1:0] s_axis_tdata;
  logic m_axis_tvalid, m_axis_tready, m_axis_tlast;
  logic [DATA_W-1:0] m_axis_tdata;
  logic w_we;
  logic [PW-1:0] w_pe;
  logic [LW-1:0] w_lane;
  logic [KW-1:0] w_addr;
  logic [DATA_W-1:0] w_data;

  drnn_accel dut (.*);

  always #2.5 aclk = ~aclk;   // 200 MHz

  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge aclk) cycle <= cycle + 1;

  // mechanism counters
  int n_in_stall = 0, n_out_stall = 0, n_short = 0, n_sat = 0, n_reload = 0, n_b2b = 0;

  logic signed [DATA_W-1:0] W [ROWS][BATCH_LEN];
  logic signed [DATA_W-1:0] exp_q [$];
  int nres = 0;
  longint first_res_cycle = -1;
  logic sink_random = 1'b0;

  initial begin
    repeat (200000) @(posedge aclk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic signed [DATA_W-1:0] satw(logic signed [127:0] v);
    logic signed [127:0] mx, mn;
    mx = (128'sd1 <<< (DATA_W - 1)) - 1;
    mn = -(128'sd1 <<< (DATA_W - 1));
    if (v > mx) return mx[DATA_W-1:0];
    if (v < mn) return mn[DATA_W-1:0];
    return v[DATA_W-1:0];
  endfunction

  // ---------------- sink ----------------
  always_ff @(posedge aclk) m_axis_tready <= sink_random ? ($urandom_range(3) != 0) : 1'b1;

  always @(posedge aclk) begin
    if (aresetn) begin
      if (s_axis_tvalid && !s_axis_tready) n_in_stall++;
      if (m_axis_tvalid && !m_axis_tready) n_out_stall++;
      if (m_axis_tvalid && first_res_cycle < 0) first_res_cycle = cycle;
      if (m_axis_tvalid && m_axis_tready) begin
        logic signed [DATA_W-1:0] e;
        checks += 2;
        if (exp_q.size() == 0) begin
          failures++; $display("unexpected result %0d", $signed(m_axis_tdata));
        end else begin
          e = exp_q.pop_front();
          if (m_axis_tdata !== e) begin
            failures++; $display("result %0d: %0d exp %0d", nres, $signed(m_axis_tdata), e);
          end
        end
        if (m_axis_tlast !== ((nres % ROWS) == ROWS - 1)) begin
          failures++; $display("result %0d: tlast=%0b", nres, m_axis_tlast);
        end
        nres++;
      end
    end
  end

  // ---------------- host tasks ----------------
  task automatic load_weights(input int mode);
    for (int r = 0; r < int'(ROWS); r++)
      for (int k = 0; k < int'(BATCH_LEN); k++) begin
        @(negedge aclk);
        case (mode)
          0: W[r][k] = DATA_W'(r + 1);
          1: W[r][k] = $signed(32'($urandom_range(20000)) - 32'sd10000);
          default: W[r][k] = (r % 7 == 0) ? 32'sh7fffffff : $signed(32'($urandom_range(200)) - 32'sd100);
        endcase
        w_we = 1'b1; w_pe = PW'(r / LANES); w_lane = LW'(r % LANES); w_addr = KW'(k);
        w_data = W[r][k];
      end
    @(negedge aclk) w_we = 1'b0;
    n_reload++;
  endtask

  // send one batch; xmode 0: 1..n, 1: random, 2: full scale
  // returns the cycle in which the last word was accepted
  task automatic send_batch(input int n, input int xmode, input bit gaps, output longint t_last,
                            output int stalls);
    logic signed [127:0] acc [ROWS];
    logic signed [DATA_W-1:0] xv;
    stalls = 0;
    for (int r = 0; r < int'(ROWS); r++) acc[r] = '0;
    for (int k = 0; k < n; k++) begin
      @(negedge aclk);
      if (gaps && $urandom_range(5) == 0) begin
        s_axis_tvalid = 1'b0; @(negedge aclk);
      end
      case (xmode)
        0: xv = DATA_W'(k + 1);
        1: xv = $signed(32'($urandom_range(20000)) - 32'sd10000);
        default: xv = 32'sh7fffffff;
      endcase
      s_axis_tvalid = 1'b1; s_axis_tdata = xv; s_axis_tlast = (k == n - 1);
      for (int r = 0; r < int'(ROWS); r++) acc[r] += 128'(xv) * 128'(W[r][k]);
      #0.5;
      while (!s_axis_tready) begin stalls++; @(negedge aclk); #0.5; end
      t_last = cycle;
      @(posedge aclk);
    end
    for (int r = 0; r < int'(ROWS); r++) begin
      exp_q.push_back(satw(acc[r]));
      if (satw(acc[r]) != acc[r][DATA_W-1:0] || acc[r] != 128'(satw(acc[r]))) n_sat++;
    end
    if (n < int'(BATCH_LEN)) n_short++;
  endtask

  task automatic drain();
    @(negedge aclk); s_axis_tvalid = 1'b0; s_axis_tlast = 1'b0;
    wait (exp_q.size() == 0);
    repeat (4) @(posedge aclk);
  endtask

  initial begin
    longint t_last, t_first;
    int st, total_stalls;
    aresetn = 1'b0; s_axis_tvalid = 1'b0; s_axis_tlast = 1'b0; s_axis_tdata = '0;
    w_we = 1'b0; w_pe = '0; w_lane = '0; w_addr = '0; w_data = '0;
    repeat (4) @(posedge aclk);
    @(negedge aclk) aresetn = 1'b1;

    // 1. reference run
    load_weights(0);
    first_res_cycle = -1;
    send_batch(BATCH_LEN, 0, 1'b0, t_last, st);
    @(negedge aclk); s_axis_tvalid = 1'b0; s_axis_tlast = 1'b0;
    // the expected values are 1275*(r+1): check the model against that too
    checks++;
    if (exp_q[0] != 1275 || exp_q[ROWS-1] != 63750) begin
      failures++; $display("reference model wrong");
    end
    wait (first_res_cycle >= 0);
    checks++;
    if (first_res_cycle != t_last + longint'(MULT_LAT) + 3) begin
      failures++; $display("first result at %0d, last word at %0d", first_res_cycle, t_last);
    end
    drain();

    // 2. rate run: 20 back-to-back batches, output always ready
    load_weights(1);
    total_stalls = 0;
    for (int b = 0; b < 20; b++) begin
      send_batch(BATCH_LEN, 1, 1'b0, t_last, st);
      total_stalls += st;
      if (b == 0) t_first = t_last - longint'(BATCH_LEN) + 1;
      if (b > 0) n_b2b++;
    end
    checks++;
    if (total_stalls != 0 || t_last - t_first + 1 != 20 * BATCH_LEN) begin
      failures++;
      $display("rate run: %0d words in %0d cycles, %0d stalls", 20 * BATCH_LEN, t_last - t_first + 1, total_stalls);
    end else begin
      $display("rate run: %0d batches of %0dx%0d multiply-adds in %0d cycles (%0d ops per cycle)",
               20, ROWS, BATCH_LEN, t_last - t_first + 1, 2 * ROWS);
    end
    drain();

    // 3. stress run
    sink_random = 1'b1;
    for (int b = 0; b < 24; b++) begin
      int n;
      n = (b % 6 == 1) ? int'($urandom_range(2, BATCH_LEN - 1)) :
          (b >= 8 && b < 12) ? 1 : int'(BATCH_LEN);
      send_batch(n, 1, (b % 3) == 0, t_last, st);
    end
    drain();
    load_weights(2);
    for (int b = 0; b < 3; b++) send_batch(BATCH_LEN, (b == 1) ? 2 : 1, 1'b0, t_last, st);
    drain();

    checks += 6;
    if (n_in_stall == 0)  begin failures++; $display("input stall never happened"); end
    if (n_out_stall == 0) begin failures++; $display("output stall never happened"); end
    if (n_short == 0)     begin failures++; $display("short batch never happened"); end
    if (n_sat == 0)       begin failures++; $display("saturation never happened"); end
    if (n_reload < 2)     begin failures++; $display("weight reload never happened"); end
    if (n_b2b == 0)       begin failures++; $display("back-to-back batches never happened"); end
    $display("mechanisms: in_stall=%0d out_stall=%0d short=%0d sat=%0d reload=%0d b2b=%0d results=%0d",
             n_in_stall, n_out_stall, n_short, n_sat, n_reload, n_b2b, nres);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
