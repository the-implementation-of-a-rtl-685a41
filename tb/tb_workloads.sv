// tb_workloads -- matrix-vector workloads of an LSTM language model, run
// on the accelerator at its default size through host-side tiling.
//
// The accelerator holds one 50 x 50 weight block. A larger product y = A x
// (A of R x C) is cut into 50 x 50 tiles: for each tile the host loads the
// block (rows past R padded with zero), streams the matching slice of x
// (a short batch for the last, partial slice) and adds the 50 partial
// results into y. The testbench plays that host and checks y against a
// direct product. Workloads:
//   1. the four gate products W_f, W_i, W_o, W_g times h_{t-1} of one
//      50-cell LSTM layer (one tile each, weights reloaded between gates);
//   2. the input product of a 4000-word vocabulary into 50 cells
//      (50 x 4000: 80 tiles);
//   3. the recurrent product of a 128-cell model (128 x 128: 3 x 3 tiles,
//      partial row and column tiles).
// Values are kept small so no partial result saturates.
module tb_workloads;
  import drnn_pkg::*;
  localparam int unsigned ROWS = NUM_PE * LANES;
  localparam int unsigned PW = $clog2(NUM_PE);
  localparam int unsigned LW = $clog2(LANES);
  localparam int unsigned KW = $clog2(BATCH_LEN);
  localparam int unsigned MAXR = 128;
  localparam int unsigned MAXC = 4000;

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

  always #2.5 aclk = ~aclk;

  int checks = 0, failures = 0;
  int tiles = 0;
  longint cycle = 0;
  always @(posedge aclk) cycle <= cycle + 1;

  // matrix A (R x C) and vector x, filled per workload
  int A [MAXR][MAXC];
  int x [MAXC];
  // results of the current tile
  int tile_res [$];
  int tile_tlast_ok = 1;

  initial begin
    repeat (2000000) @(posedge aclk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  assign m_axis_tready = 1'b1;
  always @(posedge aclk) begin
    if (aresetn && m_axis_tvalid) begin
      tile_res.push_back($signed(m_axis_tdata));
      if (m_axis_tlast !== (tile_res.size() == int'(ROWS))) tile_tlast_ok = 0;
    end
  end

  task automatic run_tile(input int R, input int C, input int r0, input int c0);
    int n;
    n = (C - c0 < int'(BATCH_LEN)) ? C - c0 : int'(BATCH_LEN);
    // load the 50 x 50 block
    for (int r = 0; r < int'(ROWS); r++)
      for (int k = 0; k < int'(BATCH_LEN); k++) begin
        @(negedge aclk);
        w_we = 1'b1; w_pe = PW'(r / LANES); w_lane = LW'(r % LANES); w_addr = KW'(k);
        w_data = (r0 + r < R && c0 + k < C) ? DATA_W'(A[r0 + r][c0 + k]) : '0;
      end
    @(negedge aclk) w_we = 1'b0;
    tile_res = {};
    for (int k = 0; k < n; k++) begin
      @(negedge aclk);
      s_axis_tvalid = 1'b1; s_axis_tdata = DATA_W'(x[c0 + k]); s_axis_tlast = (k == n - 1);
      #0.5;
      while (!s_axis_tready) begin @(negedge aclk); #0.5; end
      @(posedge aclk);
    end
    @(negedge aclk) s_axis_tvalid = 1'b0; s_axis_tlast = 1'b0;
    wait (tile_res.size() == int'(ROWS));
    tiles++;
  endtask

  // y = A x through tiles; compares with the direct product
  task automatic matvec(input string name, input int R, input int C);
    longint y [MAXR];
    longint ref_y;
    int errs = 0;
    longint t0;
    int t_before;
    t0 = cycle;
    t_before = tiles;
    for (int r = 0; r < R; r++) y[r] = 0;
    for (int r0 = 0; r0 < R; r0 += int'(ROWS))
      for (int c0 = 0; c0 < C; c0 += int'(BATCH_LEN)) begin
        run_tile(R, C, r0, c0);
        for (int r = 0; r < int'(ROWS) && r0 + r < R; r++) y[r0 + r] += tile_res[r];
      end
    for (int r = 0; r < R; r++) begin
      ref_y = 0;
      for (int c = 0; c < C; c++) ref_y += longint'(A[r][c]) * longint'(x[c]);
      checks++;
      if (y[r] != ref_y) begin
        failures++; errs++;
        if (errs < 5) $display("%s row %0d: %0d exp %0d", name, r, y[r], ref_y);
      end
    end
    checks++;
    if (!tile_tlast_ok) begin failures++; $display("%s: TLAST misplaced", name); end
    $display("%s: %0d x %0d in %0d tiles, %0d cycles", name, R, C, tiles - t_before, cycle - t0);
  endtask

  function automatic int small_rand(int range);
    return int'($urandom_range(2 * range)) - range;
  endfunction

  initial begin
    int hot;
    aresetn = 1'b0; s_axis_tvalid = 1'b0; s_axis_tlast = 1'b0; s_axis_tdata = '0;
    w_we = 1'b0; w_pe = '0; w_lane = '0; w_addr = '0; w_data = '0;
    repeat (4) @(posedge aclk);
    @(negedge aclk) aresetn = 1'b1;

    // 1. four gates of a 50-cell layer: W_* h_{t-1}
    for (int c = 0; c < 50; c++) x[c] = small_rand(256);   // h_{t-1} in Q8.8-like range
    for (int g = 0; g < 4; g++) begin
      for (int r = 0; r < 50; r++) for (int c = 0; c < 50; c++) A[r][c] = small_rand(256);
      matvec($sformatf("gate %0d W*h", g), 50, 50);
    end

    // 2. vocabulary 4000 into 50 cells, one-hot word vector plus a dense check
    for (int r = 0; r < 50; r++) for (int c = 0; c < 4000; c++) A[r][c] = small_rand(1000);
    hot = 1234;
    for (int c = 0; c < 4000; c++) x[c] = (c == hot) ? 1 : 0;
    matvec("U x (one-hot)", 50, 4000);
    for (int c = 0; c < 4000; c++) x[c] = small_rand(100);
    matvec("U x (dense)", 50, 4000);

    // 3. 128-cell recurrent product
    for (int r = 0; r < 128; r++) for (int c = 0; c < 128; c++) A[r][c] = small_rand(500);
    for (int c = 0; c < 128; c++) x[c] = small_rand(500);
    matvec("W h (128 cells)", 128, 128);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
