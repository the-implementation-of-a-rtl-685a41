// tb_axis_merge -- self-checking test of the result-stream merger.
// Five source models each send packets of LANES words (value encodes
// source, packet and index) with random valid gaps; the sink applies random
// back-pressure. The test checks that words leave in order PE0..PE4 per
// round, that TLAST marks only the last word of PE4, and that the output
// holds while stalled.
module tb_axis_merge;
  localparam int unsigned NUM_PE = 5;
  localparam int unsigned DATA_W = 32;
  localparam int unsigned LANES  = 10;
  localparam int unsigned ROUNDS = 12;
  logic clk = 1'b0, rst_n;
  logic [NUM_PE-1:0] s_tvalid, s_tready, s_tlast;
  logic [NUM_PE-1:0][DATA_W-1:0] s_tdata;
  logic m_tvalid, m_tready, m_tlast;
  logic [DATA_W-1:0] m_tdata;
  int checks = 0, failures = 0;
  int sent [NUM_PE];      // words sent per source
  int recv = 0, stalls = 0;

  axis_merge #(.NUM_PE(NUM_PE), .DATA_W(DATA_W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [DATA_W-1:0] word(int src, int n);
    return DATA_W'((src << 16) | n);
  endfunction

  // sources: present word sent[p]; random idle cycles between words
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int p = 0; p < NUM_PE; p++) sent[p] <= 0;
    end else begin
      for (int p = 0; p < NUM_PE; p++)
        if (s_tvalid[p] && s_tready[p]) sent[p] <= sent[p] + 1;
    end
  end
  logic [NUM_PE-1:0] gap;
  always_ff @(posedge clk) for (int p = 0; p < NUM_PE; p++) begin
    // a source may only withdraw valid when it is not waiting
    if (!(s_tvalid[p] && !s_tready[p])) gap[p] <= ($urandom_range(3) == 0);
  end
  always_comb for (int p = 0; p < NUM_PE; p++) begin
    s_tvalid[p] = rst_n && !gap[p] && sent[p] < int'(ROUNDS * LANES);
    s_tdata[p]  = word(p, sent[p]);
    s_tlast[p]  = (sent[p] % LANES) == LANES - 1;
  end
  always_ff @(posedge clk) m_tready <= ($urandom_range(3) != 0);

  // sink checker
  logic [DATA_W-1:0] last_data;
  logic              was_stalled;
  always @(posedge clk) begin
    if (rst_n) begin
      if (was_stalled) begin
        checks++;
        if (!m_tvalid || m_tdata !== last_data) begin failures++; $display("output changed while stalled"); end
      end
      was_stalled <= m_tvalid && !m_tready;
      last_data   <= m_tdata;
      if (m_tvalid && !m_tready) stalls++;
      if (m_tvalid && m_tready) begin
        int round, src, idx;
        round = recv / (NUM_PE * LANES);
        src   = (recv / LANES) % NUM_PE;
        idx   = recv % LANES;
        checks += 2;
        if (m_tdata !== word(src, round * LANES + idx)) begin
          failures++; $display("word %0d: got %h exp %h", recv, m_tdata, word(src, round * LANES + idx));
        end
        if (m_tlast !== (src == NUM_PE - 1 && idx == LANES - 1)) begin
          failures++; $display("word %0d: tlast=%0b", recv, m_tlast);
        end
        recv++;
      end
    end else begin
      was_stalled <= 1'b0;
    end
  end

  initial begin
    rst_n = 1'b0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    wait (recv == int'(ROUNDS * NUM_PE * LANES));
    repeat (5) @(posedge clk);
    checks += 2;
    if (m_tvalid) begin failures++; $display("extra output"); end
    if (stalls == 0) begin failures++; $display("no stall exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
