// pe -- processing element of the DRNN accelerator.
//
// A PE holds LANES weight vectors W_1..W_LANES of BATCH_LEN words each and
// computes, for one batch of data words x_0..x_{n-1} broadcast to all PEs,
// the LANES dot products A_j = sum_k W_{j+1}[k] * x_k in parallel, one
// multiply-add lane per weight vector. Ten lanes per PE and 50 words per
// batch are the published figures.
//
// How it works: a word counter addresses the lanes' weight memories; the
// memory read takes one cycle, so the data word and its last flag are
// delayed one cycle to meet the weight at the lane. When the batch's last
// word has passed the lanes, each lane holds its finished sum in its own
// sum register and starts on the next batch at once. The ten sums are
// shifted right by FRAC_W, saturated to DATA_W bits and copied into a
// result buffer as soon as it is empty (at once if it already is); the
// buffer drains one result per handshake on the PE's AXI-Stream master,
// A0 first, TLAST on A_{LANES-1}. The lane sum registers and the result
// buffer give two batches of result storage, so input batches can follow
// each other without a gap while the previous results drain. The result
// storage and the A0-first order are this design's choices.
//
// Interface: s_valid is a word the enclosing accelerator has accepted (the
// broadcast handshake lives there). s_ready is low only while a
// batch-ending word (s_last) is offered and an earlier batch's sums are
// still in the lanes (in flight, or waiting for the result buffer); other
// words are always taken. w_* writes one weight: row w_lane, column w_addr.
// Timing: one word per cycle; when the last word is accepted in cycle t and
// the result buffer is empty, the first result is valid in cycle
// t + MULT_LAT + 3.
module pe #(
  parameter int unsigned LANES     = drnn_pkg::LANES,
  parameter int unsigned BATCH_LEN = drnn_pkg::BATCH_LEN,
  parameter int unsigned DATA_W    = drnn_pkg::DATA_W,
  parameter int unsigned FRAC_W    = drnn_pkg::FRAC_W,
  parameter int unsigned MULT_LAT  = drnn_pkg::MULT_LAT,
  localparam int unsigned ACC_W    = drnn_pkg::acc_width(DATA_W, BATCH_LEN),
  localparam int unsigned LW       = (LANES > 1) ? $clog2(LANES) : 1,
  localparam int unsigned KW       = (BATCH_LEN > 1) ? $clog2(BATCH_LEN) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  // broadcast input (already accepted words)
  input  logic              s_valid,
  input  logic              s_last,
  input  logic [DATA_W-1:0] s_data,
  output logic              s_ready,
  // weight load
  input  logic              w_we,
  input  logic [LW-1:0]     w_lane,
  input  logic [KW-1:0]     w_addr,
  input  logic [DATA_W-1:0] w_data,
  // results
  output logic              m_tvalid,
  input  logic              m_tready,
  output logic [DATA_W-1:0] m_tdata,
  output logic              m_tlast
);
  logic [KW-1:0]             k;            // word index within the batch
  logic                      d_valid, d_last;
  logic [DATA_W-1:0]         d_data;
  logic [DATA_W-1:0]         w_rd  [LANES];
  logic signed [ACC_W-1:0]   sums  [LANES];
  logic [LANES-1:0]          sum_v;
  logic [DATA_W-1:0]         obuf  [LANES];
  logic                      obuf_valid;
  logic                      inflight;     // a batch end is in the lanes
  logic                      pending;      // finished sums wait in the lanes
  logic                      load;         // copy lane sums to the buffer
  logic                      sums_done;    // lanes finished a batch
  logic [LW-1:0]             oidx;

  // saturate a shifted accumulator to a signed DATA_W word
  function automatic logic [DATA_W-1:0] sat(input logic signed [ACC_W-1:0] a);
    logic signed [ACC_W-1:0] s;
    s = a >>> FRAC_W;
    if (s > $signed(ACC_W'({1'b0, {(DATA_W-1){1'b1}}})))
      return {1'b0, {(DATA_W-1){1'b1}}};
    else if (s < -$signed(ACC_W'({1'b0, {(DATA_W-1){1'b1}}})) - $signed(ACC_W'(1)))
      return {1'b1, {(DATA_W-1){1'b0}}};
    else
      return s[DATA_W-1:0];
  endfunction

  // word counter and one-cycle alignment with the weight read
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      k       <= '0;
      d_valid <= 1'b0;
      d_last  <= 1'b0;
      d_data  <= '0;
    end else begin
      d_valid <= s_valid;
      d_last  <= s_valid && s_last;
      if (s_valid) begin
        d_data <= s_data;
        if (s_last || 32'(k) == BATCH_LEN - 1) k <= '0;
        else                                  k <= k + 1'b1;
      end
    end
  end

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    weight_bram #(.DATA_W(DATA_W), .DEPTH(BATCH_LEN)) u_w (
      .clk  (clk),
      .we   (w_we && 32'(w_lane) == l),
      .waddr(w_addr),
      .wdata(w_data),
      .re   (s_valid),
      .raddr(k),
      .rdata(w_rd[l])
    );
    mac_lane #(.DATA_W(DATA_W), .ACC_W(ACC_W), .MULT_LAT(MULT_LAT)) u_mac (
      .clk      (clk),
      .rst_n    (rst_n),
      .in_valid (d_valid),
      .in_last  (d_last),
      .x        (d_data),
      .w        (w_rd[l]),
      .sum_valid(sum_v[l]),
      .sum      (sums[l])
    );
  end

  // A batch end may enter only when no earlier batch's sums are still on
  // their way (inflight) or parked in the lanes' sum registers (pending).
  assign s_ready = !(s_last && (inflight || pending));
  // all lanes see the same words, so their sums are ready together
  assign sums_done = &sum_v;
  assign load      = (sums_done || pending) && !obuf_valid;

  // result buffer control
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      inflight   <= 1'b0;
      pending    <= 1'b0;
      obuf_valid <= 1'b0;
      oidx       <= '0;
    end else begin
      if (s_valid && s_last) inflight <= 1'b1;
      else if (sums_done)     inflight <= 1'b0;
      if (load)          pending <= 1'b0;
      else if (sums_done) pending <= 1'b1;
      if (load) begin
        obuf_valid <= 1'b1;
        oidx       <= '0;
      end else if (m_tvalid && m_tready) begin
        if (m_tlast) obuf_valid <= 1'b0;
        else         oidx       <= oidx + 1'b1;
      end
    end
  end

  for (genvar l = 0; l < LANES; l++) begin : g_obuf
    always_ff @(posedge clk) begin
      if (load) obuf[l] <= sat(sums[l]);
    end
  end

  assign m_tvalid = obuf_valid;
  assign m_tdata  = obuf[oidx];
  assign m_tlast  = (32'(oidx) == LANES - 1);

  // a batch end is never accepted while the buffer is reserved
  a_no_overrun: assert property (@(posedge clk) disable iff (!rst_n)
    (s_valid && s_last) |-> !(inflight || pending));
  // lane sums are never overwritten before they are buffered
  a_no_lost_sum: assert property (@(posedge clk) disable iff (!rst_n)
    sums_done |-> !pending);
  // results hold until taken (AXI-Stream rule)
  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
    (m_tvalid && !m_tready) |=> (m_tvalid && $stable(m_tdata) && $stable(m_tlast)));
endmodule
