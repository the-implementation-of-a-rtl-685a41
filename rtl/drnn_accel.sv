// drnn_accel -- DRNN matrix-vector accelerator with AXI-Stream ports (top).
//
// The accelerator speeds up the matrix-vector products that dominate the
// forward pass of an LSTM language model, such as the W_f * h_{t-1} term of
// a gate. It holds a NUM_PE*LANES x BATCH_LEN weight matrix (50 x 50 at the
// published size: 5 PEs of 10 lanes, 50-word batches) and, for every batch
// of BATCH_LEN data words received on its AXI-Stream slave, returns the
// NUM_PE*LANES dot products on its AXI-Stream master. On the board the two
// streams are served by DMA engines of the host processor.
//
// How it works: every accepted input word is broadcast to all PEs; a word is
// accepted when TVALID is high and every PE is ready (a PE refuses only a
// batch-ending word while its result buffer is still draining). Each PE
// multiplies the word by one weight per lane and accumulates; after TLAST
// the PEs buffer their results and start on the next batch, while an output
// merger sends PE0's results, then PE1's, and so on, with TLAST on the last
// result of the batch. With a ready output, batches stream back to back at
// one word per clock: 50 cycles (250 ns at the published 200 MHz) per batch
// of 50 x 50 multiply-adds.
//
// Interface: AXI-Stream slave s_axis_* (input vector, TLAST ends a batch),
// AXI-Stream master m_axis_* (results, row order), and a weight-load port
// w_* that writes one weight W[w_pe*LANES + w_lane][w_addr] per cycle. The
// weight-load port, the word width and the fixed-point format (DATA_W-bit
// signed, FRAC_W fraction bits, saturating output) are this design's
// choices; the PE count, lanes, batch length and one-word-per-cycle rate
// follow the published design. Reset: synchronous, active low.
module drnn_accel #(
  parameter int unsigned NUM_PE    = drnn_pkg::NUM_PE,
  parameter int unsigned LANES     = drnn_pkg::LANES,
  parameter int unsigned BATCH_LEN = drnn_pkg::BATCH_LEN,
  parameter int unsigned DATA_W    = drnn_pkg::DATA_W,
  parameter int unsigned FRAC_W    = drnn_pkg::FRAC_W,
  parameter int unsigned MULT_LAT  = drnn_pkg::MULT_LAT,
  localparam int unsigned PW       = (NUM_PE > 1) ? $clog2(NUM_PE) : 1,
  localparam int unsigned LW       = (LANES > 1) ? $clog2(LANES) : 1,
  localparam int unsigned KW       = (BATCH_LEN > 1) ? $clog2(BATCH_LEN) : 1
) (
  input  logic              aclk,
  input  logic              aresetn,
  // SLAVE_AXIS: input vector
  input  logic              s_axis_tvalid,
  output logic              s_axis_tready,
  input  logic [DATA_W-1:0] s_axis_tdata,
  input  logic              s_axis_tlast,
  // MASTER_AXIS: results
  output logic              m_axis_tvalid,
  input  logic              m_axis_tready,
  output logic [DATA_W-1:0] m_axis_tdata,
  output logic              m_axis_tlast,
  // weight load
  input  logic              w_we,
  input  logic [PW-1:0]     w_pe,
  input  logic [LW-1:0]     w_lane,
  input  logic [KW-1:0]     w_addr,
  input  logic [DATA_W-1:0] w_data
);
  logic [NUM_PE-1:0]             pe_ready;
  logic                          s_fire;
  logic [NUM_PE-1:0]             r_tvalid, r_tready, r_tlast;
  logic [NUM_PE-1:0][DATA_W-1:0] r_tdata;

  assign s_axis_tready = &pe_ready;
  assign s_fire        = s_axis_tvalid && s_axis_tready;

  for (genvar p = 0; p < NUM_PE; p++) begin : g_pe
    pe #(
      .LANES(LANES), .BATCH_LEN(BATCH_LEN), .DATA_W(DATA_W),
      .FRAC_W(FRAC_W), .MULT_LAT(MULT_LAT)
    ) u_pe (
      .clk     (aclk),
      .rst_n   (aresetn),
      .s_valid (s_fire),
      .s_last  (s_axis_tlast),
      .s_data  (s_axis_tdata),
      .s_ready (pe_ready[p]),
      .w_we    (w_we && 32'(w_pe) == p),
      .w_lane  (w_lane),
      .w_addr  (w_addr),
      .w_data  (w_data),
      .m_tvalid(r_tvalid[p]),
      .m_tready(r_tready[p]),
      .m_tdata (r_tdata[p]),
      .m_tlast (r_tlast[p])
    );
  end

  axis_merge #(.NUM_PE(NUM_PE), .DATA_W(DATA_W)) u_merge (
    .clk     (aclk),
    .rst_n   (aresetn),
    .s_tvalid(r_tvalid),
    .s_tready(r_tready),
    .s_tdata (r_tdata),
    .s_tlast (r_tlast),
    .m_tvalid(m_axis_tvalid),
    .m_tready(m_axis_tready),
    .m_tdata (m_axis_tdata),
    .m_tlast (m_axis_tlast)
  );

  // the output stream obeys the AXI-Stream hold rule
  a_m_hold: assert property (@(posedge aclk) disable iff (!aresetn)
    (m_axis_tvalid && !m_axis_tready) |=>
      (m_axis_tvalid && $stable(m_axis_tdata) && $stable(m_axis_tlast)));
endmodule
