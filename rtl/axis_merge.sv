// axis_merge -- joins the PE result streams into the accelerator's output.
//
// The accelerator has one AXI-Stream output for all its PEs. This block
// serves the PEs in a fixed order, PE0 first: it passes the selected PE's
// stream straight through until that PE's TLAST, then moves on to the next
// PE. The output TLAST is raised on the last PE's last result, so one
// output packet holds a whole batch's results (NUM_PE * LANES words, in
// row order). The fixed order and the pass-through (no register stage) are
// this design's choices.
//
// Interface: per-PE AXI-Stream slaves packed into vectors, one AXI-Stream
// master. Timing: combinational data path; the selection advances on the
// clock edge that completes a PE's TLAST transfer.
module axis_merge #(
  parameter int unsigned NUM_PE = 5,
  parameter int unsigned DATA_W = 32,
  localparam int unsigned SW    = (NUM_PE > 1) ? $clog2(NUM_PE) : 1
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic [NUM_PE-1:0]              s_tvalid,
  output logic [NUM_PE-1:0]              s_tready,
  input  logic [NUM_PE-1:0][DATA_W-1:0]  s_tdata,
  input  logic [NUM_PE-1:0]              s_tlast,
  output logic                           m_tvalid,
  input  logic                           m_tready,
  output logic [DATA_W-1:0]              m_tdata,
  output logic                           m_tlast
);
  logic [SW-1:0] sel;
  logic          sel_is_last;

  assign sel_is_last = (32'(sel) == NUM_PE - 1);

  always_comb begin
    s_tready      = '0;
    s_tready[sel] = m_tready;
    m_tvalid      = s_tvalid[sel];
    m_tdata       = s_tdata[sel];
    m_tlast       = s_tlast[sel] && sel_is_last;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      sel <= '0;
    end else if (m_tvalid && m_tready && s_tlast[sel]) begin
      sel <= sel_is_last ? '0 : sel + 1'b1;
    end
  end

  a_sel_range: assert property (@(posedge clk) disable iff (!rst_n) 32'(sel) < NUM_PE);
endmodule
