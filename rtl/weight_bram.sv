// weight_bram -- weight store of one multiply-add lane.
//
// The accelerator keeps its weights in block RAM; each lane owns one weight
// vector W_i of BATCH_LEN words, read at the index of the data word that is
// being multiplied. This is a simple dual-port memory: a write port through
// which the host loads the weights and a registered read port. How the
// weights are loaded is not published; the separate write port is this
// design's choice.
//
// Timing: rdata holds mem[raddr] one cycle after a cycle with re high and
// keeps it otherwise. Contents are not reset (block RAM behaviour).
module weight_bram #(
  parameter int unsigned DATA_W = 32,
  parameter int unsigned DEPTH  = 50,
  localparam int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic              clk,
  input  logic              we,
  input  logic [AW-1:0]     waddr,
  input  logic [DATA_W-1:0] wdata,
  input  logic              re,
  input  logic [AW-1:0]     raddr,
  output logic [DATA_W-1:0] rdata
);
  logic [DATA_W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we && (32'(waddr) < DEPTH)) mem[waddr] <= wdata;
  end

  always_ff @(posedge clk) begin
    if (re) rdata <= mem[raddr];
  end
endmodule
