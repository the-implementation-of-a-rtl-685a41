// drnn_pkg -- shared constants of the DRNN matrix-vector accelerator.
//
// The accelerator computes 50 dot products of length 50 per batch: five
// processing elements (PEs) with ten multiply-add lanes each, fed by one
// AXI-Stream input and drained through one AXI-Stream output. The PE count,
// the lanes per PE and the batch length are the published figures; the word
// width and the fixed-point format are this design's choice (32-bit signed
// integers, no fraction bits), picked so that the published test vectors
// (inputs 1..50, results up to 63750) pass unchanged.
package drnn_pkg;
  localparam int unsigned NUM_PE    = 5;   // processing elements
  localparam int unsigned LANES     = 10;  // multiply-add lanes per PE
  localparam int unsigned BATCH_LEN = 50;  // data words per batch
  localparam int unsigned DATA_W    = 32;  // data, weight and result width
  localparam int unsigned FRAC_W    = 0;   // fraction bits of the fixed-point format
  localparam int unsigned MULT_LAT  = 2;   // multiplier pipeline depth

  // Accumulator wide enough for BATCH_LEN full-scale products.
  function automatic int unsigned acc_width(int unsigned dw, int unsigned n);
    return 2 * dw + $clog2(n + 1);
  endfunction

endpackage
