// rflearn_pkg: types, constants and size formulas shared by the learning core.
//
// All feature maps and weights are signed fixed-point numbers of DW bits with
// FRAC fractional bits (Q7.8 by default). Products are summed in an ACC_W-bit
// accumulator, wide enough for the longest dot product of the default network
// (217 taps of the second convolution) without overflow. The network is
// specified to run in fixed point; the word widths are this design's choice.
//
// Tensors live in memories in channel-major order:
//   address = (channel * ROWS + row) * COLS + column
// which is also the order in which the Flatten in front of the first
// fully-connected layer reads them.
package rflearn_pkg;

  localparam int DW    = 16;  // data and weight word width
  localparam int FRAC  = 8;   // fractional bits of data and weights
  localparam int ACC_W = 40;  // accumulator width

  typedef logic signed [DW-1:0]    data_t;
  typedef logic signed [ACC_W-1:0] acc_t;

  localparam data_t DATA_MAX = data_t'({1'b0, {(DW-1){1'b1}}});
  localparam data_t DATA_MIN = data_t'({1'b1, {(DW-1){1'b0}}});

  // Output size of a convolution over an n-long zero-padded axis with an
  // h-long filter and stride s: every shift that overlaps the input counts.
  function automatic int conv_out_dim(int n, int h, int s);
    return 1 + (n + h - 2) / s;
  endfunction

  // Output size of non-overlapping p x p pooling: incomplete regions dropped.
  function automatic int pool_out_dim(int n, int p);
    return n / p;
  endfunction

  // Width of a counter or address that indexes n items (at least 1 bit).
  function automatic int idx_w(int n);
    return (n <= 2) ? 1 : $clog2(n);
  endfunction

  // AXI-Lite register map (byte addresses).
  localparam logic [7:0] REG_CTRL   = 8'h00;  // W: [0] start [1] stop [2] soft reset [3] auto mode
  localparam logic [7:0] REG_STATUS = 8'h04;  // R: [0] busy [1] done [2] frame ready [3] saturated [7:4] layer
  localparam logic [7:0] REG_WADDR  = 8'h08;  // RW: weight memory address
  localparam logic [7:0] REG_WDATA  = 8'h0C;  // W: write weight at WADDR, WADDR += 1
  localparam logic [7:0] REG_RESULT = 8'h10;  // R: [7:0] class, [31] valid
  localparam logic [7:0] REG_CYCLES = 8'h14;  // R: clock cycles of the last inference
  localparam logic [7:0] REG_COUNT  = 8'h18;  // R: inferences completed since reset
  localparam logic [7:0] REG_SCORE0 = 8'h40;  // R: score of class k at 0x40 + 4k

endpackage
