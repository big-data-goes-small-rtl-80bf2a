// rflearn_learning_core: the deep-learning core that classifies raw I/Q
// samples inside the radio's receive path.
//
// Received samples arrive on an AXI-Stream port and are collected into a
// 32 x 32 x 2 input tensor (32 rows of 32 I samples and 32 rows of 32 Q
// samples). A convolutional neural network of the form
//   IN -> [CVL -> RLL -> POL] x 2 -> [FCL -> RLL] x 2 -> FCL
// (M = 2, K = 2, N = 1 in the paper's notation; 3 x 3 filters, stride 1,
// pooling length 3; 24 and 12 kernels, 16 and 8 neurons, 5 classes by
// default) then computes one score per class. The scores are written into
// the actuation core's memory and the winning class is reported as the
// inferred knowledge, with an interrupt to the controller.
//
// Structure: every layer has its own block RAM holding its input; a layer
// reads that memory and the shared weight memory, and writes the memory of
// the next layer. The layer sequencer runs the seven layers one after
// another. With the default sizes the tensors are
//   input 2x32x32 -> conv1 24x34x34 -> pool1 24x11x11 -> conv2 12x13x13
//   -> pool2 12x4x4 (flattened to 192) -> fc1 16 -> fc2 8 -> fc3 5
// and the weight memory holds 6329 words (map below). All arithmetic is
// signed Q7.8 fixed point with a 40-bit accumulator.
//
// The controller reaches the core through AXI-Lite (see axil_regs for the map):
// it loads weights at any time, starts one inference or sets auto mode
// (classify every frame as it arrives), stops or resets the core and reads
// the class, the scores and the latency in cycles.
//
// What is the paper's: the layer-per-memory structure, the AXI-Stream to
// BRAM converter, the shared weights memory written by the controller, the
// start/stop/reset control, the layer equations, the network shape and its
// sizes, the fixed-point arithmetic and loop pipelining (PIPELINE = 1; with
// PIPELINE = 0 every multiply-accumulate takes three cycles, as before the
// optimisation). This design's choices: word widths, memory layouts, the
// register map, the sequential schedule, max pooling, and native one-cycle
// memory ports in place of the AXI-Full links between layers and memories.
//
// Weight memory map (word addresses, defaults in brackets):
//   conv1 taps [0] then biases [432], conv2 taps [456] then biases [3048],
//   fc1 weights [3060] then biases [6132], fc2 [6148] / [6276],
//   fc3 [6284] / [6324]; see conv_layer and fc_layer for the order within.
module rflearn_learning_core
  import rflearn_pkg::*;
#(
  parameter int unsigned IN_ROWS    = 32,
  parameter int unsigned IN_COLS    = 32,
  parameter int unsigned KSIZE      = 3,
  parameter int unsigned STRIDE     = 1,
  parameter int unsigned POOL       = 3,
  parameter int unsigned K1         = 24,
  parameter int unsigned K2         = 12,
  parameter int unsigned N1         = 16,
  parameter int unsigned N2         = 8,
  parameter int unsigned NCLS       = 5,
  parameter bit          PIPELINE   = 1'b1,
  parameter int unsigned FIFO_DEPTH = 16,
  // derived sizes
  localparam int unsigned NSAMP  = IN_ROWS * IN_COLS,
  localparam int unsigned C1_H   = conv_out_dim(IN_ROWS, KSIZE, STRIDE),
  localparam int unsigned C1_W   = conv_out_dim(IN_COLS, KSIZE, STRIDE),
  localparam int unsigned P1_H   = pool_out_dim(C1_H, POOL),
  localparam int unsigned P1_W   = pool_out_dim(C1_W, POOL),
  localparam int unsigned C2_H   = conv_out_dim(P1_H, KSIZE, STRIDE),
  localparam int unsigned C2_W   = conv_out_dim(P1_W, KSIZE, STRIDE),
  localparam int unsigned P2_H   = pool_out_dim(C2_H, POOL),
  localparam int unsigned P2_W   = pool_out_dim(C2_W, POOL),
  localparam int unsigned FLAT   = K2 * P2_H * P2_W,
  // weight memory map
  localparam int unsigned CV1_W  = 0,
  localparam int unsigned CV1_B  = CV1_W + K1 * 2 * KSIZE * KSIZE,
  localparam int unsigned CV2_W  = CV1_B + K1,
  localparam int unsigned CV2_B  = CV2_W + K2 * K1 * KSIZE * KSIZE,
  localparam int unsigned FC1_W  = CV2_B + K2,
  localparam int unsigned FC1_B  = FC1_W + N1 * FLAT,
  localparam int unsigned FC2_W  = FC1_B + N1,
  localparam int unsigned FC2_B  = FC2_W + N2 * N1,
  localparam int unsigned FC3_W  = FC2_B + N2,
  localparam int unsigned FC3_B  = FC3_W + NCLS * N2,
  localparam int unsigned WTOT   = FC3_B + NCLS,
  localparam int unsigned WAW    = idx_w(WTOT)
) (
  input  logic        clk,
  input  logic        rst_n,
  // AXI-Lite slave from the controller
  input  logic [7:0]  s_axil_awaddr,
  input  logic        s_axil_awvalid,
  output logic        s_axil_awready,
  input  logic [31:0] s_axil_wdata,
  input  logic        s_axil_wvalid,
  output logic        s_axil_wready,
  output logic [1:0]  s_axil_bresp,
  output logic        s_axil_bvalid,
  input  logic        s_axil_bready,
  input  logic [7:0]  s_axil_araddr,
  input  logic        s_axil_arvalid,
  output logic        s_axil_arready,
  output logic [31:0] s_axil_rdata,
  output logic [1:0]  s_axil_rresp,
  output logic        s_axil_rvalid,
  input  logic        s_axil_rready,
  // AXI-Stream of RX I/Q samples from the front end, {Q, I}
  input  logic [31:0] s_axis_tdata,
  input  logic        s_axis_tvalid,
  output logic        s_axis_tready,
  // write port into the actuation core's memory (class scores)
  output logic        act_we,
  output logic [idx_w(NCLS)-1:0] act_waddr,
  output data_t       act_wdata,
  // inferred knowledge toward the actuation core
  output logic        knowledge_valid,
  output logic [idx_w(NCLS)-1:0] knowledge_class,
  output logic        irq
);
  localparam int unsigned NL = 7;
  localparam int unsigned LA = idx_w(NL);

  // control
  logic start_pulse, stop_pulse, srst_pulse, auto_mode;
  logic core_rst_n, layer_clear;
  logic [NL-1:0] layer_start, layer_done;
  logic [LA-1:0] active;
  logic seq_busy, seq_armed, frame_ready, frame_release, infer_start, seq_done, clear_layers;
  logic [31:0] cycles, count;
  logic w_we;
  logic [WAW-1:0] w_waddr, w_raddr;
  data_t w_wdata, w_rdata;

  assign core_rst_n  = rst_n && !srst_pulse;
  assign layer_clear = clear_layers || srst_pulse;

  // ---------------------------------------------------------------- input
  logic                         in_we;
  logic [idx_w(NSAMP)-1:0]      in_waddr, in_raddr;
  logic [31:0]                  in_wdata, in_rdata;
  logic [idx_w(2*NSAMP)-1:0]    cv1_in_raddr;
  logic                         in_sel_q;
  data_t                        cv1_in_rdata;

  axis_to_bram #(.N_SAMPLES(NSAMP), .FIFO_DEPTH(FIFO_DEPTH)) u_s2b (
    .clk           (clk),
    .rst_n         (rst_n),
    .clear         (srst_pulse),
    .s_axis_tdata  (s_axis_tdata),
    .s_axis_tvalid (s_axis_tvalid),
    .s_axis_tready (s_axis_tready),
    .bram_we       (in_we),
    .bram_waddr    (in_waddr),
    .bram_wdata    (in_wdata),
    .frame_ready   (frame_ready),
    .frame_release (frame_release)
  );

  bram_sdp #(.WIDTH(32), .DEPTH(NSAMP)) u_in_bram (
    .clk (clk), .we (in_we), .waddr (in_waddr), .wdata (in_wdata),
    .raddr (in_raddr), .rdata (in_rdata)
  );

  // channel 0 = I (low half), channel 1 = Q (high half) of the same word
  always_comb begin
    if (cv1_in_raddr >= $bits(cv1_in_raddr)'(NSAMP))
      in_raddr = $bits(in_raddr)'(cv1_in_raddr - $bits(cv1_in_raddr)'(NSAMP));
    else
      in_raddr = $bits(in_raddr)'(cv1_in_raddr);
  end
  always_ff @(posedge clk) in_sel_q <= (cv1_in_raddr >= $bits(cv1_in_raddr)'(NSAMP));
  assign cv1_in_rdata = in_sel_q ? data_t'(in_rdata[31:16]) : data_t'(in_rdata[15:0]);

  // --------------------------------------------------------------- weights
  bram_sdp #(.WIDTH(DW), .DEPTH(WTOT)) u_w_bram (
    .clk (clk), .we (w_we), .waddr (w_waddr), .wdata (w_wdata),
    .raddr (w_raddr), .rdata (w_rdata)
  );

  logic [WAW-1:0] cv1_w_raddr, cv2_w_raddr, fc1_w_raddr, fc2_w_raddr, fc3_w_raddr;
  always_comb begin
    unique case (active)
      LA'(0):  w_raddr = cv1_w_raddr;
      LA'(2):  w_raddr = cv2_w_raddr;
      LA'(4):  w_raddr = fc1_w_raddr;
      LA'(5):  w_raddr = fc2_w_raddr;
      LA'(6):  w_raddr = fc3_w_raddr;
      default: w_raddr = '0;
    endcase
  end

  logic [NL-1:0] sat_evt;
  assign sat_evt[1] = 1'b0;
  assign sat_evt[3] = 1'b0;

  // ------------------------------------------------------ layer 0: conv1
  localparam int unsigned M1 = K1 * C1_H * C1_W;
  logic                 c1_we;
  logic [idx_w(M1)-1:0] c1_waddr, c1_raddr;
  data_t                c1_wdata, c1_rdata;
  logic                 cv1_clip;

  conv_layer #(
    .C_IN (2), .H_IN (IN_ROWS), .W_IN (IN_COLS), .F (K1), .KH (KSIZE), .KW (KSIZE),
    .S (STRIDE), .W_BASE (CV1_W), .B_BASE (CV1_B), .WMEM_AW (WAW),
    .PIPELINE (PIPELINE), .RELU (1'b1)
  ) u_conv1 (
    .clk (clk), .rst_n (core_rst_n), .clear (layer_clear),
    .start (layer_start[0]), .busy (), .done (layer_done[0]),
    .in_raddr (cv1_in_raddr), .in_rdata (cv1_in_rdata),
    .w_raddr (cv1_w_raddr), .w_rdata (w_rdata),
    .out_we (c1_we), .out_waddr (c1_waddr), .out_wdata (c1_wdata),
    .sat_evt (sat_evt[0]), .clip_evt (cv1_clip)
  );

  bram_sdp #(.WIDTH(DW), .DEPTH(M1)) u_c1_bram (
    .clk (clk), .we (c1_we), .waddr (c1_waddr), .wdata (c1_wdata),
    .raddr (c1_raddr), .rdata (c1_rdata)
  );

  // ------------------------------------------------------ layer 1: pool1
  localparam int unsigned MP1 = K1 * P1_H * P1_W;
  logic                  p1_we;
  logic [idx_w(MP1)-1:0] p1_waddr, p1_raddr;
  data_t                 p1_wdata, p1_rdata;

  pool_layer #(.C (K1), .H (C1_H), .W (C1_W), .P (POOL), .PIPELINE (PIPELINE)) u_pool1 (
    .clk (clk), .rst_n (core_rst_n), .clear (layer_clear),
    .start (layer_start[1]), .busy (), .done (layer_done[1]),
    .in_raddr (c1_raddr), .in_rdata (c1_rdata),
    .out_we (p1_we), .out_waddr (p1_waddr), .out_wdata (p1_wdata)
  );

  bram_sdp #(.WIDTH(DW), .DEPTH(MP1)) u_p1_bram (
    .clk (clk), .we (p1_we), .waddr (p1_waddr), .wdata (p1_wdata),
    .raddr (p1_raddr), .rdata (p1_rdata)
  );

  // ------------------------------------------------------ layer 2: conv2
  localparam int unsigned M2 = K2 * C2_H * C2_W;
  logic                 c2_we;
  logic [idx_w(M2)-1:0] c2_waddr, c2_raddr;
  data_t                c2_wdata, c2_rdata;
  logic                 cv2_clip;

  conv_layer #(
    .C_IN (K1), .H_IN (P1_H), .W_IN (P1_W), .F (K2), .KH (KSIZE), .KW (KSIZE),
    .S (STRIDE), .W_BASE (CV2_W), .B_BASE (CV2_B), .WMEM_AW (WAW),
    .PIPELINE (PIPELINE), .RELU (1'b1)
  ) u_conv2 (
    .clk (clk), .rst_n (core_rst_n), .clear (layer_clear),
    .start (layer_start[2]), .busy (), .done (layer_done[2]),
    .in_raddr (p1_raddr), .in_rdata (p1_rdata),
    .w_raddr (cv2_w_raddr), .w_rdata (w_rdata),
    .out_we (c2_we), .out_waddr (c2_waddr), .out_wdata (c2_wdata),
    .sat_evt (sat_evt[2]), .clip_evt (cv2_clip)
  );

  bram_sdp #(.WIDTH(DW), .DEPTH(M2)) u_c2_bram (
    .clk (clk), .we (c2_we), .waddr (c2_waddr), .wdata (c2_wdata),
    .raddr (c2_raddr), .rdata (c2_rdata)
  );

  // ------------------------------------------------------ layer 3: pool2
  logic                   p2_we;
  logic [idx_w(FLAT)-1:0] p2_waddr, p2_raddr;
  data_t                  p2_wdata, p2_rdata;

  pool_layer #(.C (K2), .H (C2_H), .W (C2_W), .P (POOL), .PIPELINE (PIPELINE)) u_pool2 (
    .clk (clk), .rst_n (core_rst_n), .clear (layer_clear),
    .start (layer_start[3]), .busy (), .done (layer_done[3]),
    .in_raddr (c2_raddr), .in_rdata (c2_rdata),
    .out_we (p2_we), .out_waddr (p2_waddr), .out_wdata (p2_wdata)
  );

  bram_sdp #(.WIDTH(DW), .DEPTH(FLAT)) u_p2_bram (
    .clk (clk), .we (p2_we), .waddr (p2_waddr), .wdata (p2_wdata),
    .raddr (p2_raddr), .rdata (p2_rdata)
  );

  // ------------------------------------------- layer 4: flatten + fc1
  logic                 f1_we;
  logic [idx_w(N1)-1:0] f1_waddr, f1_raddr;
  data_t                f1_wdata, f1_rdata;
  logic                 fc1_clip;

  fc_layer #(
    .N_IN (FLAT), .N_OUT (N1), .W_BASE (FC1_W), .B_BASE (FC1_B), .WMEM_AW (WAW),
    .PIPELINE (PIPELINE), .RELU (1'b1)
  ) u_fc1 (
    .clk (clk), .rst_n (core_rst_n), .clear (layer_clear),
    .start (layer_start[4]), .busy (), .done (layer_done[4]),
    .in_raddr (p2_raddr), .in_rdata (p2_rdata),
    .w_raddr (fc1_w_raddr), .w_rdata (w_rdata),
    .out_we (f1_we), .out_waddr (f1_waddr), .out_wdata (f1_wdata),
    .sat_evt (sat_evt[4]), .clip_evt (fc1_clip)
  );

  bram_sdp #(.WIDTH(DW), .DEPTH(N1)) u_f1_bram (
    .clk (clk), .we (f1_we), .waddr (f1_waddr), .wdata (f1_wdata),
    .raddr (f1_raddr), .rdata (f1_rdata)
  );

  // ------------------------------------------------------ layer 5: fc2
  logic                 f2_we;
  logic [idx_w(N2)-1:0] f2_waddr, f2_raddr;
  data_t                f2_wdata, f2_rdata;
  logic                 fc2_clip;

  fc_layer #(
    .N_IN (N1), .N_OUT (N2), .W_BASE (FC2_W), .B_BASE (FC2_B), .WMEM_AW (WAW),
    .PIPELINE (PIPELINE), .RELU (1'b1)
  ) u_fc2 (
    .clk (clk), .rst_n (core_rst_n), .clear (layer_clear),
    .start (layer_start[5]), .busy (), .done (layer_done[5]),
    .in_raddr (f1_raddr), .in_rdata (f1_rdata),
    .w_raddr (fc2_w_raddr), .w_rdata (w_rdata),
    .out_we (f2_we), .out_waddr (f2_waddr), .out_wdata (f2_wdata),
    .sat_evt (sat_evt[5]), .clip_evt (fc2_clip)
  );

  bram_sdp #(.WIDTH(DW), .DEPTH(N2)) u_f2_bram (
    .clk (clk), .we (f2_we), .waddr (f2_waddr), .wdata (f2_wdata),
    .raddr (f2_raddr), .rdata (f2_rdata)
  );

  // ----------------------------------------- layer 6: fc3 (class scores)
  logic fc3_clip;

  fc_layer #(
    .N_IN (N2), .N_OUT (NCLS), .W_BASE (FC3_W), .B_BASE (FC3_B), .WMEM_AW (WAW),
    .PIPELINE (PIPELINE), .RELU (1'b0)
  ) u_fc3 (
    .clk (clk), .rst_n (core_rst_n), .clear (layer_clear),
    .start (layer_start[6]), .busy (), .done (layer_done[6]),
    .in_raddr (f2_raddr), .in_rdata (f2_rdata),
    .w_raddr (fc3_w_raddr), .w_rdata (w_rdata),
    .out_we (act_we), .out_waddr (act_waddr), .out_wdata (act_wdata),
    .sat_evt (sat_evt[6]), .clip_evt (fc3_clip)
  );

  // ------------------------------------------------- decision and control
  data_t scores [NCLS];
  data_t best_score;

  argmax_unit #(.NCLS (NCLS)) u_argmax (
    .clk (clk), .rst_n (core_rst_n), .clear (infer_start),
    .score_we (act_we), .score_idx (act_waddr), .score (act_wdata),
    .best_class (knowledge_class), .best_score (best_score), .scores (scores)
  );

  layer_sequencer #(.NL (NL)) u_seq (
    .clk (clk), .rst_n (core_rst_n),
    .start_req (start_pulse), .stop_req (stop_pulse), .auto_mode (auto_mode),
    .frame_ready (frame_ready), .layer_done (layer_done), .layer_start (layer_start),
    .clear_layers (clear_layers), .active (active), .busy (seq_busy), .armed (seq_armed),
    .frame_release (frame_release), .infer_start (infer_start), .done (seq_done),
    .cycles (cycles), .count (count)
  );

  assign knowledge_valid = seq_done;

  axil_regs #(.NCLS (NCLS), .NL (NL), .WMEM_AW (WAW)) u_regs (
    .clk (clk), .rst_n (rst_n),
    .s_axil_awaddr (s_axil_awaddr), .s_axil_awvalid (s_axil_awvalid), .s_axil_awready (s_axil_awready),
    .s_axil_wdata (s_axil_wdata), .s_axil_wvalid (s_axil_wvalid), .s_axil_wready (s_axil_wready),
    .s_axil_bresp (s_axil_bresp), .s_axil_bvalid (s_axil_bvalid), .s_axil_bready (s_axil_bready),
    .s_axil_araddr (s_axil_araddr), .s_axil_arvalid (s_axil_arvalid), .s_axil_arready (s_axil_arready),
    .s_axil_rdata (s_axil_rdata), .s_axil_rresp (s_axil_rresp), .s_axil_rvalid (s_axil_rvalid),
    .s_axil_rready (s_axil_rready),
    .start_pulse (start_pulse), .stop_pulse (stop_pulse), .srst_pulse (srst_pulse),
    .auto_mode (auto_mode), .w_we (w_we), .w_waddr (w_waddr), .w_wdata (w_wdata), .irq (irq),
    .busy (seq_busy), .armed (seq_armed), .frame_ready (frame_ready), .done_pulse (seq_done),
    .sat_evt (|sat_evt), .active (active), .result_class (knowledge_class),
    .cycles (cycles), .count (count), .scores (scores)
  );
endmodule
