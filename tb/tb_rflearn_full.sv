// tb_rflearn_full: one complete inference of the learning core at its
// default sizes (32 x 32 x 2 input, 24 / 12 kernels, 16 / 8 neurons,
// 5 classes, loop pipelining on), with no parameter overridden.
//
// Loads all 6329 weights over AXI-Lite, streams one 1024-sample I/Q frame,
// starts the core, and compares the class, all scores, the actuation-memory
// writes and the latency register with the software model in tb_ref_pkg.
// A second frame is then classified in auto mode after a weight reload.
`timescale 1ns/1ps
module tb_rflearn_full;
  import tb_ref_pkg::*;

  localparam int IN_ROWS = 32, IN_COLS = 32, KS = 3, ST = 1, PL = 3;
  localparam int K1 = 24, K2 = 12, N1 = 16, N2 = 8, NCLS = 5;
  localparam int NSAMP = IN_ROWS * IN_COLS;
  localparam int C1H = 1 + (IN_ROWS + KS - 2) / ST, C1W = 1 + (IN_COLS + KS - 2) / ST;
  localparam int P1H = C1H / PL, P1W = C1W / PL;
  localparam int C2H = 1 + (P1H + KS - 2) / ST, C2W = 1 + (P1W + KS - 2) / ST;
  localparam int P2H = C2H / PL, P2W = C2W / PL;
  localparam int FLAT = K2 * P2H * P2W;
  localparam int CV1_W = 0, CV1_B = CV1_W + K1 * 2 * KS * KS;
  localparam int CV2_W = CV1_B + K1, CV2_B = CV2_W + K2 * K1 * KS * KS;
  localparam int FC1_W = CV2_B + K2, FC1_B = FC1_W + N1 * FLAT;
  localparam int FC2_W = FC1_B + N1, FC2_B = FC2_W + N2 * N1;
  localparam int FC3_W = FC2_B + N2, FC3_B = FC3_W + NCLS * N2;
  localparam int WTOT = FC3_B + NCLS;
  // beats per layer (bias + taps per output, P*P per pooled output)
  localparam int BEATS = K1 * C1H * C1W * (1 + 2 * KS * KS) + K1 * P1H * P1W * PL * PL
                       + K2 * C2H * C2W * (1 + K1 * KS * KS) + K2 * P2H * P2W * PL * PL
                       + N1 * (1 + FLAT) + N2 * (1 + N1) + NCLS * (1 + N2);
  localparam int PER_LAYER = 6;  // start pulse, pipeline fill/drain, done handshake

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [7:0]  awaddr, araddr;
  logic        awvalid, wvalid, bready, arvalid, rready;
  logic [31:0] wdata;
  logic        awready, wready, bvalid, arready, rvalid;
  logic [1:0]  bresp, rresp;
  logic [31:0] rdata;
  logic [31:0] tdata;
  logic        tvalid, tready;
  logic        act_we, kvalid, irq;
  logic [2:0]  act_waddr, kclass;
  logic signed [15:0] act_wdata;

  rflearn_learning_core dut (
    .clk (clk), .rst_n (rst_n),
    .s_axil_awaddr (awaddr), .s_axil_awvalid (awvalid), .s_axil_awready (awready),
    .s_axil_wdata (wdata), .s_axil_wvalid (wvalid), .s_axil_wready (wready),
    .s_axil_bresp (bresp), .s_axil_bvalid (bvalid), .s_axil_bready (bready),
    .s_axil_araddr (araddr), .s_axil_arvalid (arvalid), .s_axil_arready (arready),
    .s_axil_rdata (rdata), .s_axil_rresp (rresp), .s_axil_rvalid (rvalid), .s_axil_rready (rready),
    .s_axis_tdata (tdata), .s_axis_tvalid (tvalid), .s_axis_tready (tready),
    .act_we (act_we), .act_waddr (act_waddr), .act_wdata (act_wdata),
    .knowledge_valid (kvalid), .knowledge_class (kclass), .irq (irq)
  );

  int checks = 0, failures = 0;
  int wm[];
  int act_mem[NCLS];
  int n_kvalid = 0, last_kclass = 0;
  // mechanism counters
  int m_stall = 0, m_armed = 0, m_overlap = 0, m_auto = 0, m_stop = 0, m_srst = 0;
  int m_reload = 0, m_sat = 0, m_clip = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // AXI-Lite protocol rules seen from the master side
  always @(posedge clk) if (rst_n) begin
    if (bvalid) assert (bresp == 2'b00) else begin failures++; $display("FAIL: bresp"); end
    if (rvalid) assert (rresp == 2'b00) else begin failures++; $display("FAIL: rresp"); end
  end

  // monitors
  always @(posedge clk) if (rst_n) begin
    if (tvalid && !tready) m_stall++;
    if (dut.u_seq.armed && !dut.frame_ready) m_armed++;
    if (dut.u_seq.busy && dut.u_s2b.bram_we) m_overlap++;
    if (dut.u_conv1.clip_evt || dut.u_conv2.clip_evt || dut.u_fc1.clip_evt) m_clip++;
    if (act_we) act_mem[act_waddr] = int'(act_wdata);
    if (kvalid) begin
      n_kvalid++;
      last_kclass = int'(kclass);
    end
  end

  task automatic axil_write(logic [7:0] a, logic [31:0] d);
    @(negedge clk);
    awaddr = a; wdata = d; awvalid = 1; wvalid = 1;
    do @(posedge clk); while (!awready);
    @(negedge clk);
    awvalid = 0; wvalid = 0; bready = 1;
    while (!bvalid) @(negedge clk);
    @(negedge clk);
    bready = 0;
  endtask

  task automatic axil_read(logic [7:0] a, output logic [31:0] d);
    @(negedge clk);
    araddr = a; arvalid = 1;
    do @(posedge clk); while (!arready);
    @(negedge clk);
    arvalid = 0; rready = 1;
    while (!rvalid) @(negedge clk);
    d = rdata;
    @(negedge clk);
    rready = 0;
  endtask

  task automatic load_weights(int wlim, int blim);
    wm = new[WTOT];
    foreach (wm[k]) wm[k] = srand(wlim);
    for (int f = 0; f < K1; f++) wm[CV1_B + f] = srand(blim);
    axil_write(8'h08, 0);
    for (int k = 0; k < WTOT; k++) axil_write(8'h0C, 32'(wm[k]));
  endtask

  // frame generator: I and Q words of NSAMP samples
  typedef struct { int i[]; int q[]; } frame_t;

  function automatic frame_t make_frame(int lim);
    frame_t fr;
    fr.i = new[NSAMP];
    fr.q = new[NSAMP];
    for (int t = 0; t < NSAMP; t++) begin
      fr.i[t] = srand(lim);
      fr.q[t] = srand(lim);
    end
    return fr;
  endfunction

  task automatic send_frame(frame_t fr);
    for (int t = 0; t < NSAMP; t++) begin
      @(negedge clk);
      while ($urandom_range(3) == 0) begin
        tvalid = 0;
        @(negedge clk);
      end
      tvalid = 1;
      tdata  = {fr.q[t][15:0], fr.i[t][15:0]};
      do @(posedge clk); while (!tready);
    end
    @(negedge clk);
    tvalid = 0;
  endtask

  // expected scores of a frame
  function automatic void reference(frame_t fr, ref int sc[], output int cls, output int nsat);
    int x[], a[], b[];
    int ho, wo;
    nsat = 0;
    x = new[2 * NSAMP];
    for (int t = 0; t < NSAMP; t++) begin
      x[t] = fr.i[t];
      x[NSAMP + t] = fr.q[t];
    end
    conv(x, 2, IN_ROWS, IN_COLS, wm, K1, KS, ST, CV1_W, CV1_B, 1, a, ho, wo, nsat);
    maxpool(a, K1, ho, wo, PL, b, ho, wo);
    conv(b, K1, ho, wo, wm, K2, KS, ST, CV2_W, CV2_B, 1, a, ho, wo, nsat);
    maxpool(a, K2, ho, wo, PL, b, ho, wo);
    dense(b, FLAT, wm, N1, FC1_W, FC1_B, 1, a, nsat);
    dense(a, N1, wm, N2, FC2_W, FC2_B, 1, b, nsat);
    dense(b, N2, wm, NCLS, FC3_W, FC3_B, 0, sc, nsat);
    cls = 0;
    for (int k = 1; k < NCLS; k++) if (sc[k] > sc[cls]) cls = k;
  endfunction

  task automatic wait_irq();
    int n = 0;
    while (!irq && n < 4000000) begin
      @(posedge clk);
      n++;
    end
    check(irq == 1'b1, "inference finished");
  endtask

  task automatic check_result(frame_t fr, string tag, bit check_act);
    int sc[];
    int cls, nsat;
    logic [31:0] d;
    reference(fr, sc, cls, nsat);
    axil_read(8'h10, d);
    check(d[31] == 1'b1, {tag, ": result valid"});
    check(int'(d[7:0]) == cls, $sformatf("%s: class %0d expected %0d", tag, d[7:0], cls));
    check(last_kclass == cls, {tag, ": knowledge output"});
    for (int k = 0; k < NCLS; k++) begin
      axil_read(8'(8'h40 + 4 * k), d);
      check($signed(d) == sc[k], $sformatf("%s: score %0d = %0d expected %0d", tag, k, $signed(d), sc[k]));
      if (check_act) check(act_mem[k] == sc[k], {tag, ": actuation memory"});
    end
    axil_read(8'h14, d);
    check(int'(d) == BEATS + 7 * PER_LAYER,
          $sformatf("%s: latency %0d cycles, expected %0d", tag, d, BEATS + 7 * PER_LAYER));
    axil_read(8'h04, d);
    check(d[3] == (nsat > 0), $sformatf("%s: saturation flag %0d, model %0d", tag, d[3], nsat));
    if (nsat > 0) m_sat++;
  endtask

  initial begin
    frame_t f1, f2;
    logic [31:0] d;
    int k0;
    awvalid = 0; wvalid = 0; bready = 0; arvalid = 0; rready = 0;
    awaddr = 0; araddr = 0; wdata = 0; tvalid = 0; tdata = 0;
    repeat (5) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);

    // one inference started by the controller
    load_weights(16, 128);
    f1 = make_frame(512);
    f2 = make_frame(512);
    axil_write(8'h00, 32'h1);
    fork
      send_frame(f1);
      wait_irq();
    join
    check_result(f1, "full frame1", 1);

    // a second model, and a frame classified in auto mode
    load_weights(12, 64);
    k0 = n_kvalid;
    axil_write(8'h00, 32'h8);
    send_frame(f2);
    while (n_kvalid == k0) @(posedge clk);
    check_result(f2, "full frame2 auto", 1);
    $display("latency of one inference: %0d cycles", BEATS + 7 * PER_LAYER);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (8000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
