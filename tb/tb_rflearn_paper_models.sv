// tb_rflearn_paper_models: the model variants of the evaluation, run at
// their real sizes on the core built with its default parameters.
//
// The core is built for the largest evaluated model (32 x 32 x 2 input,
// 24-12 kernels, 16-8 neurons, 5 classes). The smaller evaluated models run
// on it with their unused kernels and neurons given zero weights and biases
// and every unused class the most negative bias (see tb_rflearn_variants for
// why this is exact). Models run here, as kernels / neurons / classes:
//   24-12 / 16-8 / 5   modulation recognition, the main model
//   18-9  / 16-8 / 5   and 12-6 / 6-3 / 5, smaller modulation models
//   18-9  / 6-3  / 4   four-class modulation subsets
//   24-12 / 12-6 / 3   OFDM FFT-size recognition (64, 128, 256)
// Each is compared bit for bit with a reference model evaluated at the
// model's own sizes. Two cores run side by side, one with the defaults
// untouched (loop pipelining on) and one with only PIPELINE = 0, so every
// model also runs as the unoptimised loop; the latency register must read
// BEATS + 6 per layer and 3 * BEATS + 4 per layer (998,387 and 2,995,063
// cycles).
`timescale 1ns/1ps
module tb_rflearn_paper_models;
  import tb_ref_pkg::*;

  localparam int IN_ROWS = 32, IN_COLS = 32, KS = 3, ST = 1, PL = 3;
  localparam int K1 = 24, K2 = 12, N1 = 16, N2 = 8, NCLS = 5;
  localparam int NSAMP = IN_ROWS * IN_COLS;
  localparam int C1H = 1 + (IN_ROWS + KS - 2) / ST, C1W = 1 + (IN_COLS + KS - 2) / ST;
  localparam int P1H = C1H / PL, P1W = C1W / PL;
  localparam int C2H = 1 + (P1H + KS - 2) / ST, C2W = 1 + (P1W + KS - 2) / ST;
  localparam int P2H = C2H / PL, P2W = C2W / PL;
  localparam int PP = P2H * P2W;
  localparam int FLAT = K2 * PP;
  localparam int CV1_W = 0, CV1_B = CV1_W + K1 * 2 * KS * KS;
  localparam int CV2_W = CV1_B + K1, CV2_B = CV2_W + K2 * K1 * KS * KS;
  localparam int FC1_W = CV2_B + K2, FC1_B = FC1_W + N1 * FLAT;
  localparam int FC2_W = FC1_B + N1, FC2_B = FC2_W + N2 * N1;
  localparam int FC3_W = FC2_B + N2, FC3_B = FC3_W + NCLS * N2;
  localparam int WTOT = FC3_B + NCLS;
  localparam int BEATS = K1 * C1H * C1W * (1 + 2 * KS * KS) + K1 * P1H * P1W * PL * PL
                       + K2 * C2H * C2W * (1 + K1 * KS * KS) + K2 * P2H * P2W * PL * PL
                       + N1 * (1 + FLAT) + N2 * (1 + N1) + NCLS * (1 + N2);
  localparam int LAT_PIPE  = BEATS + 7 * 6;
  localparam int LAT_NOPIP = 3 * BEATS + 7 * 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  // one bus per core: index 0 pipelined, index 1 not
  logic [7:0]  awaddr [2], araddr [2];
  logic        awvalid [2], wvalid [2], bready [2], arvalid [2], rready [2];
  logic [31:0] wdata [2];
  logic        awready [2], wready [2], bvalid [2], arready [2], rvalid [2];
  logic [1:0]  bresp [2], rresp [2];
  logic [31:0] rdata [2];
  logic [31:0] tdata [2];
  logic        tvalid [2], tready [2];
  logic        act_we [2], kvalid [2], irq [2];
  logic [2:0]  act_waddr [2], kclass [2];
  logic signed [15:0] act_wdata [2];

  // core 0: every parameter at its default
  rflearn_learning_core dut0 (
      .clk (clk), .rst_n (rst_n),
      .s_axil_awaddr (awaddr[0]), .s_axil_awvalid (awvalid[0]), .s_axil_awready (awready[0]),
      .s_axil_wdata (wdata[0]), .s_axil_wvalid (wvalid[0]), .s_axil_wready (wready[0]),
      .s_axil_bresp (bresp[0]), .s_axil_bvalid (bvalid[0]), .s_axil_bready (bready[0]),
      .s_axil_araddr (araddr[0]), .s_axil_arvalid (arvalid[0]), .s_axil_arready (arready[0]),
      .s_axil_rdata (rdata[0]), .s_axil_rresp (rresp[0]), .s_axil_rvalid (rvalid[0]),
      .s_axil_rready (rready[0]),
      .s_axis_tdata (tdata[0]), .s_axis_tvalid (tvalid[0]), .s_axis_tready (tready[0]),
      .act_we (act_we[0]), .act_waddr (act_waddr[0]), .act_wdata (act_wdata[0]),
      .knowledge_valid (kvalid[0]), .knowledge_class (kclass[0]), .irq (irq[0])
  );

  // core 1: the same core without loop pipelining
  rflearn_learning_core #(.PIPELINE (1'b0)) dut1 (
      .clk (clk), .rst_n (rst_n),
      .s_axil_awaddr (awaddr[1]), .s_axil_awvalid (awvalid[1]), .s_axil_awready (awready[1]),
      .s_axil_wdata (wdata[1]), .s_axil_wvalid (wvalid[1]), .s_axil_wready (wready[1]),
      .s_axil_bresp (bresp[1]), .s_axil_bvalid (bvalid[1]), .s_axil_bready (bready[1]),
      .s_axil_araddr (araddr[1]), .s_axil_arvalid (arvalid[1]), .s_axil_arready (arready[1]),
      .s_axil_rdata (rdata[1]), .s_axil_rresp (rresp[1]), .s_axil_rvalid (rvalid[1]),
      .s_axil_rready (rready[1]),
      .s_axis_tdata (tdata[1]), .s_axis_tvalid (tvalid[1]), .s_axis_tready (tready[1]),
      .act_we (act_we[1]), .act_waddr (act_waddr[1]), .act_wdata (act_wdata[1]),
      .knowledge_valid (kvalid[1]), .knowledge_class (kclass[1]), .irq (irq[1])
  );

  int checks = 0, failures = 0;
  int wm[];          // core weight map (padded model)
  int ws[];          // the smaller model, in its own compact map
  int n_models = 0, n_fewer_classes = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic axil_write(int u, logic [7:0] a, logic [31:0] d);
    @(negedge clk);
    awaddr[u] = a; wdata[u] = d; awvalid[u] = 1; wvalid[u] = 1;
    do @(posedge clk); while (!awready[u]);
    @(negedge clk);
    awvalid[u] = 0; wvalid[u] = 0; bready[u] = 1;
    while (!bvalid[u]) @(negedge clk);
    check(bresp[u] == 2'b00, "write response OKAY");
    @(negedge clk);
    bready[u] = 0;
  endtask

  task automatic axil_read(int u, logic [7:0] a, output logic [31:0] d);
    @(negedge clk);
    araddr[u] = a; arvalid[u] = 1;
    do @(posedge clk); while (!arready[u]);
    @(negedge clk);
    arvalid[u] = 0; rready[u] = 1;
    while (!rvalid[u]) @(negedge clk);
    d = rdata[u];
    @(negedge clk);
    rready[u] = 0;
  endtask

  task automatic send_frame(int u, ref int fi[], ref int fq[]);
    for (int t = 0; t < NSAMP; t++) begin
      @(negedge clk);
      tvalid[u] = 1;
      tdata[u]  = {fq[t][15:0], fi[t][15:0]};
      do @(posedge clk); while (!tready[u]);
    end
    @(negedge clk);
    tvalid[u] = 0;
  endtask

  task automatic run_one(int u, ref int fi[], ref int fq[], input int lat);
    int n = 0;
    axil_write(u, 8'h08, 0);
    for (int k = 0; k < WTOT; k++) axil_write(u, 8'h0C, 32'(wm[k]));
    axil_write(u, 8'h00, 32'h1);
    send_frame(u, fi, fq);
    while (!irq[u] && n < 4000000) begin
      @(posedge clk);
      n++;
    end
    check(irq[u] == 1'b1, $sformatf("core %0d finished", u));
  endtask

  // one smaller model: k1 / k2 kernels, n1 / n2 neurons, nc classes
  task automatic trial(int k1, int k2, int n1, int n2, int nc);
    int fi[], fq[], x[], a[], b[], sc[];
    int ho, wo, nsat, cls, flat_s;
    int sw1, sb1, sw2, sb2, sf1w, sf1b, sf2w, sf2b, sf3w, sf3b, stot;
    logic [31:0] d;
    flat_s = k2 * PP;
    // compact map of the smaller model
    sw1 = 0;                 sb1 = sw1 + k1 * 2 * KS * KS;
    sw2 = sb1 + k1;          sb2 = sw2 + k2 * k1 * KS * KS;
    sf1w = sb2 + k2;         sf1b = sf1w + n1 * flat_s;
    sf2w = sf1b + n1;        sf2b = sf2w + n2 * n1;
    sf3w = sf2b + n2;        sf3b = sf3w + nc * n2;
    stot = sf3b + nc;
    ws = new[stot];
    foreach (ws[k]) ws[k] = srand(16);
    for (int f = 0; f < k1; f++) ws[sb1 + f] = srand(128);

    // embed it into the core's map, zero everywhere else
    wm = new[WTOT];
    foreach (wm[k]) wm[k] = 0;
    for (int f = 0; f < k1; f++) begin
      for (int t = 0; t < 2 * KS * KS; t++) wm[CV1_W + f * 2 * KS * KS + t] = ws[sw1 + f * 2 * KS * KS + t];
      wm[CV1_B + f] = ws[sb1 + f];
    end
    for (int f = 0; f < k2; f++) begin
      for (int c = 0; c < k1; c++)
        for (int t = 0; t < KS * KS; t++)
          wm[CV2_W + (f * K1 + c) * KS * KS + t] = ws[sw2 + (f * k1 + c) * KS * KS + t];
      wm[CV2_B + f] = ws[sb2 + f];
    end
    // channel-major flatten: input c*PP + p of the smaller model is the same index here
    for (int n = 0; n < n1; n++) begin
      for (int i = 0; i < flat_s; i++) wm[FC1_W + n * FLAT + i] = ws[sf1w + n * flat_s + i];
      wm[FC1_B + n] = ws[sf1b + n];
    end
    for (int n = 0; n < n2; n++) begin
      for (int i = 0; i < n1; i++) wm[FC2_W + n * N1 + i] = ws[sf2w + n * n1 + i];
      wm[FC2_B + n] = ws[sf2b + n];
    end
    for (int n = 0; n < NCLS; n++) begin
      if (n < nc) begin
        for (int i = 0; i < n2; i++) wm[FC3_W + n * N2 + i] = ws[sf3w + n * n2 + i];
        wm[FC3_B + n] = ws[sf3b + n];
      end else begin
        wm[FC3_B + n] = -32768;
      end
    end

    // frame and the smaller model's answer
    fi = new[NSAMP];
    fq = new[NSAMP];
    x = new[2 * NSAMP];
    for (int t = 0; t < NSAMP; t++) begin
      fi[t] = srand(512);
      fq[t] = srand(512);
      x[t] = fi[t];
      x[NSAMP + t] = fq[t];
    end
    nsat = 0;
    conv(x, 2, IN_ROWS, IN_COLS, ws, k1, KS, ST, sw1, sb1, 1, a, ho, wo, nsat);
    maxpool(a, k1, ho, wo, PL, b, ho, wo);
    conv(b, k1, ho, wo, ws, k2, KS, ST, sw2, sb2, 1, a, ho, wo, nsat);
    maxpool(a, k2, ho, wo, PL, b, ho, wo);
    dense(b, flat_s, ws, n1, sf1w, sf1b, 1, a, nsat);
    dense(a, n1, ws, n2, sf2w, sf2b, 1, b, nsat);
    dense(b, n2, ws, nc, sf3w, sf3b, 0, sc, nsat);
    cls = 0;
    for (int k = 1; k < nc; k++) if (sc[k] > sc[cls]) cls = k;

    fork
      run_one(0, fi, fq, LAT_PIPE);
      run_one(1, fi, fq, LAT_NOPIP);
    join

    for (int u = 0; u < 2; u++) begin
      string tag;
      tag = $sformatf("model %0d-%0d/%0d-%0d/%0d core %0d", k1, k2, n1, n2, nc, u);
      axil_read(u, 8'h10, d);
      check(d[31] == 1'b1, {tag, ": result valid"});
      check(int'(d[7:0]) == cls, $sformatf("%s: class %0d expected %0d", tag, d[7:0], cls));
      for (int k = 0; k < NCLS; k++) begin
        axil_read(u, 8'(8'h40 + 4 * k), d);
        if (k < nc)
          check($signed(d) == sc[k], $sformatf("%s: score %0d = %0d expected %0d", tag, k, $signed(d), sc[k]));
        else
          check($signed(d) == -32768, $sformatf("%s: unused class %0d score %0d", tag, k, $signed(d)));
      end
      axil_read(u, 8'h14, d);
      check(int'(d) == (u == 0 ? LAT_PIPE : LAT_NOPIP),
            $sformatf("%s: latency %0d cycles, expected %0d", tag, d, (u == 0 ? LAT_PIPE : LAT_NOPIP)));
      axil_read(u, 8'h04, d);
      check(d[3] == (nsat > 0), $sformatf("%s: saturation flag %0d, model %0d", tag, d[3], nsat));
    end
    n_models++;
    if (nc < NCLS) n_fewer_classes++;
  endtask

  initial begin
    for (int u = 0; u < 2; u++) begin
      awvalid[u] = 0; wvalid[u] = 0; bready[u] = 0; arvalid[u] = 0; rready[u] = 0;
      awaddr[u] = 0; araddr[u] = 0; wdata[u] = 0; tvalid[u] = 0; tdata[u] = 0;
    end
    repeat (5) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);

    trial(24, 12, 16, 8, 5);
    trial(18, 9, 16, 8, 5);
    trial(12, 6, 6, 3, 5);
    trial(18, 9, 6, 3, 4);
    trial(24, 12, 12, 6, 3);
    check(n_models == 5, "all models run");
    check(n_fewer_classes == 2, "models with fewer classes run");
    $display("latency: pipelined %0d cycles, unpipelined %0d cycles", LAT_PIPE, LAT_NOPIP);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
