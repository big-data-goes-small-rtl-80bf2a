// tb_conv_layer: checks the convolutional layer against the software model.
//
// Two instances read the same random input tensor (2 x 5 x 6) and weights:
// one with loop pipelining and stride 1, one without pipelining and with
// stride 2. Every output word and address is compared with tb_ref_pkg::conv,
// and the start-to-done time is checked: beats + 4 cycles when pipelined,
// 3 * beats + 2 when not (one beat per filter tap plus one bias beat per
// output). The pipelined run is also aborted half way with clear and rerun.
`timescale 1ns/1ps
module tb_conv_layer;
  import rflearn_pkg::*;
  import tb_ref_pkg::*;

  localparam int C = 2, H = 5, W = 6, F = 3, K = 3;
  localparam int WB = 0, BB = F * C * K * K, WN = BB + F;
  localparam int HO1 = 1 + (H + K - 2) / 1, WO1 = 1 + (W + K - 2) / 1;
  localparam int HO2 = 1 + (H + K - 2) / 2, WO2 = 1 + (W + K - 2) / 2;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int xin[];
  int wm[];
  data_t out1 [F * HO1 * WO1];
  data_t out2 [F * HO2 * WO2];
  int wr1 [F * HO1 * WO1];
  int wr2 [F * HO2 * WO2];

  logic clear, start1, start2, busy1, busy2, done1, done2;
  logic [idx_w(C*H*W)-1:0] ia1, ia2;
  logic [6:0] wa1, wa2;
  data_t id1, id2, wd1, wd2, od1, od2;
  logic we1, we2, sat1, sat2, clip1, clip2;
  logic [idx_w(F*HO1*WO1)-1:0] oa1;
  logic [idx_w(F*HO2*WO2)-1:0] oa2;

  conv_layer #(.C_IN(C), .H_IN(H), .W_IN(W), .F(F), .KH(K), .KW(K), .S(1),
               .W_BASE(WB), .B_BASE(BB), .WMEM_AW(7), .PIPELINE(1'b1), .RELU(1'b1)) dut1 (
    .clk, .rst_n, .clear, .start(start1), .busy(busy1), .done(done1),
    .in_raddr(ia1), .in_rdata(id1), .w_raddr(wa1), .w_rdata(wd1),
    .out_we(we1), .out_waddr(oa1), .out_wdata(od1), .sat_evt(sat1), .clip_evt(clip1));

  conv_layer #(.C_IN(C), .H_IN(H), .W_IN(W), .F(F), .KH(K), .KW(K), .S(2),
               .W_BASE(WB), .B_BASE(BB), .WMEM_AW(7), .PIPELINE(1'b0), .RELU(1'b0)) dut2 (
    .clk, .rst_n, .clear, .start(start2), .busy(busy2), .done(done2),
    .in_raddr(ia2), .in_rdata(id2), .w_raddr(wa2), .w_rdata(wd2),
    .out_we(we2), .out_waddr(oa2), .out_wdata(od2), .sat_evt(sat2), .clip_evt(clip2));

  // memories with one cycle of read latency
  always_ff @(posedge clk) begin
    id1 <= data_t'(xin[ia1]);
    id2 <= data_t'(xin[ia2]);
    wd1 <= data_t'(wm[wa1]);
    wd2 <= data_t'(wm[wa2]);
    if (we1) begin out1[oa1] <= od1; wr1[oa1] <= wr1[oa1] + 1; end
    if (we2) begin out2[oa2] <= od2; wr2[oa2] <= wr2[oa2] + 1; end
  end

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic run(int which, output int cyc);
    cyc = 0;
    @(negedge clk);
    if (which == 1) start1 = 1; else start2 = 1;
    @(negedge clk);
    start1 = 0; start2 = 0;
    cyc = 1;
    while (!(which == 1 ? done1 : done2)) begin
      @(negedge clk);
      cyc++;
    end
  endtask

  initial begin
    int y[];
    int ho, wo, ns, cyc;
    clear = 0; start1 = 0; start2 = 0;
    xin = new[C * H * W];
    wm = new[128];
    foreach (xin[k]) xin[k] = srand(600);
    foreach (wm[k]) wm[k] = srand(90);
    repeat (3) @(posedge clk);
    rst_n = 1;

    // aborted run, then a full one
    @(negedge clk); start1 = 1; @(negedge clk); start1 = 0;
    repeat (40) @(negedge clk);
    check(busy1, "busy during run");
    clear = 1; @(negedge clk); clear = 0;
    check(!busy1, "clear aborts");
    foreach (wr1[k]) wr1[k] = 0;
    run(1, cyc);
    check(cyc == F * HO1 * WO1 * (1 + C * K * K) + 4,
          $sformatf("pipelined latency %0d", cyc));
    ns = 0;
    conv(xin, C, H, W, wm, F, K, 1, WB, BB, 1, y, ho, wo, ns);
    check(ho == HO1 && wo == WO1, "output size");
    for (int k = 0; k < F * HO1 * WO1; k++) begin
      check(int'(out1[k]) == y[k], $sformatf("s1 out %0d = %0d expected %0d", k, out1[k], y[k]));
      check(wr1[k] == 1, "each output written once");
    end

    foreach (wr2[k]) wr2[k] = 0;
    run(2, cyc);
    check(cyc == 3 * F * HO2 * WO2 * (1 + C * K * K) + 2,
          $sformatf("unpipelined latency %0d", cyc));
    conv(xin, C, H, W, wm, F, K, 2, WB, BB, 0, y, ho, wo, ns);
    for (int k = 0; k < F * HO2 * WO2; k++) begin
      check(int'(out2[k]) == y[k], $sformatf("s2 out %0d = %0d expected %0d", k, out2[k], y[k]));
      check(wr2[k] == 1, "each output written once (s2)");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
