// tb_fc_layer: checks the fully-connected layer against the software model.
//
// A hidden layer (20 inputs, 7 neurons, ReLU, pipelined) and an output layer
// (same weights, linear, unpipelined) are compared output by output with
// tb_ref_pkg::dense; a second round with large weights must saturate, and
// the sat_evt count must match the model's. Latencies: beats + 4 and
// 3 * beats + 2 with 1 + N_IN beats per neuron.
`timescale 1ns/1ps
module tb_fc_layer;
  import rflearn_pkg::*;
  import tb_ref_pkg::*;

  localparam int NI = 20, NO = 7, WB = 3, BB = WB + NI * NO;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int xin[];
  int wm[];
  data_t out1 [NO];
  data_t out2 [NO];
  logic clear, start1, start2, busy1, busy2, done1, done2, we1, we2, sat1, sat2, clip1, clip2;
  logic [idx_w(NI)-1:0] ia1, ia2;
  logic [7:0] wa1, wa2;
  logic [idx_w(NO)-1:0] oa1, oa2;
  data_t id1, id2, wd1, wd2, od1, od2;
  int nsat1, nclip1;

  fc_layer #(.N_IN(NI), .N_OUT(NO), .W_BASE(WB), .B_BASE(BB), .WMEM_AW(8),
             .PIPELINE(1'b1), .RELU(1'b1)) dut1 (
    .clk, .rst_n, .clear, .start(start1), .busy(busy1), .done(done1),
    .in_raddr(ia1), .in_rdata(id1), .w_raddr(wa1), .w_rdata(wd1),
    .out_we(we1), .out_waddr(oa1), .out_wdata(od1), .sat_evt(sat1), .clip_evt(clip1));
  fc_layer #(.N_IN(NI), .N_OUT(NO), .W_BASE(WB), .B_BASE(BB), .WMEM_AW(8),
             .PIPELINE(1'b0), .RELU(1'b0)) dut2 (
    .clk, .rst_n, .clear, .start(start2), .busy(busy2), .done(done2),
    .in_raddr(ia2), .in_rdata(id2), .w_raddr(wa2), .w_rdata(wd2),
    .out_we(we2), .out_waddr(oa2), .out_wdata(od2), .sat_evt(sat2), .clip_evt(clip2));

  always_ff @(posedge clk) begin
    id1 <= data_t'(xin[ia1]);
    id2 <= data_t'(xin[ia2]);
    wd1 <= data_t'(wm[wa1]);
    wd2 <= data_t'(wm[wa2]);
    if (we1) out1[oa1] <= od1;
    if (we2) out2[oa2] <= od2;
    if (sat1) nsat1++;
    if (clip1) nclip1++;
  end

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic run(int which, output int cyc);
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
    int y1[], y2[];
    int ns1, ns2, cyc, nneg;
    clear = 0; start1 = 0; start2 = 0;
    xin = new[NI];
    wm = new[256];
    for (int round = 0; round < 2; round++) begin
      foreach (xin[k]) xin[k] = srand(round == 0 ? 700 : 20000);
      foreach (wm[k]) wm[k] = srand(round == 0 ? 200 : 30000);
      nsat1 = 0; nclip1 = 0; ns1 = 0; ns2 = 0;
      if (round == 0) begin
        repeat (3) @(posedge clk);
        rst_n = 1;
      end
      dense(xin, NI, wm, NO, WB, BB, 1, y1, ns1);
      dense(xin, NI, wm, NO, WB, BB, 0, y2, ns2);
      run(1, cyc);
      check(cyc == NO * (1 + NI) + 4, $sformatf("pipelined latency %0d", cyc));
      run(2, cyc);
      check(cyc == 3 * NO * (1 + NI) + 2, $sformatf("unpipelined latency %0d", cyc));
      nneg = 0;
      for (int k = 0; k < NO; k++) begin
        check(int'(out1[k]) == y1[k], $sformatf("relu out %0d = %0d expected %0d", k, out1[k], y1[k]));
        check(int'(out2[k]) == y2[k], $sformatf("linear out %0d = %0d expected %0d", k, out2[k], y2[k]));
        if (y2[k] < 0) nneg++;
      end
      check(nsat1 == ns1, $sformatf("saturation events %0d, model %0d", nsat1, ns1));
      check(nclip1 == nneg, $sformatf("clip events %0d, model %0d", nclip1, nneg));
      if (round == 1) check(ns1 > 0, "large weights saturate");
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
