// tb_pool_layer: checks max pooling against the software model.
//
// A 3 x 8 x 7 random map is pooled with P = 3 (partial regions at the right
// and bottom dropped) by a pipelined and an unpipelined instance; every output
// is compared with tb_ref_pkg::maxpool and the start-to-done time is checked
// (beats + 4 and 3 * beats + 2, with P*P beats per output).
`timescale 1ns/1ps
module tb_pool_layer;
  import rflearn_pkg::*;
  import tb_ref_pkg::*;

  localparam int C = 3, H = 8, W = 7, P = 3, HO = H / P, WO = W / P, NO = C * HO * WO;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int xin[];
  data_t out1 [NO];
  data_t out2 [NO];
  logic clear, start1, start2, busy1, busy2, done1, done2, we1, we2;
  logic [idx_w(C*H*W)-1:0] ia1, ia2;
  logic [idx_w(NO)-1:0] oa1, oa2;
  data_t id1, id2, od1, od2;

  pool_layer #(.C(C), .H(H), .W(W), .P(P), .PIPELINE(1'b1)) dut1 (
    .clk, .rst_n, .clear, .start(start1), .busy(busy1), .done(done1),
    .in_raddr(ia1), .in_rdata(id1), .out_we(we1), .out_waddr(oa1), .out_wdata(od1));
  pool_layer #(.C(C), .H(H), .W(W), .P(P), .PIPELINE(1'b0)) dut2 (
    .clk, .rst_n, .clear, .start(start2), .busy(busy2), .done(done2),
    .in_raddr(ia2), .in_rdata(id2), .out_we(we2), .out_waddr(oa2), .out_wdata(od2));

  always_ff @(posedge clk) begin
    id1 <= data_t'(xin[ia1]);
    id2 <= data_t'(xin[ia2]);
    if (we1) out1[oa1] <= od1;
    if (we2) out2[oa2] <= od2;
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
    int y[];
    int ho, wo, cyc;
    clear = 0; start1 = 0; start2 = 0;
    xin = new[C * H * W];
    foreach (xin[k]) xin[k] = srand(30000);
    for (int k = 0; k < NO; k++) begin out1[k] = '0; out2[k] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    maxpool(xin, C, H, W, P, y, ho, wo);
    run(1, cyc);
    check(cyc == NO * P * P + 4, $sformatf("pipelined latency %0d", cyc));
    run(2, cyc);
    check(cyc == 3 * NO * P * P + 2, $sformatf("unpipelined latency %0d", cyc));
    for (int k = 0; k < NO; k++) begin
      check(int'(out1[k]) == y[k], $sformatf("out %0d = %0d expected %0d", k, out1[k], y[k]));
      check(int'(out2[k]) == y[k], $sformatf("out2 %0d = %0d expected %0d", k, out2[k], y[k]));
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
