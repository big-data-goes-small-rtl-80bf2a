// tb_rll_unit: checks requantisation, saturation and ReLU of the layer
// output stage on directed corner values and 20000 random accumulators,
// against tb_ref_pkg::requant computed on 64-bit integers.
`timescale 1ns/1ps
module tb_rll_unit;
  import rflearn_pkg::*;
  import tb_ref_pkg::*;

  acc_t  acc;
  logic  relu_en;
  data_t y;
  logic  sat, clipped;

  rll_unit dut (.acc, .relu_en, .y, .sat, .clipped);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic try(longint a, bit r);
    int e;
    acc = acc_t'(a);
    relu_en = r;
    #1;
    e = requant(a, r);
    check(int'(y) == e, $sformatf("acc %0d relu %0d: y %0d expected %0d", a, r, y, e));
    check(sat == would_sat(a), $sformatf("acc %0d: sat %0d", a, sat));
    check(clipped == (r && (a >>> 8) < 0), $sformatf("acc %0d: clipped %0d", a, clipped));
  endtask

  initial begin
    longint corner [10] = '{0, 255, 256, -1, -256, -257, 32767 * 256 + 255, 32768 * 256,
                            -32768 * 256, -32768 * 256 - 1};
    foreach (corner[k]) begin
      try(corner[k], 0);
      try(corner[k], 1);
    end
    for (int n = 0; n < 20000; n++) begin
      longint a;
      a = longint'($signed({$urandom(), $urandom()})) >>> $urandom_range(40);
      if (a > 64'sd549755813887) a = 64'sd549755813887;
      if (a < -64'sd549755813888) a = -64'sd549755813888;
      try(a, 1'($urandom_range(1)));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
