// tb_bram_sdp: checks the block RAM: one-cycle read latency, write then read
// back of random data at random addresses, and old data returned when the
// address being read is written in the same cycle.
`timescale 1ns/1ps
module tb_bram_sdp;
  localparam int WIDTH = 16, DEPTH = 200;

  logic clk = 0;
  always #5 clk = ~clk;
  logic we;
  logic [7:0] waddr, raddr;
  logic [WIDTH-1:0] wdata, rdata;
  logic [WIDTH-1:0] model [DEPTH];

  bram_sdp #(.WIDTH(WIDTH), .DEPTH(DEPTH)) dut (.clk, .we, .waddr, .wdata, .raddr, .rdata);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    we = 0; waddr = 0; raddr = 0; wdata = 0;
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      we = 1; waddr = 8'(a); wdata = WIDTH'($urandom); model[a] = wdata;
    end
    @(negedge clk);
    we = 0;
    for (int n = 0; n < 2000; n++) begin
      int a, b;
      logic [WIDTH-1:0] expect_q;
      a = $urandom_range(DEPTH - 1);
      b = ($urandom_range(3) == 0) ? a : $urandom_range(DEPTH - 1);
      @(negedge clk);
      raddr = 8'(a);
      we = $urandom_range(1) == 1;
      waddr = 8'(b);
      wdata = WIDTH'($urandom);
      expect_q = model[a];
      @(posedge clk);
      if (we) model[b] = wdata;
      #1;
      check(rdata == expect_q, $sformatf("read %0d: %h expected %h", a, rdata, expect_q));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
