// tb_axis_to_bram: checks the stream-to-BRAM converter.
//
// Streams three frames of 24 samples with random gaps into a converter with a
// 4-deep FIFO. Checks that each frame lands at addresses 0..23 in order, that
// frame_ready rises after exactly 24 writes, that nothing is written while a
// frame is held (tready must fall once the FIFO is full: back-pressure), that
// no sample is lost or duplicated across a release, and that clear drops a
// half-written frame. One sample per cycle is accepted when not held.
`timescale 1ns/1ps
module tb_axis_to_bram;
  localparam int N = 24;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clear, tvalid, tready, we, frame_ready, frame_release;
  logic [31:0] tdata, wdata;
  logic [4:0] waddr;

  axis_to_bram #(.N_SAMPLES(N), .FIFO_DEPTH(4)) dut (
    .clk, .rst_n, .clear, .s_axis_tdata(tdata), .s_axis_tvalid(tvalid), .s_axis_tready(tready),
    .bram_we(we), .bram_waddr(waddr), .bram_wdata(wdata), .frame_ready, .frame_release);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [31:0] sent [$];
  int nwr = 0, stalls = 0, held_writes = 0;
  always @(posedge clk) if (rst_n) begin
    if (tvalid && !tready) stalls++;
    if (we && frame_ready) held_writes++;
    if (we) begin
      logic [31:0] e;
      e = sent.pop_front();
      check(wdata == e, $sformatf("sample %0d: %h expected %h", nwr, wdata, e));
      check(int'(waddr) == nwr % N, $sformatf("address %0d expected %0d", waddr, nwr % N));
      nwr++;
    end
  end

  task automatic send(int n, bit gaps);
    for (int t = 0; t < n; t++) begin
      @(negedge clk);
      while (gaps && $urandom_range(2) == 0) begin tvalid = 0; @(negedge clk); end
      tvalid = 1;
      tdata = $urandom;
      do @(posedge clk); while (!tready);
      sent.push_back(tdata);
    end
    @(negedge clk);
    tvalid = 0;
  endtask

  initial begin
    int t0;
    clear = 0; tvalid = 0; tdata = 0; frame_release = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // frame 1 without gaps: one sample per cycle
    t0 = $time;
    send(N, 0);
    repeat (3) @(negedge clk);
    check(frame_ready, "frame ready after N samples");
    check(nwr == N, "N writes");
    // frame 2 arrives while frame 1 is held: back-pressure
    fork
      send(N, 1);
      begin
        repeat (60) @(negedge clk);
        check(stalls > 0, "tready fell while held");
        check(nwr == N, "no write while held");
        frame_release = 1; @(negedge clk); frame_release = 0;
      end
    join
    repeat (6) @(negedge clk);
    check(frame_ready && nwr == 2 * N, "second frame complete");
    frame_release = 1; @(negedge clk); frame_release = 0;
    // half a frame, then clear
    send(N / 2, 1);
    repeat (6) @(negedge clk);
    clear = 1; @(negedge clk); clear = 0;
    sent.delete();
    nwr = 0;
    send(N, 1);
    repeat (6) @(negedge clk);
    check(frame_ready && nwr == N, "frame after clear starts at address 0");
    check(held_writes == 0, "never written while held");
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
