// tb_layer_sequencer: checks the layer schedule with stand-in layers.
//
// Each of the 7 stand-in layers raises done a random number of cycles after
// its start pulse. Checks that layers start strictly in order, one at a time,
// each only after the previous one is done; that active names the running
// layer; that frame_release follows layer 0; that a start waits for the
// frame (armed); that auto mode starts by itself; that stop aborts and pulses
// clear_layers; and that the cycle count and the inference count are right.
`timescale 1ns/1ps
module tb_layer_sequencer;
  localparam int NL = 7;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start_req, stop_req, auto_mode, frame_ready;
  logic [NL-1:0] layer_done, layer_start;
  logic clear_layers, busy, armed, frame_release, infer_start, done;
  logic [2:0] active;
  logic [31:0] cycles, count;

  layer_sequencer #(.NL(NL)) dut (.clk, .rst_n, .start_req, .stop_req, .auto_mode, .frame_ready,
    .layer_done, .layer_start, .clear_layers, .active, .busy, .armed, .frame_release,
    .infer_start, .done, .cycles, .count);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // stand-in layers
  int remain [NL];
  int order [$];
  int n_release = 0, n_clear = 0, n_done = 0, cyc = 0;
  logic running;
  always @(posedge clk) begin
    layer_done <= '0;
    if (!rst_n || clear_layers) begin
      foreach (remain[k]) remain[k] = 0;
    end else begin
      for (int k = 0; k < NL; k++) begin
        if (layer_start[k]) begin
          check($countones(layer_start) == 1, "one start at a time");
          check(int'(active) == k, "active names the started layer");
          for (int m = 0; m < NL; m++) if (m != k) check(remain[m] == 0, "previous layer finished");
          remain[k] = 1 + $urandom_range(12);
          order.push_back(k);
        end else if (remain[k] > 0) begin
          remain[k]--;
          if (remain[k] == 0) layer_done[k] <= 1'b1;
        end
      end
    end
    if (rst_n && frame_release) begin
      n_release++;
      check(order.size() > 0 && order[$] == 0, $sformatf("release right after layer 0 (%0d %0d)", order.size(), order.size() ? order[$] : -1));
    end
    if (rst_n && clear_layers) n_clear++;
    if (rst_n && done) n_done++;
    if (infer_start) begin running = 1; cyc = 0; end
    else if (running) cyc++;
    if (done) begin
      running = 0;
    end
  end

  task automatic wait_done();
    int n = 0;
    while (!done && n < 2000) begin @(negedge clk); n++; end
    check(done, "inference finished");
    @(negedge clk);
  endtask

  task automatic check_order(string tag);
    check(order.size() == NL, $sformatf("%s: %0d layers ran", tag, order.size()));
    for (int k = 0; k < order.size(); k++) check(order[k] == k, {tag, ": order"});
    order.delete();
  endtask

  initial begin
    start_req = 0; stop_req = 0; auto_mode = 0; frame_ready = 0; running = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // start before the frame: armed
    @(negedge clk); start_req = 1; @(negedge clk); start_req = 0;
    repeat (5) @(negedge clk);
    check(armed && !busy, "armed while no frame");
    frame_ready = 1;
    wait_done();
    check_order("single");
    check(cycles == 32'(cyc), $sformatf("cycles %0d, measured %0d", cycles, cyc));
    check(count == 1 && n_release == 1, $sformatf("count %0d release %0d", count, n_release));
    // auto mode: two inferences back to back
    auto_mode = 1;
    wait_done();
    check_order("auto 1");
    wait_done();
    check_order("auto 2");
    auto_mode = 0;
    check(count == 3, "count after auto");
    // stop in the middle
    repeat (3) @(negedge clk);
    if (!busy) begin @(negedge clk); start_req = 1; @(negedge clk); start_req = 0; end
    repeat (20) @(negedge clk);
    check(busy, "busy before stop");
    stop_req = 1; @(negedge clk); stop_req = 0;
    @(negedge clk);
    check(!busy && n_clear == 1, $sformatf("stop aborts busy=%0d clears=%0d", busy, n_clear));
    check(count == 3, "aborted inference not counted");
    order.delete();
    @(negedge clk); start_req = 1; @(negedge clk); start_req = 0;
    wait_done();
    check_order("after stop");
    check(count == 4, "count after restart");
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
