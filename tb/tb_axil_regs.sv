// tb_axil_regs: checks the AXI-Lite register file on its own.
//
// Covers the handshake (a write waits for both AWVALID and WVALID, BVALID
// and RVALID hold until accepted, OKAY responses), the control pulses
// (start, stop, soft reset last one cycle, stop clears auto mode), weight
// writes with address auto-increment, sticky done / saturation / valid bits
// and their clearing, and read-back of every status register and score.
`timescale 1ns/1ps
module tb_axil_regs;
  import rflearn_pkg::*;
  localparam int NCLS = 5;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [7:0]  awaddr, araddr;
  logic        awvalid, wvalid, bready, arvalid, rready;
  logic [31:0] wdata, rdata;
  logic        awready, wready, bvalid, arready, rvalid;
  logic [1:0]  bresp, rresp;
  logic start_p, stop_p, srst_p, auto_m, w_we, irq;
  logic [12:0] w_waddr;
  data_t w_wdata;
  logic busy, armed, frame_ready, done_p, sat;
  logic [2:0] active, rclass;
  logic [31:0] cycles, count;
  data_t scores [NCLS];

  axil_regs #(.NCLS(NCLS), .NL(7), .WMEM_AW(13)) dut (
    .clk, .rst_n,
    .s_axil_awaddr(awaddr), .s_axil_awvalid(awvalid), .s_axil_awready(awready),
    .s_axil_wdata(wdata), .s_axil_wvalid(wvalid), .s_axil_wready(wready),
    .s_axil_bresp(bresp), .s_axil_bvalid(bvalid), .s_axil_bready(bready),
    .s_axil_araddr(araddr), .s_axil_arvalid(arvalid), .s_axil_arready(arready),
    .s_axil_rdata(rdata), .s_axil_rresp(rresp), .s_axil_rvalid(rvalid), .s_axil_rready(rready),
    .start_pulse(start_p), .stop_pulse(stop_p), .srst_pulse(srst_p), .auto_mode(auto_m),
    .w_we, .w_waddr, .w_wdata, .irq,
    .busy, .armed, .frame_ready, .done_pulse(done_p), .sat_evt(sat), .active,
    .result_class(rclass), .cycles, .count, .scores);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int n_start = 0, n_stop = 0, n_srst = 0;
  int wlog_a [$], wlog_d [$];
  always @(posedge clk) if (rst_n) begin
    if (start_p) n_start++;
    if (stop_p) n_stop++;
    if (srst_p) n_srst++;
    if (w_we) begin wlog_a.push_back(int'(w_waddr)); wlog_d.push_back(int'(w_wdata)); end
    if (bvalid) assert (bresp == 2'b00) else begin failures++; $display("FAIL: bresp"); end
  end

  // a write whose address comes several cycles before its data
  task automatic axil_write(logic [7:0] a, logic [31:0] d, int skew = 0);
    @(negedge clk);
    awaddr = a; awvalid = 1;
    repeat (skew) begin
      @(negedge clk);
      if (skew > 0) check(!awready, "no write accepted without WVALID");
    end
    wdata = d; wvalid = 1;
    do @(posedge clk); while (!awready);
    check(wready, "AWREADY and WREADY together");
    @(negedge clk);
    awvalid = 0; wvalid = 0;
    repeat ($urandom_range(3)) begin
      check(bvalid, "BVALID held until BREADY");
      @(negedge clk);
    end
    bready = 1;
    while (!bvalid) @(negedge clk);
    @(negedge clk);
    bready = 0;
  endtask

  task automatic axil_read(logic [7:0] a, output logic [31:0] d);
    @(negedge clk);
    araddr = a; arvalid = 1;
    do @(posedge clk); while (!arready);
    @(negedge clk);
    arvalid = 0;
    repeat ($urandom_range(2)) begin
      check(rvalid, "RVALID held until RREADY");
      @(negedge clk);
    end
    rready = 1;
    while (!rvalid) @(negedge clk);
    d = rdata;
    check(rresp == 2'b00, "rresp OKAY");
    @(negedge clk);
    rready = 0;
  endtask

  initial begin
    logic [31:0] d;
    awvalid = 0; wvalid = 0; bready = 0; arvalid = 0; rready = 0;
    awaddr = 0; araddr = 0; wdata = 0;
    busy = 0; armed = 0; frame_ready = 0; done_p = 0; sat = 0; active = 0; rclass = 0;
    cycles = 32'd123456; count = 32'd7;
    for (int k = 0; k < NCLS; k++) scores[k] = data_t'(k * 1000 - 2100);
    repeat (2) @(posedge clk);
    rst_n = 1;

    // control pulses
    axil_write(8'h00, 32'h1, 2);
    check(n_start == 1, "start pulse");
    axil_write(8'h00, 32'h8);
    axil_read(8'h00, d);
    check(d[3] == 1'b1 && auto_m, "auto mode set");
    axil_write(8'h00, 32'h2);
    check(n_stop == 1 && !auto_m, "stop pulse clears auto");
    axil_write(8'h00, 32'h4, 1);
    check(n_srst == 1, "soft reset pulse");

    // weights with auto-increment
    axil_write(8'h08, 32'd100);
    for (int k = 0; k < 6; k++) axil_write(8'h0C, 32'(k * 17 - 40), k % 2);
    axil_write(8'h08, 32'd3000);
    axil_write(8'h0C, 32'h0000_7fff);
    check(wlog_a.size() == 7, "seven weight writes");
    for (int k = 0; k < 6; k++) begin
      check(wlog_a[k] == 100 + k, $sformatf("weight address %0d", wlog_a[k]));
      check(wlog_d[k] == k * 17 - 40, "weight data");
    end
    check(wlog_a[6] == 3000 && wlog_d[6] == 32767, "weight address reloaded");
    axil_read(8'h08, d);
    check(d == 32'd3001, "WADDR read back");

    // status, sticky bits
    @(negedge clk);
    busy = 1; armed = 0; frame_ready = 1; active = 3'd5; sat = 1;
    @(negedge clk);
    sat = 0;
    axil_read(8'h04, d);
    check(d[0] && !d[1] && d[2] && d[3] && !d[4] && d[11:8] == 4'd5, $sformatf("status %h", d));
    @(negedge clk);
    busy = 0; done_p = 1; rclass = 3'd4;
    @(negedge clk);
    done_p = 0;
    check(irq, "irq after done");
    axil_read(8'h04, d);
    check(d[1] && !d[0], "done sticky");
    axil_read(8'h10, d);
    check(d[31] && d[7:0] == 8'd4, "result valid and class");
    axil_read(8'h14, d);
    check(d == 32'd123456, "cycles");
    axil_read(8'h18, d);
    check(d == 32'd7, "count");
    for (int k = 0; k < NCLS; k++) begin
      axil_read(8'(8'h40 + 4 * k), d);
      check($signed(d) == k * 1000 - 2100, $sformatf("score %0d = %0d", k, $signed(d)));
    end
    axil_read(8'h40 + 8'(4 * NCLS), d);
    check(d == 0, "past the last score reads zero");
    axil_write(8'h00, 32'h1);
    check(!irq, "start clears done");
    axil_read(8'h04, d);
    check(!d[1] && !d[3], "start clears sticky bits");
    axil_read(8'h10, d);
    check(!d[31], "start clears valid");
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
