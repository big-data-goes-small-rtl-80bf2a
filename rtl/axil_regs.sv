// axil_regs: AXI-Lite register file through which the controller software
// runs the learning core.
//
// The controller starts, stops and resets the core, loads the weights (which
// may be changed at any time without touching the hardware) and reads back
// status, the classification and the measured latency. Map (byte addresses,
// 32-bit registers, see rflearn_pkg):
//   0x00 CTRL   W  [0] start  [1] stop  [2] soft reset  [3] auto mode (R: [3])
//   0x04 STATUS R  [0] busy [1] done [2] frame ready [3] saturation seen
//                  [4] armed [11:8] running layer
//   0x08 WADDR  RW weight memory address
//   0x0C WDATA  W  weight word (low DW bits) written at WADDR, then WADDR += 1
//   0x10 RESULT R  [7:0] class of the last inference, [31] valid
//   0x14 CYCLES R  clock cycles of the last inference
//   0x18 COUNT  R  inferences completed
//   0x40+4k     R  score of class k, sign-extended
// done, saturation and valid are sticky; writing start or soft reset clears
// them. irq follows done. start, stop and soft reset are one-cycle pulses;
// stop also clears auto mode.
// Handshake: a write is taken in the cycle both AWVALID and WVALID are high
// and no response is pending, and answered with BVALID (OKAY) until BREADY;
// a read is taken while no read data is pending and answered one cycle later
// with RVALID (OKAY) until RREADY. WSTRB is not used: every write is a full
// word. The registers are the paper's mechanism; the map is this design's.
module axil_regs
  import rflearn_pkg::*;
#(
  parameter int unsigned NCLS    = 5,
  parameter int unsigned NL      = 7,
  parameter int unsigned WMEM_AW = 13
) (
  input  logic               clk,
  input  logic               rst_n,
  // AXI-Lite slave
  input  logic [7:0]         s_axil_awaddr,
  input  logic               s_axil_awvalid,
  output logic               s_axil_awready,
  input  logic [31:0]        s_axil_wdata,
  input  logic               s_axil_wvalid,
  output logic               s_axil_wready,
  output logic [1:0]         s_axil_bresp,
  output logic               s_axil_bvalid,
  input  logic               s_axil_bready,
  input  logic [7:0]         s_axil_araddr,
  input  logic               s_axil_arvalid,
  output logic               s_axil_arready,
  output logic [31:0]        s_axil_rdata,
  output logic [1:0]         s_axil_rresp,
  output logic               s_axil_rvalid,
  input  logic               s_axil_rready,
  // control toward the core
  output logic               start_pulse,
  output logic               stop_pulse,
  output logic               srst_pulse,
  output logic               auto_mode,
  output logic               w_we,
  output logic [WMEM_AW-1:0] w_waddr,
  output data_t              w_wdata,
  output logic               irq,
  // status from the core
  input  logic               busy,
  input  logic               armed,
  input  logic               frame_ready,
  input  logic               done_pulse,
  input  logic               sat_evt,
  input  logic [idx_w(NL)-1:0]   active,
  input  logic [idx_w(NCLS)-1:0] result_class,
  input  logic [31:0]        cycles,
  input  logic [31:0]        count,
  input  data_t              scores [NCLS]
);
  logic done_q, sat_q, valid_q;
  logic wr_fire, rd_fire;

  assign s_axil_awready = s_axil_awvalid && s_axil_wvalid && !s_axil_bvalid;
  assign s_axil_wready  = s_axil_awready;
  assign s_axil_arready = !s_axil_rvalid;
  assign s_axil_bresp   = 2'b00;
  assign s_axil_rresp   = 2'b00;
  assign wr_fire        = s_axil_awready;
  assign rd_fire        = s_axil_arvalid && s_axil_arready;
  assign irq            = done_q;

  // write side
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      s_axil_bvalid <= 1'b0;
      start_pulse   <= 1'b0;
      stop_pulse    <= 1'b0;
      srst_pulse    <= 1'b0;
      auto_mode     <= 1'b0;
      w_we          <= 1'b0;
      w_waddr       <= '0;
      w_wdata       <= '0;
    end else begin
      start_pulse <= 1'b0;
      stop_pulse  <= 1'b0;
      srst_pulse  <= 1'b0;
      w_we        <= 1'b0;
      if (s_axil_bvalid && s_axil_bready) s_axil_bvalid <= 1'b0;
      if (w_we) w_waddr <= w_waddr + 1'b1;
      if (wr_fire) begin
        s_axil_bvalid <= 1'b1;
        unique case (s_axil_awaddr)
          REG_CTRL: begin
            start_pulse <= s_axil_wdata[0];
            stop_pulse  <= s_axil_wdata[1];
            srst_pulse  <= s_axil_wdata[2];
            auto_mode   <= s_axil_wdata[3] && !s_axil_wdata[1] && !s_axil_wdata[2];
          end
          REG_WADDR: w_waddr <= WMEM_AW'(s_axil_wdata);
          REG_WDATA: begin
            w_we    <= 1'b1;
            w_wdata <= s_axil_wdata[DW-1:0];
          end
          default: ;
        endcase
      end
    end
  end

  // sticky status
  always_ff @(posedge clk) begin
    if (!rst_n || srst_pulse || start_pulse) begin
      done_q  <= 1'b0;
      sat_q   <= 1'b0;
      valid_q <= 1'b0;
    end else begin
      if (done_pulse) begin
        done_q  <= 1'b1;
        valid_q <= 1'b1;
      end
      if (sat_evt) sat_q <= 1'b1;
    end
  end

  // read side
  logic [31:0] rmux;
  always_comb begin
    rmux = '0;
    if (s_axil_araddr >= REG_SCORE0 &&
        s_axil_araddr < REG_SCORE0 + 8'(4 * NCLS)) begin
      rmux = 32'(signed'(scores[(s_axil_araddr - REG_SCORE0) >> 2]));
    end else begin
      unique case (s_axil_araddr)
        REG_CTRL:   rmux = {28'd0, auto_mode, 3'd0};
        REG_STATUS: rmux = {20'd0, 4'(active), 3'd0, armed, sat_q, frame_ready, done_q, busy};
        REG_WADDR:  rmux = 32'(w_waddr);
        REG_RESULT: rmux = {valid_q, 23'd0, 8'(result_class)};
        REG_CYCLES: rmux = cycles;
        REG_COUNT:  rmux = count;
        default:    rmux = '0;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      s_axil_rvalid <= 1'b0;
      s_axil_rdata  <= '0;
    end else if (rd_fire) begin
      s_axil_rvalid <= 1'b1;
      s_axil_rdata  <= rmux;
    end else if (s_axil_rready) begin
      s_axil_rvalid <= 1'b0;
    end
  end
endmodule
