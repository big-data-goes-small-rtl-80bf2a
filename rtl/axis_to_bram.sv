// axis_to_bram: turns the AXI-Stream of received I/Q samples into the input
// memory of the first DL layer.
//
// The radio delivers one complex sample per transfer, tdata = {Q[15:0], I[15:0]}
// (one 4-byte word per sample). Samples pass through a small FIFO and are then
// written, one per clock, to consecutive addresses 0 .. N_SAMPLES-1 of the
// input BRAM, which keeps the 32-bit word; the learning core reads the I half
// as channel 0 and the Q half as channel 1 of its 32 x 32 x 2 input tensor
// (sample t is row t / 32, column t % 32 of both channels).
// When N_SAMPLES have been written, frame_ready rises and writing stops, so
// the core can read the frame at its own pace; the FIFO then fills and tready
// falls (back-pressure toward the DMA or front end). frame_release, pulsed once
// the first layer has read the frame, re-opens the memory for the next frame.
// clear (soft reset) drops the FIFO and any half-written frame.
// The FIFO itself is named by the paper; its depth, the sample word format and
// the hold-until-released policy are this design's choices.
module axis_to_bram #(
  parameter int unsigned N_SAMPLES  = 1024,
  parameter int unsigned FIFO_DEPTH = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        clear,
  // AXI-Stream slave, one I/Q sample per beat
  input  logic [31:0] s_axis_tdata,
  input  logic        s_axis_tvalid,
  output logic        s_axis_tready,
  // input BRAM write port
  output logic        bram_we,
  output logic [rflearn_pkg::idx_w(N_SAMPLES)-1:0] bram_waddr,
  output logic [31:0] bram_wdata,
  // frame handshake with the layer sequencer
  output logic        frame_ready,
  input  logic        frame_release
);
  localparam int AW = rflearn_pkg::idx_w(N_SAMPLES);

  logic        fifo_full, fifo_empty, pop;
  logic [31:0] fifo_dout;
  logic [AW-1:0] wcnt;

  sync_fifo #(.WIDTH(32), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk   (clk),
    .rst_n (rst_n),
    .clear (clear),
    .push  (s_axis_tvalid),
    .din   (s_axis_tdata),
    .full  (fifo_full),
    .pop   (pop),
    .dout  (fifo_dout),
    .empty (fifo_empty)
  );

  assign s_axis_tready = !fifo_full;
  assign pop           = !fifo_empty && !frame_ready;
  assign bram_we       = pop;
  assign bram_waddr    = wcnt;
  assign bram_wdata    = fifo_dout;

  always_ff @(posedge clk) begin
    if (!rst_n || clear) begin
      wcnt        <= '0;
      frame_ready <= 1'b0;
    end else begin
      if (pop) begin
        if (wcnt == AW'(N_SAMPLES - 1)) begin
          wcnt        <= '0;
          frame_ready <= 1'b1;
        end else begin
          wcnt <= wcnt + 1'b1;
        end
      end else if (frame_release) begin
        frame_ready <= 1'b0;
      end
    end
  end
endmodule
