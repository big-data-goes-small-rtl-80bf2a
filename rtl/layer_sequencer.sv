// layer_sequencer: runs the layers of the learning core one after another.
//
// Every layer reads the whole memory of the layer before it, so layer k+1 is
// started (one-cycle pulse on layer_start[k+1]) when layer k reports done.
// An inference begins when a start request has been made (or auto mode is on)
// and the input frame is ready. After layer 0 has read the frame,
// frame_release lets the stream converter collect the next frame while the
// remaining layers run. After the last layer, done pulses for one cycle and
// cycles holds the clock cycles the inference took, from the first layer's
// start pulse to done (the figure the paper measured with a timer core).
// A start request while no frame is ready arms the sequencer (state WAIT).
// stop aborts at once: clear_layers pulses so every layer drops its work,
// and auto mode must be re-armed by the controller. active is the index of the
// layer now running; it selects which layer drives the shared weight memory.
// The start/stop control is the paper's; this sequential schedule is the
// simplest one that respects its one-memory-per-layer structure.
module layer_sequencer #(
  parameter int unsigned NL = 7
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start_req,
  input  logic          stop_req,
  input  logic          auto_mode,
  input  logic          frame_ready,
  input  logic [NL-1:0] layer_done,
  output logic [NL-1:0] layer_start,
  output logic          clear_layers,
  output logic [rflearn_pkg::idx_w(NL)-1:0] active,
  output logic          busy,
  output logic          armed,
  output logic          frame_release,
  output logic          infer_start,
  output logic          done,
  output logic [31:0]   cycles,
  output logic [31:0]   count
);
  typedef enum logic [1:0] {S_IDLE, S_WAIT, S_START, S_RUN} state_e;
  state_e state;
  logic [31:0] cyc;

  assign busy  = (state == S_START) || (state == S_RUN);
  assign armed = (state == S_WAIT);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state         <= S_IDLE;
      active        <= '0;
      layer_start   <= '0;
      clear_layers  <= 1'b0;
      frame_release <= 1'b0;
      infer_start   <= 1'b0;
      done          <= 1'b0;
      cyc           <= '0;
      cycles        <= '0;
      count         <= '0;
    end else begin
      layer_start   <= '0;
      clear_layers  <= 1'b0;
      frame_release <= 1'b0;
      infer_start   <= 1'b0;
      done          <= 1'b0;
      if (busy) cyc <= cyc + 1;
      if (stop_req) begin
        state        <= S_IDLE;
        clear_layers <= 1'b1;
        active       <= '0;
      end else begin
        unique case (state)
          S_IDLE: begin
            if (start_req || auto_mode) state <= S_WAIT;
          end
          S_WAIT: begin
            if (frame_ready) begin
              state       <= S_START;
              active      <= '0;
              cyc         <= '0;
              infer_start <= 1'b1;
            end
          end
          S_START: begin
            layer_start[active] <= 1'b1;
            state               <= S_RUN;
          end
          S_RUN: begin
            if (layer_done[active]) begin
              if (active == '0) frame_release <= 1'b1;
              if (active == $bits(active)'(NL - 1)) begin
                state  <= S_IDLE;
                done   <= 1'b1;
                cycles <= cyc + 1;
                count  <= count + 1;
                active <= '0;
              end else begin
                active <= active + 1'b1;
                state  <= S_START;
              end
            end
          end
          default: state <= S_IDLE;
        endcase
      end
    end
  end
endmodule
