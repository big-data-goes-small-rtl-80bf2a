// fc_layer: fully-connected layer (FCL), sigma(W * r + b).
//
// Reads its N_IN inputs linearly from the previous layer's memory; when that
// memory holds a C x H x W tensor in channel-major order this linear read is
// the Flatten the paper places in front of the first FCL. For each of the
// N_OUT neurons it runs a loop of 1 + N_IN beats (bias, then one weight per
// input) through the RD / EX / WR pipeline described in conv_layer, and
// writes the requantised result, rectified when RELU = 1 (hidden layers) or
// left linear when RELU = 0 (the output layer that holds the class scores).
// Weight (n, i) sits at W_BASE + n*N_IN + i, bias n at B_BASE + n; neuron n
// is written to address n. The layer equation is the paper's; the layouts and
// the per-beat pipeline are this design's.
// Interface and timing as in conv_layer.
module fc_layer
  import rflearn_pkg::*;
#(
  parameter int unsigned N_IN     = 192,
  parameter int unsigned N_OUT    = 16,
  parameter int unsigned W_BASE   = 0,
  parameter int unsigned B_BASE   = N_IN * N_OUT,
  parameter int unsigned WMEM_AW  = 13,
  parameter bit          PIPELINE = 1'b1,
  parameter bit          RELU     = 1'b1,
  localparam int unsigned IN_AW   = idx_w(N_IN),
  localparam int unsigned OUT_AW  = idx_w(N_OUT)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               clear,
  input  logic               start,
  output logic               busy,
  output logic               done,
  output logic [IN_AW-1:0]   in_raddr,
  input  data_t              in_rdata,
  output logic [WMEM_AW-1:0] w_raddr,
  input  data_t              w_rdata,
  output logic               out_we,
  output logic [OUT_AW-1:0]  out_waddr,
  output data_t              out_wdata,
  output logic               sat_evt,
  output logic               clip_evt
);
  logic [idx_w(N_OUT)-1:0] n_q;
  logic [IN_AW-1:0]        i_q;
  logic                    bias_q, running;

  logic                    s1_v, s1_bias, s1_last;
  logic [OUT_AW-1:0]       s1_oaddr;
  logic                    s2_v, s2_wr;
  logic [OUT_AW-1:0]       s2_oaddr;
  acc_t                    acc;

  logic issue, in_last, out_last;

  assign issue    = running && (PIPELINE || (!s1_v && !s2_v));
  assign in_last  = (i_q == IN_AW'(N_IN - 1));
  assign out_last = (n_q == N_OUT - 1);
  assign in_raddr = bias_q ? '0 : i_q;
  assign w_raddr  = bias_q ? WMEM_AW'(B_BASE + n_q) : WMEM_AW'(W_BASE + n_q * N_IN + i_q);

  always_ff @(posedge clk) begin
    if (!rst_n || clear) begin
      running <= 1'b0;
      n_q <= '0; i_q <= '0; bias_q <= 1'b1;
    end else if (start && !busy) begin
      running <= 1'b1;
      n_q <= '0; i_q <= '0; bias_q <= 1'b1;
    end else if (issue) begin
      if (bias_q) bias_q <= 1'b0;
      else if (!in_last) i_q <= i_q + 1'b1;
      else begin
        i_q    <= '0;
        bias_q <= 1'b1;
        if (out_last) running <= 1'b0;
        else n_q <= n_q + 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n || clear) begin
      s1_v  <= 1'b0;
      s2_v  <= 1'b0;
      s2_wr <= 1'b0;
    end else begin
      s1_v  <= issue;
      s2_v  <= s1_v;
      s2_wr <= s1_v && s1_last;
    end
  end

  always_ff @(posedge clk) begin
    if (issue) begin
      s1_bias  <= bias_q;
      s1_last  <= !bias_q && in_last;
      s1_oaddr <= OUT_AW'(n_q);
    end
    if (s1_v) begin
      if (s1_bias) acc <= acc_t'(w_rdata) <<< FRAC;
      else acc <= acc + acc_t'(in_rdata) * acc_t'(w_rdata);
    end
    s2_oaddr <= s1_oaddr;
  end

  logic rll_sat, rll_clip;
  rll_unit u_rll (
    .acc     (acc),
    .relu_en (RELU),
    .y       (out_wdata),
    .sat     (rll_sat),
    .clipped (rll_clip)
  );
  assign out_we    = s2_wr;
  assign out_waddr = s2_oaddr;
  assign sat_evt   = s2_wr && rll_sat;
  assign clip_evt  = s2_wr && rll_clip;

  always_ff @(posedge clk) begin
    if (!rst_n || clear) begin
      busy <= 1'b0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !busy) busy <= 1'b1;
      else if (busy && !running && !s1_v && !s2_v) begin
        busy <= 1'b0;
        done <= 1'b1;
      end
    end
  end
endmodule
