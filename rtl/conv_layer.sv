// conv_layer: convolutional layer (CVL) with its rectified linear output.
//
// Computes F feature maps from a C_IN-channel H_IN x W_IN input held in the
// previous layer's memory, following
//   Y[f][i][j] = b[f] + sum_c sum_k sum_l Q[f][c][KH-1-k][KW-1-l] * X[c][S*i-k][S*j-l]
// (0-based form of the paper's convolution with flipped filter indices), with
// X taken as zero outside the input, so the output is
// (1 + (H_IN+KH-2)/S) x (1 + (W_IN+KW-2)/S) per filter (34 x 34 for a 32 x 32
// input, 3 x 3 filters, stride 1). The formula and zero padding are the
// paper's; the per-filter bias, the index order and the memory layout are this
// design's.
//
// One output is one loop of 1 + C_IN*KH*KW beats: a bias beat, then one beat
// per filter tap. Each beat goes through three one-cycle stages, RD (present
// input and weight addresses to the memories), EX (multiply-accumulate on the
// words they return) and WR (requantise, ReLU and write, on the last beat of an
// output). With PIPELINE = 1 a new beat enters RD every cycle, so a loop of L
// beats takes L + 2 cycles and outputs follow each other back to back; with
// PIPELINE = 0 a beat enters only after the previous one has left WR, 3 cycles
// per beat. These are the two cases of loop pipelining the paper shows.
//
// Weight memory layout: tap (f, c, r, q) at W_BASE + ((f*C_IN + c)*KH + r)*KW + q,
// bias of filter f at B_BASE + f. Output (f, i, j) is written to address
// (f*HO + i)*WO + j of the next layer's memory.
//
// Interface: pulse start while idle; busy stays high until the one-cycle done
// pulse after the last write. clear aborts a run. in_raddr/w_raddr expect
// memories with one cycle of read latency.
module conv_layer
  import rflearn_pkg::*;
#(
  parameter int unsigned C_IN     = 2,
  parameter int unsigned H_IN     = 32,
  parameter int unsigned W_IN     = 32,
  parameter int unsigned F        = 24,
  parameter int unsigned KH       = 3,
  parameter int unsigned KW       = 3,
  parameter int unsigned S        = 1,
  parameter int unsigned W_BASE   = 0,
  parameter int unsigned B_BASE   = F * C_IN * KH * KW,
  parameter int unsigned WMEM_AW  = 13,
  parameter bit          PIPELINE = 1'b1,
  parameter bit          RELU     = 1'b1,
  localparam int unsigned HO      = 1 + (H_IN + KH - 2) / S,
  localparam int unsigned WO      = 1 + (W_IN + KW - 2) / S,
  localparam int unsigned IN_AW   = idx_w(C_IN * H_IN * W_IN),
  localparam int unsigned OUT_AW  = idx_w(F * HO * WO)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clear,
  input  logic              start,
  output logic              busy,
  output logic              done,
  output logic [IN_AW-1:0]  in_raddr,
  input  data_t             in_rdata,
  output logic [WMEM_AW-1:0] w_raddr,
  input  data_t             w_rdata,
  output logic              out_we,
  output logic [OUT_AW-1:0] out_waddr,
  output data_t             out_wdata,
  output logic              sat_evt,
  output logic              clip_evt
);
  // loop counters of the beat in RD
  logic [idx_w(F)-1:0]    f_q;
  logic [idx_w(HO)-1:0]   i_q;
  logic [idx_w(WO)-1:0]   j_q;
  logic [idx_w(C_IN)-1:0] c_q;
  logic [idx_w(KH)-1:0]   k_q;
  logic [idx_w(KW)-1:0]   l_q;
  logic                   bias_q;   // beat is the bias beat
  logic                   running;  // beats left to issue

  // RD -> EX and EX -> WR stage registers
  logic                   s1_v, s1_bias, s1_pad, s1_last;
  logic [OUT_AW-1:0]      s1_oaddr;
  logic                   s2_v, s2_wr;
  logic [OUT_AW-1:0]      s2_oaddr;
  acc_t                   acc;

  logic issue, tap_last, out_last, pad;
  int   row, col;

  assign issue    = running && (PIPELINE || (!s1_v && !s2_v));
  assign tap_last = (c_q == C_IN - 1) && (k_q == KH - 1) && (l_q == KW - 1);
  assign out_last = (f_q == F - 1) && (i_q == HO - 1) && (j_q == WO - 1);

  always_comb begin
    row      = int'(S) * int'(i_q) - int'(k_q);
    col      = int'(S) * int'(j_q) - int'(l_q);
    pad      = bias_q || row < 0 || row >= int'(H_IN) || col < 0 || col >= int'(W_IN);
    in_raddr = pad ? '0 : IN_AW'((int'(c_q) * int'(H_IN) + row) * int'(W_IN) + col);
    if (bias_q)
      w_raddr = WMEM_AW'(B_BASE + f_q);
    else
      w_raddr = WMEM_AW'(W_BASE + ((f_q * C_IN + c_q) * KH + (KH - 1 - k_q)) * KW + (KW - 1 - l_q));
  end

  // RD stage: walk the loop nest f, i, j, (bias, c, k, l)
  always_ff @(posedge clk) begin
    if (!rst_n || clear) begin
      running <= 1'b0;
      f_q <= '0; i_q <= '0; j_q <= '0; c_q <= '0; k_q <= '0; l_q <= '0;
      bias_q <= 1'b1;
    end else if (start && !busy) begin
      running <= 1'b1;
      f_q <= '0; i_q <= '0; j_q <= '0; c_q <= '0; k_q <= '0; l_q <= '0;
      bias_q <= 1'b1;
    end else if (issue) begin
      if (bias_q) begin
        bias_q <= 1'b0;
      end else if (!tap_last) begin
        if (l_q != KW - 1) l_q <= l_q + 1'b1;
        else begin
          l_q <= '0;
          if (k_q != KH - 1) k_q <= k_q + 1'b1;
          else begin
            k_q <= '0;
            c_q <= c_q + 1'b1;
          end
        end
      end else begin
        c_q <= '0; k_q <= '0; l_q <= '0;
        bias_q <= 1'b1;
        if (out_last) running <= 1'b0;
        else if (j_q != WO - 1) j_q <= j_q + 1'b1;
        else begin
          j_q <= '0;
          if (i_q != HO - 1) i_q <= i_q + 1'b1;
          else begin
            i_q <= '0;
            f_q <= f_q + 1'b1;
          end
        end
      end
    end
  end

  // pipeline registers, EX (accumulate) and WR token
  always_ff @(posedge clk) begin
    if (!rst_n || clear) begin
      s1_v <= 1'b0;
      s2_v <= 1'b0;
      s2_wr <= 1'b0;
    end else begin
      s1_v <= issue;
      s2_v <= s1_v;
      s2_wr <= s1_v && s1_last;
    end
  end

  always_ff @(posedge clk) begin
    if (issue) begin
      s1_bias  <= bias_q;
      s1_pad   <= pad;
      s1_last  <= !bias_q && tap_last;
      s1_oaddr <= OUT_AW'((f_q * HO + i_q) * WO + j_q);
    end
    if (s1_v) begin
      if (s1_bias) acc <= acc_t'(w_rdata) <<< FRAC;
      else if (!s1_pad) acc <= acc + acc_t'(in_rdata) * acc_t'(w_rdata);
    end
    s2_oaddr <= s1_oaddr;
  end

  // WR stage
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

  // control
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
