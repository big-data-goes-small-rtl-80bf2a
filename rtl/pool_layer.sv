// pool_layer: max-pooling layer (POL).
//
// Reduces each of the C channels of an H x W feature map to (H/P) x (W/P)
// by taking the maximum of every non-overlapping P x P region; rows and
// columns that do not fill a whole region are dropped (34 x 34 -> 11 x 11 for
// P = 3). The paper sets the pooling length to 3 and says a pooling layer
// takes the maximum or the average; maximum, stride P and the dropping of
// partial regions are this design's choices.
//
// Same three-stage beat pipeline as the other layers: RD presents the input
// address, EX keeps the running maximum, WR writes it after the P*P-th beat.
// PIPELINE = 1 takes a beat per cycle, PIPELINE = 0 one every three cycles.
// Output (c, i, j) goes to address (c*HO + i)*WO + j. Interface and timing
// as in conv_layer: start while idle, busy until the done pulse, clear aborts.
module pool_layer
  import rflearn_pkg::*;
#(
  parameter int unsigned C        = 24,
  parameter int unsigned H        = 34,
  parameter int unsigned W        = 34,
  parameter int unsigned P        = 3,
  parameter bit          PIPELINE = 1'b1,
  localparam int unsigned HO      = H / P,
  localparam int unsigned WO      = W / P,
  localparam int unsigned IN_AW   = idx_w(C * H * W),
  localparam int unsigned OUT_AW  = idx_w(C * HO * WO)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clear,
  input  logic              start,
  output logic              busy,
  output logic              done,
  output logic [IN_AW-1:0]  in_raddr,
  input  data_t             in_rdata,
  output logic              out_we,
  output logic [OUT_AW-1:0] out_waddr,
  output data_t             out_wdata
);
  logic [idx_w(C)-1:0]  c_q;
  logic [idx_w(HO)-1:0] i_q;
  logic [idx_w(WO)-1:0] j_q;
  logic [idx_w(P)-1:0]  pk_q, pl_q;
  logic                 running;

  logic                 s1_v, s1_first, s1_last;
  logic [OUT_AW-1:0]    s1_oaddr;
  logic                 s2_v, s2_wr;
  logic [OUT_AW-1:0]    s2_oaddr;
  data_t                mx;

  logic issue, win_first, win_last, out_last;

  assign issue     = running && (PIPELINE || (!s1_v && !s2_v));
  assign win_first = (pk_q == 0) && (pl_q == 0);
  assign win_last  = (pk_q == P - 1) && (pl_q == P - 1);
  assign out_last  = (c_q == C - 1) && (i_q == HO - 1) && (j_q == WO - 1);
  assign in_raddr  = IN_AW'((c_q * H + i_q * P + pk_q) * W + j_q * P + pl_q);

  always_ff @(posedge clk) begin
    if (!rst_n || clear) begin
      running <= 1'b0;
      c_q <= '0; i_q <= '0; j_q <= '0; pk_q <= '0; pl_q <= '0;
    end else if (start && !busy) begin
      running <= 1'b1;
      c_q <= '0; i_q <= '0; j_q <= '0; pk_q <= '0; pl_q <= '0;
    end else if (issue) begin
      if (!win_last) begin
        if (pl_q != P - 1) pl_q <= pl_q + 1'b1;
        else begin
          pl_q <= '0;
          pk_q <= pk_q + 1'b1;
        end
      end else begin
        pk_q <= '0; pl_q <= '0;
        if (out_last) running <= 1'b0;
        else if (j_q != WO - 1) j_q <= j_q + 1'b1;
        else begin
          j_q <= '0;
          if (i_q != HO - 1) i_q <= i_q + 1'b1;
          else begin
            i_q <= '0;
            c_q <= c_q + 1'b1;
          end
        end
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
      s1_first <= win_first;
      s1_last  <= win_last;
      s1_oaddr <= OUT_AW'((c_q * HO + i_q) * WO + j_q);
    end
    if (s1_v) begin
      if (s1_first || in_rdata > mx) mx <= in_rdata;
    end
    s2_oaddr <= s1_oaddr;
  end

  assign out_we    = s2_wr;
  assign out_waddr = s2_oaddr;
  assign out_wdata = mx;

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
