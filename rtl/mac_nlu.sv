// mac_nlu: one of the eight MAC + NLU lanes of the Delta-GRU accelerator (paper Fig. 3).
//
// Lane m owns neurons n = 8k + m (k = 0..7). For each it keeps the four Delta-GRU gate memories
//   M_r, M_u   reset and update gates (input and hidden contributions together)
//   M_cx, M_ch candidate gate, input part and hidden part kept apart
// plus its hidden state h, and two FC accumulators for classes m and 8 + m.
// A non-zero delta of element j adds delta*W[n][j] to the gate memories of all its neurons over
// successive clocks, so a gate memory always equals W * (propagated state) + bias (the Delta-GRU
// of Neil et al. and Gao et al., cited by the paper). When all deltas of a frame are in, the
// nonlinear unit (NLU) computes, one neuron per nlu_en clock,
//   r = sigmoid(M_r), u = sigmoid(M_u), c = tanh(M_cx + r*M_ch), h = c + u*(h_prev - c)
// i.e. h = (1-u)*c + u*h_prev, and puts the new h on h_valid/h_k/h_new one clock later.
//
// Controls, all sampled on the rising edge:
//   d_load/d_in  latch the operand (a delta, or a hidden value in the FC phase) for the next clock
//   acc_en       M[sel][k] += d * w >>> 6   (w Q1.6, d Q3.8, M Q7.8, saturating 16b)
//   bias_en      M[sel][k]  = w <<< 2       (loads a Q1.6 bias; SEL_FC0/1 load the FC bias)
//   h_clear      h of all neurons = 0
// Which accumulators exist, the split of the candidate memory, the operand widths (12b delta,
// 8b weight) and the lane count follow the paper. The fixed-point formats, the saturation, the
// NLU's piecewise-linear sigmoid (PLAN: slopes 1/4, 1/8, 1/32, saturating at |x| >= 5) and
// tanh(x) = 2*sigmoid(2x) - 1 are this design's choices: the paper does not describe the NLU.
module mac_nlu
  import kws_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  d_load,
  input  logic signed [D_W-1:0] d_in,
  input  logic                  acc_en,
  input  logic                  bias_en,
  input  acc_sel_e              sel,
  input  logic [2:0]            k,
  input  logic signed [W_W-1:0] w,
  input  logic                  h_clear,
  input  logic                  nlu_en,
  input  logic [2:0]            nlu_k,
  output logic                  h_valid,
  output logic [2:0]            h_k,
  output logic signed [D_W-1:0] h_new,
  output logic signed [M_W-1:0] fc0,
  output logic signed [M_W-1:0] fc1
);
  logic signed [M_W-1:0] m_r [NGRP], m_u [NGRP], m_cx [NGRP], m_ch [NGRP];
  logic signed [D_W-1:0] h [NGRP];
  logic signed [D_W-1:0] d_q;

  // MAC
  logic signed [31:0] prod, cur, nxt, bias;
  always_comb begin
    prod = (32'(d_q) * 32'(w)) >>> W_FRAC;
    unique case (sel)
      SEL_R:   cur = 32'(m_r[k]);
      SEL_U:   cur = 32'(m_u[k]);
      SEL_CX:  cur = 32'(m_cx[k]);
      SEL_CH:  cur = 32'(m_ch[k]);
      SEL_FC0: cur = 32'(fc0);
      default: cur = 32'(fc1);
    endcase
    nxt  = sat_s(cur + prod, M_W);
    bias = 32'(w) <<< (D_FRAC - W_FRAC);
  end

  // NLU
  logic signed [31:0] r, u, c, hp, hn;
  always_comb begin
    r  = sigmoid_q8(32'(m_r[nlu_k]));
    u  = sigmoid_q8(32'(m_u[nlu_k]));
    c  = tanh_q8(sat_s(32'(m_cx[nlu_k]) + ((r * 32'(m_ch[nlu_k])) >>> D_FRAC), M_W));
    hp = 32'(h[nlu_k]);
    hn = sat_s(c + ((u * (hp - c)) >>> D_FRAC), D_W);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      d_q <= '0; h_valid <= 1'b0; h_k <= '0; h_new <= '0; fc0 <= '0; fc1 <= '0;
      for (int i = 0; i < NGRP; i++) begin
        m_r[i] <= '0; m_u[i] <= '0; m_cx[i] <= '0; m_ch[i] <= '0; h[i] <= '0;
      end
    end else begin
      h_valid <= nlu_en;
      if (d_load) d_q <= d_in;
      if (acc_en || bias_en) begin
        unique case (sel)
          SEL_R:   m_r[k]  <= M_W'(acc_en ? nxt : bias);
          SEL_U:   m_u[k]  <= M_W'(acc_en ? nxt : bias);
          SEL_CX:  m_cx[k] <= M_W'(acc_en ? nxt : bias);
          SEL_CH:  m_ch[k] <= M_W'(acc_en ? nxt : bias);
          SEL_FC0: fc0     <= M_W'(acc_en ? nxt : bias);
          default: fc1     <= M_W'(acc_en ? nxt : bias);
        endcase
      end
      if (h_clear) begin
        for (int i = 0; i < NGRP; i++) h[i] <= '0;
      end else if (nlu_en) begin
        h[nlu_k] <= D_W'(hn);
        h_k      <= nlu_k;
        h_new    <= D_W'(hn);
      end
    end
  end
endmodule
