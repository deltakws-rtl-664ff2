// iir_bpf: serial 4th-order IIR band-pass filter bank (up to 16 channels).
//
// Each channel is a cascade of two second-order sections in direct form II (Fig. 5 of the paper):
//   SOS-I : w1 = x  - b11*w1[n-1] - b21*w1[n-2]   v = w1 + s1*2*w1[n-1] + w1[n-2]   y1 = a01*v
//   SOS-II: w2 = y1 - b12*w2[n-1] - b22*w2[n-2]   y  = w2 + s2*2*w2[n-1] + w2[n-2]
// The numerator symmetry a0 = a2, |a1| = 2*a0 (SOS-II: a0 = a2 = 1) stated in the paper lets the
// middle numerator tap be a 1-bit shift with a per-channel sign select (s = +1/-1), and the SOS-II
// outer taps need no multiplier at all: five multipliers remain out of ten (4 x 12b b-coefficients,
// 1 x 8b a01 gain: the paper's 12b/8b mixed precision). The paper's figure prints the shift as
// "<<2"; this design follows the stated coefficient relation |a1| = 2*a0, i.e. a shift by one.
//
// One channel is processed per clock: in_valid with ch_idx and the input sample x, and one clock
// later out_valid, out_ch and the 20b filter output y. The four 20b delay states of each channel
// sit in a register file (the paper's 20b intermediate buffer), and the coefficients in a register
// file written through cfg_* (the paper's coefficient memory: 16 channels x 56 bits = 112 B).
//   cfg_addr = {ch[3:0], field[2:0]}: field 0 b11, 1 b21, 2 b12, 3 b22 (12b signed, 10 fraction
//   bits), 4 a01 (8b unsigned, 10 fraction bits), 5 sign bits {s2_neg, s1_neg}.
// Fraction widths, rounding (truncation toward minus infinity) and saturation of states and output
// to 20 bits are this design's choices. clear resets all delay states.
module iir_bpf
  import kws_pkg::*;
#(
  parameter int NCH = NCH_MAX
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     clear,
  input  logic                     in_valid,
  input  logic [3:0]               ch_idx,
  input  logic signed [AUD_W-1:0]  x,
  output logic                     out_valid,
  output logic [3:0]               out_ch,
  output logic signed [ST_W-1:0]   y,
  input  logic                     cfg_we,
  input  logic [6:0]               cfg_addr,
  input  logic [B_W-1:0]           cfg_data
);
  // coefficient register file
  logic signed [B_W-1:0] b11 [NCH], b21 [NCH], b12 [NCH], b22 [NCH];
  logic        [A_W-1:0] a01 [NCH];
  logic                  s1n [NCH], s2n [NCH];
  // delay-state register file (intermediate buffer)
  logic signed [ST_W-1:0] w11 [NCH], w12 [NCH], w21 [NCH], w22 [NCH];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < NCH; c++) begin
        b11[c] <= '0; b21[c] <= '0; b12[c] <= '0; b22[c] <= '0;
        a01[c] <= '0; s1n[c] <= 1'b0; s2n[c] <= 1'b0;
      end
    end else if (cfg_we && int'(cfg_addr[6:3]) < NCH) begin
      case (cfg_addr[2:0])
        3'd0: b11[cfg_addr[6:3]] <= cfg_data;
        3'd1: b21[cfg_addr[6:3]] <= cfg_data;
        3'd2: b12[cfg_addr[6:3]] <= cfg_data;
        3'd3: b22[cfg_addr[6:3]] <= cfg_data;
        3'd4: a01[cfg_addr[6:3]] <= cfg_data[A_W-1:0];
        3'd5: {s2n[cfg_addr[6:3]], s1n[cfg_addr[6:3]]} <= cfg_data[1:0];
        default: ;
      endcase
    end
  end

  // datapath of one channel
  logic signed [31:0] fb1, w1n, mid1, v1, y1, fb2, w2n, mid2, v2;
  logic [3:0] c;
  assign c = (int'(ch_idx) < NCH) ? ch_idx : 4'd0;
  always_comb begin
    fb1  = (32'(b11[c]) * 32'(w11[c]) + 32'(b21[c]) * 32'(w12[c])) >>> B_FRAC;
    w1n  = sat_s(32'(x) - fb1, ST_W);
    mid1 = s1n[c] ? -(32'(w11[c]) <<< 1) : (32'(w11[c]) <<< 1);
    v1   = w1n + mid1 + 32'(w12[c]);
    y1   = sat_s((v1 * $signed({1'b0, a01[c]})) >>> A_FRAC, ST_W);
    fb2  = (32'(b12[c]) * 32'(w21[c]) + 32'(b22[c]) * 32'(w22[c])) >>> B_FRAC;
    w2n  = sat_s(y1 - fb2, ST_W);
    mid2 = s2n[c] ? -(32'(w21[c]) <<< 1) : (32'(w21[c]) <<< 1);
    v2   = sat_s(w2n + mid2 + 32'(w22[c]), ST_W);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; out_ch <= '0; y <= '0;
      for (int i = 0; i < NCH; i++) begin
        w11[i] <= '0; w12[i] <= '0; w21[i] <= '0; w22[i] <= '0;
      end
    end else begin
      out_valid <= in_valid;
      if (clear) begin
        for (int i = 0; i < NCH; i++) begin
          w11[i] <= '0; w12[i] <= '0; w21[i] <= '0; w22[i] <= '0;
        end
      end else if (in_valid) begin
        out_ch   <= ch_idx;
        y        <= ST_W'(v2);
        w11[c]   <= ST_W'(w1n);
        w12[c]   <= w11[c];
        w21[c]   <= ST_W'(w2n);
        w22[c]   <= w21[c];
      end
    end
  end
endmodule
