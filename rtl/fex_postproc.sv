// fex_postproc: post-processing of the envelope into a 12b feature (paper Fig. 4, right column).
//
//   1. channel-wise offset and scale  s = sat12u(max(env - beta, 0) * alpha / 16)
//   2. log compression               l = log2(s + 1) in 4.8 fixed point (12b, at most 3072)
//   3. normalisation                 f = sat12s((l - mu) * inv_sigma / 64), a Q3.8 feature
// The order of steps and the log(x+1) table follow the paper. Its formats do not appear there;
// this design uses beta 16b, alpha 8b unsigned with 4 fraction bits, mu 12b in the log's 4.8
// format, and stores 1/sigma (8b unsigned, 6 fraction bits) so that the division by sigma becomes
// a multiplication. The log is computed as the position of the leading one (integer part) plus a
// 32-entry table of log2(1 + m/32) indexed by the five bits below it.
// Per-channel parameters are written through cfg_*: cfg_addr = {ch[3:0], field[1:0]} with field
// 0 beta, 1 alpha, 2 mu, 3 inv_sigma. Reset values are beta 0, alpha 1.0, mu 0, 1/sigma 1.0.
// An envelope on in_valid/in_ch/env gives the feature on out_valid/out_ch/feat one clock later.
module fex_postproc
  import kws_pkg::*;
#(
  parameter int NCH = NCH_MAX
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic [3:0]               in_ch,
  input  logic [ENV_W-1:0]         env,
  output logic                     out_valid,
  output logic [3:0]               out_ch,
  output logic signed [FEAT_W-1:0] feat,
  input  logic                     cfg_we,
  input  logic [5:0]               cfg_addr,
  input  logic [15:0]              cfg_data
);
  logic [15:0] beta  [NCH];
  logic [7:0]  alpha [NCH];
  logic [11:0] mu    [NCH];
  logic [7:0]  isig  [NCH];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NCH; i++) begin
        beta[i] <= '0; alpha[i] <= 8'd16; mu[i] <= '0; isig[i] <= 8'd64;
      end
    end else if (cfg_we && int'(cfg_addr[5:2]) < NCH) begin
      case (cfg_addr[1:0])
        2'd0: beta [cfg_addr[5:2]] <= cfg_data;
        2'd1: alpha[cfg_addr[5:2]] <= cfg_data[7:0];
        2'd2: mu   [cfg_addr[5:2]] <= cfg_data[11:0];
        default: isig[cfg_addr[5:2]] <= cfg_data[7:0];
      endcase
    end
  end

  // log2(u) for u in 1..4096, 4.8 fixed point
  function automatic logic [11:0] log2_q8(input logic [12:0] u);
    int e;
    logic [12:0] m;
    e = 0;
    for (int b = 0; b < 13; b++) if (u[b]) e = b;
    m = u << (12 - e);               // leading one moved to bit 12
    return 12'(e * 256) + 12'(LOG_LUT[m[11:7]]);
  endfunction

  logic [3:0]  c;
  logic [11:0] s, l;
  logic signed [31:0] f;
  logic [31:0] sc;
  assign c = (int'(in_ch) < NCH) ? in_ch : 4'd0;
  always_comb begin
    sc = (env > beta[c]) ? ((32'(env - beta[c]) * 32'(alpha[c])) >> 4) : 32'd0;
    s  = (sc > 32'd4095) ? 12'hFFF : sc[11:0];
    l  = log2_q8({1'b0, s} + 13'd1);
    f  = sat_s((($signed(32'(l)) - $signed(32'(mu[c]))) * $signed(32'(isig[c]))) >>> 6, FEAT_W);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; out_ch <= '0; feat <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_ch <= in_ch;
        feat   <= FEAT_W'(f);
      end
    end
  end
endmodule
