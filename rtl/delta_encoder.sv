// delta_encoder: the Delta Encoder of the Delta-RNN accelerator (paper Fig. 3).
//
// For one state element per clock it forms the temporal difference between the current value
// (an input feature x_t or a hidden state h_t) and the value last propagated for that element
// (x_hat or h_hat, held in the state buffer): d = cur - prev. If |d| > Delta_TH the difference is
// passed on and the element's propagated value is advanced (upd_*), otherwise the output is 0 and
// nothing changes: the subtract, absolute value, threshold compare and select-0 multiplexer of the
// paper's figure. The output (out_valid, out_idx, out_delta, out_nz) is registered: one clock of
// latency. The update is written by the state buffer on the same clock edge that registers the
// output.
// This design's choices: d is saturated to the 12b delta format, and the propagated value is
// advanced by the saturated delta (prev + d_sat), so that x_hat/h_hat always equal the sum of the
// deltas that were sent. The comparison is strictly greater-than, as printed in the paper.
// upd_idx simply repeats in_idx, so that the state buffer's write port has its own address; on its
// own this block therefore shows those seven output bits as passed straight through.
module delta_encoder
  import kws_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  input  logic [6:0]            in_idx,
  input  logic signed [D_W-1:0] cur,
  input  logic signed [D_W-1:0] prev,
  input  logic [D_W-1:0]        th,
  output logic                  out_valid,
  output logic [6:0]            out_idx,
  output logic signed [D_W-1:0] out_delta,
  output logic                  out_nz,
  output logic                  upd_en,
  output logic [6:0]            upd_idx,
  output logic signed [D_W-1:0] upd_val
);
  logic signed [D_W:0]   d, mag;
  logic signed [D_W-1:0] d_sat;
  logic                  fire;

  always_comb begin
    d     = (D_W+1)'(cur) - (D_W+1)'(prev);
    mag   = (d < 0) ? -d : d;
    fire  = mag > $signed({2'b00, th[D_W-2:0]});
    d_sat = D_W'(sat_s(32'(d), D_W));
    upd_en  = in_valid && fire;
    upd_idx = in_idx;
    upd_val = D_W'(prev + d_sat);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; out_idx <= '0; out_delta <= '0; out_nz <= 1'b0;
    end else begin
      out_valid <= in_valid;
      out_idx   <= in_idx;
      out_delta <= fire ? d_sat : '0;
      out_nz    <= in_valid && fire;
    end
  end
endmodule
