// envelope_det: per-channel envelope detector of the feature extractor.
//
// For every filter output it adds |y| (saturated to 16 bits) to the channel's accumulator. On the
// last sample of a 128-sample frame (frame_end high, 16 ms at 8 kS/s) it emits the frame average,
// sum/128 (a 7-bit shift), as a 16b envelope on env_valid/env_ch/env one clock later and restarts
// the accumulator: the rectify, accumulate, divide-by-128 and down-sample steps of the paper's
// Fig. 4. Non-overlapping frames follow the paper's Table I (16 ms window, 16 ms shift).
// The accumulator width (16+7 bits) and the saturation of |y| to 16 bits are this design's choices.
module envelope_det
  import kws_pkg::*;
#(
  parameter int NCH = NCH_MAX,
  parameter int LEN = FRAME_LEN     // samples per frame, a power of two
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    clear,
  input  logic                    in_valid,
  input  logic [3:0]              in_ch,
  input  logic signed [ST_W-1:0]  y,
  input  logic                    frame_end,
  output logic                    env_valid,
  output logic [3:0]              env_ch,
  output logic [ENV_W-1:0]        env
);
  localparam int SH    = $clog2(LEN);
  localparam int ACC_W = ENV_W + SH;
  logic [ACC_W-1:0] acc [NCH];
  logic [ENV_W-1:0] mag;
  logic [ACC_W-1:0] sum;
  logic [3:0] c;
  assign c = (int'(in_ch) < NCH) ? in_ch : 4'd0;

  always_comb begin
    logic signed [ST_W:0] a;
    a   = (y < 0) ? -(ST_W+1)'(y) : (ST_W+1)'(y);
    mag = (a > (ST_W+1)'(2**ENV_W - 1)) ? '1 : a[ENV_W-1:0];
    sum = acc[c] + ACC_W'(mag);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      env_valid <= 1'b0; env_ch <= '0; env <= '0;
      for (int i = 0; i < NCH; i++) acc[i] <= '0;
    end else begin
      env_valid <= 1'b0;
      if (clear) begin
        for (int i = 0; i < NCH; i++) acc[i] <= '0;
      end else if (in_valid) begin
        if (frame_end) begin
          acc[c]    <= '0;
          env_valid <= 1'b1;
          env_ch    <= in_ch;
          env       <= ENV_W'(sum >> SH);
        end else begin
          acc[c] <= sum;
        end
      end
    end
  end
endmodule
