// argmax: picks the keyword class with the largest FC output (paper Fig. 1, "Argmax").
//
// On in_valid the NCLS signed scores are compared and the index of the largest, and its score,
// appear on out_valid/cls/max_score one clock later. Of equal scores the lowest index wins.
// The paper names the block only; the single-cycle comparison tree and the tie rule are this
// design's choices.
module argmax
  import kws_pkg::*;
#(
  parameter int N = NCLS
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  input  logic signed [M_W-1:0] scores [N],
  output logic                  out_valid,
  output logic [3:0]            cls,
  output logic signed [M_W-1:0] max_score
);
  logic [3:0]            bi;
  logic signed [M_W-1:0] bv;
  always_comb begin
    bi = '0;
    bv = scores[0];
    for (int i = 1; i < N; i++)
      if (scores[i] > bv) begin
        bv = scores[i];
        bi = 4'(i);
      end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; cls <= '0; max_score <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        cls       <= bi;
        max_score <= bv;
      end
    end
  end
endmodule
