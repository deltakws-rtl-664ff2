// state_buffer: state storage of the Delta-RNN accelerator (paper Fig. 3, "State Buffer").
//
// Holds, in 12b Q3.8 words: the current input frame x_t (NI words, written by the frame loader),
// the last propagated input values x_hat (NI), the hidden state h (NH, written eight at a time by
// the state assembler) and the last propagated hidden values h_hat (NH).
// The encoder addresses one element per clock with enc_idx (0..NI-1 inputs, NI..NI+NH-1 hidden)
// and gets the current value and the propagated value back combinationally; its update (upd_*)
// advances the propagated value. rd_idx reads h for the dense FC phase. clear zeroes x_hat,
// h_hat and h at the start of an utterance.
// The paper gives only the name and the size (0.58 kB). This design keeps the gate memories in
// the MAC lanes (mac_nlu), so this buffer holds 2*(NI+NH)*12 = 1776 bits; with the lanes' 4*64*16
// bits of gate memory the state storage is 5872 bits (0.72 kB).
module state_buffer
  import kws_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  clear,
  input  logic                  x_we,
  input  logic [3:0]            x_idx,
  input  logic signed [D_W-1:0] x_data,
  input  logic [6:0]            enc_idx,
  output logic signed [D_W-1:0] enc_cur,
  output logic signed [D_W-1:0] enc_prev,
  input  logic                  upd_en,
  input  logic [6:0]            upd_idx,
  input  logic signed [D_W-1:0] upd_val,
  input  logic                  hw_en,
  input  logic [2:0]            hw_k,
  input  logic signed [D_W-1:0] hw_data [NLANE],
  input  logic [5:0]            rd_idx,
  output logic signed [D_W-1:0] rd_h
);
  logic signed [D_W-1:0] xt [NI], xhat [NI], h [NH], hhat [NH];

  always_comb begin
    if (int'(enc_idx) < NI) begin
      enc_cur  = xt[enc_idx[3:0]];
      enc_prev = xhat[enc_idx[3:0]];
    end else begin
      enc_cur  = h[6'(enc_idx - 7'(NI))];
      enc_prev = hhat[6'(enc_idx - 7'(NI))];
    end
    rd_h = h[rd_idx];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NI; i++) begin xt[i] <= '0; xhat[i] <= '0; end
      for (int i = 0; i < NH; i++) begin h[i] <= '0; hhat[i] <= '0; end
    end else begin
      if (x_we && int'(x_idx) < NI) xt[x_idx] <= x_data;
      if (clear) begin
        for (int i = 0; i < NI; i++) xhat[i] <= '0;
        for (int i = 0; i < NH; i++) begin h[i] <= '0; hhat[i] <= '0; end
      end else begin
        if (upd_en) begin
          if (int'(upd_idx) < NI) xhat[upd_idx[3:0]] <= upd_val;
          else                    hhat[6'(upd_idx - 7'(NI))] <= upd_val;
        end
        if (hw_en)
          for (int m = 0; m < NLANE; m++) h[{hw_k, 3'(m)}] <= hw_data[m];
      end
    end
  end
endmodule
