// config_reg: run-time configuration registers of the Delta-RNN accelerator (paper Fig. 1,
// "Config Reg").
//
// Written by the host through the SPI link (we, addr, data), read by the controller as a struct:
//   addr 0  Delta_TH, 12b Q3.8 (reset 51, i.e. 0.2: the paper's chosen design point)
//   addr 1  frames per decision (reset 62: one second of audio at a 16 ms frame shift)
//   addr 2  features per frame (reset 10: the paper's ten FEx channels)
//   addr 3  writing any value pulses restart: the accelerator drops the utterance in progress
//           and re-initialises its state
// The paper names the block and the threshold; the register map and the other fields are this
// design's choices.
module config_reg
  import kws_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        we,
  input  logic [3:0]  addr,
  input  logic [15:0] data,
  output rnn_cfg_t    cfg,
  output logic        restart
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg.delta_th   <= 12'd51;
      cfg.num_frames <= 8'd62;
      cfg.num_in     <= 4'(NI);
      restart        <= 1'b0;
    end else begin
      restart <= we && addr == 4'd3;
      if (we) begin
        case (addr)
          4'd0: cfg.delta_th   <= data[D_W-1:0];
          4'd1: cfg.num_frames <= data[7:0];
          4'd2: cfg.num_in     <= (data[3:0] > 4'(NI) || data[3:0] == 4'd0) ? 4'(NI) : data[3:0];
          default: ;
        endcase
      end
    end
  end
endmodule
