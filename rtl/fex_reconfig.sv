// fex_reconfig: reconfiguration control and sequencer of the serial feature extractor.
//
// The filter bank is time-multiplexed: for each 12b audio sample (in_valid/sample) the sequencer
// steps a slot counter through all 16 channel slots, one per clock, and marks a slot valid
// (slot_valid, slot_ch, slot_x) only when its bit in ch_sel is set. Unselected channels are not
// computed at all, which is where the power saving of running 10 of the 16 channels comes from.
// It also counts samples and raises slot_frame_end during the 128th sample of each frame.
// At 8 kS/s and a 128 kHz FEx clock a sample period is exactly 16 clocks, one per slot. A sample
// that arrives while a sweep is still running is held and started when the sweep ends (one deep);
// a third one overwrites the held sample and pulses dropped.
// The channel selection (1 to 16 channels, Ch_sel) is the paper's; the one-slot-per-clock
// schedule and the one-deep sample buffer are this design's choices.
module fex_reconfig
  import kws_pkg::*;
#(
  parameter int LEN = FRAME_LEN
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    clear,
  input  logic [NCH_MAX-1:0]      ch_sel,
  input  logic                    in_valid,
  input  logic signed [AUD_W-1:0] sample,
  output logic                    slot_valid,
  output logic [3:0]              slot_ch,
  output logic signed [AUD_W-1:0] slot_x,
  output logic                    slot_frame_end,
  output logic                    busy,
  output logic                    dropped
);
  logic [3:0] slot;
  logic [$clog2(LEN)-1:0] scnt;
  logic pend;
  logic signed [AUD_W-1:0] pend_x;

  assign slot_valid     = busy && ch_sel[slot];
  assign slot_ch        = slot;
  assign slot_frame_end = (scnt == $bits(scnt)'(LEN - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      slot <= '0; scnt <= '0; busy <= 1'b0; pend <= 1'b0; pend_x <= '0; slot_x <= '0;
      dropped <= 1'b0;
    end else if (clear) begin
      slot <= '0; scnt <= '0; busy <= 1'b0; pend <= 1'b0; dropped <= 1'b0;
    end else begin
      dropped <= 1'b0;
      if (busy) begin
        slot <= slot + 1'b1;
        if (slot == 4'd15) begin
          scnt <= scnt + 1'b1;
          if (pend || in_valid) begin
            slot_x <= pend ? pend_x : sample;
            pend   <= pend && in_valid;
            pend_x <= sample;
          end else begin
            busy <= 1'b0;
          end
        end else if (in_valid) begin
          dropped <= pend;
          pend    <= 1'b1;
          pend_x  <= sample;
        end
      end else if (in_valid) begin
        busy   <= 1'b1;
        slot   <= '0;
        slot_x <= sample;
      end
    end
  end
endmodule
