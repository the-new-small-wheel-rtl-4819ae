// tds_descrambler: receive side of the TDS link framing (Router, Pad Trigger, Trigger Processor).
//
// Checks the unscrambled 0b1010 header of frame 0 and undoes the 1 + x^39 + x^58
// self-synchronous scrambling: each data bit is the received bit XOR the received bits 39 and
// 58 positions earlier. Being self-synchronising, the receiver needs no reset agreement with
// the sender: after 58 received bits its state matches. The paper says only that the
// receivers "unscramble"; this is the matching inverse of tds_scrambler.
//
// Interface: `frames` are taken when `valid` is high; `payload` and `hdr_ok` follow one clock
// later. Latency: 1 clock.
module tds_descrambler
  import nsw_pkg::*;
#(
  parameter int PAYLOAD_W = nsw_pkg::PAYLOAD_W
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 valid,
  input  tds_frames_t          frames,
  output logic [PAYLOAD_W-1:0] payload,
  output logic                 hdr_ok
);
  logic [57:0]          state_q, state_d;
  logic [PAYLOAD_W-1:0] rx, dat;

  assign rx = {frames[0][25:0], frames[1], frames[2], frames[3]};

  always_comb begin
    state_d = state_q;
    for (int i = PAYLOAD_W-1; i >= 0; i--) begin
      dat[i]  = rx[i] ^ state_d[38] ^ state_d[57];
      state_d = {state_d[56:0], rx[i]};
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= '1;
      payload <= '0;
      hdr_ok  <= 1'b0;
    end else if (valid) begin
      state_q <= state_d;
      payload <= dat;
      hdr_ok  <= (frames[0][29:26] == FRAME_HDR);
    end
  end
endmodule
