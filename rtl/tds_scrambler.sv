// tds_scrambler: framing and scrambling of one TDS payload per bunch crossing.
//
// The TDS sends 116 payload bits per bunch crossing as four frames: a 4-bit unscrambled
// header 0b1010 and 26 scrambled bits, then three frames of 30 scrambled bits. The scrambler
// is the self-synchronous one of the 10 Gb/s Ethernet physical layer, polynomial
// 1 + x^39 + x^58: each output bit is the data bit XOR the output bits sent 39 and 58 bits
// earlier. Header, frame sizes and polynomial follow the paper. The bit order (payload MSB
// first, into frame 0 bit 25 downwards) and the all-ones reset state are this design's choice.
//
// Interface: when `valid` is high the 116 payload bits are scrambled and the four frames
// appear on `frames` one clock later; the scrambler state then carries over to the next
// bunch crossing. Latency: 1 clock.
module tds_scrambler
  import nsw_pkg::*;
#(
  parameter int PAYLOAD_W = nsw_pkg::PAYLOAD_W
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 valid,
  input  logic [PAYLOAD_W-1:0] payload,
  output tds_frames_t          frames
);
  logic [57:0]          state_q, state_d;
  logic [PAYLOAD_W-1:0] scr;

  always_comb begin
    logic s;
    state_d = state_q;
    for (int i = PAYLOAD_W-1; i >= 0; i--) begin
      s       = payload[i] ^ state_d[38] ^ state_d[57];
      scr[i]  = s;
      state_d = {state_d[56:0], s};
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= '1;
      frames  <= '0;
    end else if (valid) begin
      state_q   <= state_d;
      frames[0] <= {FRAME_HDR, scr[PAYLOAD_W-1 -: 26]};
      frames[1] <= scr[PAYLOAD_W-27 -: 30];
      frames[2] <= scr[PAYLOAD_W-57 -: 30];
      frames[3] <= scr[PAYLOAD_W-87 -: 30];
    end
  end
endmodule
