// pad_tds: the pad mode of the sTGC Trigger Data Serializer.
//
// Each bunch crossing the block samples the 104 pad Time-over-Threshold inputs of two VMMs.
// A pad hit is the rising edge of its ToT signal (0 in the previous bunch crossing, 1 now),
// and it is tagged with the 12-bit BCID counter, which restarts at 0 on a bunch-counter reset
// (BCR). The 104 hit bits and the BCID form the 116-bit payload that tds_scrambler turns into
// the four frames of the 4.8 Gb/s link to the Pad Trigger, every bunch crossing.
// Following the paper: rising-edge capture, BCID tagging, 104+12 bits in four scrambled
// frames. Not modelled: the per-channel delay in 3.125 ns steps, which acts below one bunch
// crossing. Latency: hits seen in cycle n appear on `frames` at the end of cycle n+1.
module pad_tds
  import nsw_pkg::*;
#(
  parameter int N_PADS = nsw_pkg::PADS_PER_TDS
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              bcr,
  input  logic [N_PADS-1:0] tot,
  output tds_frames_t       frames
);
  logic [N_PADS-1:0] tot_q;
  logic [BCID_W-1:0] bcid;
  pad_payload_t      pl_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tot_q <= '0;
      bcid  <= '0;
      pl_q  <= '0;
    end else begin
      tot_q   <= tot;
      bcid    <= bcr ? BCID_W'(1) : bcid + 1'b1;
      pl_q.pads <= PADS_PER_TDS'(tot & ~tot_q);
      pl_q.bcid <= bcr ? '0 : bcid;
    end
  end

  tds_scrambler u_scr (.clk, .rst_n, .valid(1'b1), .payload(pl_q), .frames);
endmodule
