// strip_tds: the strip mode of the sTGC Trigger Data Serializer.
//
// Every bunch crossing the 128 6-bit strip charges from two VMMs are written, with their
// BCID, into a ring buffer of RB_DEPTH bunch crossings, addressed by the low BCID bits. The
// Pad Trigger sends a request: a band-id and the BCID wanted. A look-up table, written
// through the lut_* port, gives for each band-id the first channel of the band in this TDS;
// a band-id without a valid entry (0xFF in particular) produces a null packet. If the slot of
// the requested BCID still holds that BCID, the 17 charges of the band are read out and 14 of
// them are sent: strips 0..13 ("inner") or 3..16 ("outer") of the band, with a flag saying
// which. This design sends the window with the larger charge sum; the paper does not give the
// rule. The payload goes through tds_scrambler to the Router.
//
// The ring buffer is written at the end of the bunch crossing, so a request can reach the
// RB_DEPTH bunch crossings before the current one.
// Timing: a request in cycle n is answered on `frames` at the end of cycle n+2
// (one cycle look-up and read, one cycle framing).
module strip_tds
  import nsw_pkg::*;
#(
  parameter int N_CH     = nsw_pkg::STRIP_CH,
  parameter int RB_DEPTH = 8
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        bcr,
  input  logic [N_CH-1:0][Q_W-1:0]    q,
  input  logic [BAND_W-1:0]           req_band,
  input  logic [BCID_W-1:0]           req_bcid,
  input  logic                        lut_we,
  input  logic [BAND_W-1:0]           lut_band,
  input  logic                        lut_valid,
  input  logic [$clog2(N_CH)-1:0]     lut_first,
  output tds_frames_t                 frames
);
  localparam int AW = $clog2(RB_DEPTH);
  localparam int CW = $clog2(N_CH);

  logic [RB_DEPTH-1:0][N_CH-1:0][Q_W-1:0] rb_q;
  logic [RB_DEPTH-1:0][BCID_W-1:0]        rb_bcid;
  logic [RB_DEPTH-1:0]                    rb_full;
  logic [BCID_W-1:0]                      bcid;
  logic [(1<<BAND_W)-1:0]                 lut_v;
  logic [(1<<BAND_W)-1:0][CW-1:0]         lut_f;
  strip_payload_t                         pl_q, pl_d;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bcid    <= '0;
      rb_bcid <= '0;
      rb_full <= '0;
      rb_q    <= '0;
      lut_v   <= '0;
      lut_f   <= '0;
      pl_q    <= '0;
    end else begin
      bcid <= bcr ? BCID_W'(1) : bcid + 1'b1;
      rb_q[(bcr ? '0 : bcid[AW-1:0])]    <= q;
      rb_bcid[(bcr ? '0 : bcid[AW-1:0])] <= bcr ? '0 : bcid;
      rb_full[(bcr ? '0 : bcid[AW-1:0])] <= 1'b1;
      if (lut_we) begin
        lut_v[lut_band] <= lut_valid;
        lut_f[lut_band] <= lut_first;
      end
      pl_q <= pl_d;
    end
  end

  always_comb begin
    logic [BAND_STRIPS-1:0][Q_W-1:0] band_q;
    logic [AW-1:0] slot;
    int lo, hi;
    slot = req_bcid[AW-1:0];
    for (int i = 0; i < BAND_STRIPS; i++) begin
      logic [CW:0] ch;
      ch = {1'b0, lut_f[req_band]} + (CW+1)'(i);
      band_q[i] = (ch < N_CH) ? rb_q[slot][ch[CW-1:0]] : '0;
    end
    lo = 0; hi = 0;
    for (int i = 0; i < SENT_STRIPS; i++) begin
      lo += int'(band_q[i]);
      hi += int'(band_q[i + BAND_STRIPS - SENT_STRIPS]);
    end
    pl_d         = '0;
    pl_d.valid   = lut_v[req_band] && rb_full[slot] && (rb_bcid[slot] == req_bcid);
    pl_d.band_id = req_band;
    pl_d.bcid    = req_bcid;
    pl_d.outer   = hi > lo;
    for (int i = 0; i < SENT_STRIPS; i++)
      pl_d.q[i] = pl_d.outer ? band_q[i + BAND_STRIPS - SENT_STRIPS] : band_q[i];
    if (!pl_d.valid) pl_d = '0;
  end

  tds_scrambler u_scr (.clk, .rst_n, .valid(1'b1), .payload(pl_q), .frames);
endmodule
