// nsw_pkg: types and constants shared by the sTGC and Micromegas trigger path blocks.
//
// All blocks run on one clock, the LHC bunch-crossing (BC) clock; one clock cycle is one
// bunch crossing. The multi-gigabit serial links of the real system (4.8 Gb/s TDS, Router,
// ADDC and Pad Trigger fibres) are represented by the parallel word each link carries in one
// bunch crossing. Widths taken from the paper: 12-bit BCID, 6-bit strip charge, 8-bit band-id
// with 0xFF meaning "no band" and 0xFE marking the first bunch crossing of a run, 104 pads per
// pad-TDS, 116-bit TDS payload sent as a 26-bit frame behind a 4-bit 0b1010 header followed by
// three 30-bit frames, 14 of 17 band strips transmitted. The widths of R-index, phi-id and
// delta-theta, and the field order inside the strip-TDS payload, are this design's choice.
package nsw_pkg;

  localparam int BCID_W       = 12;
  localparam int BAND_W       = 8;
  localparam int PHI_W        = 6;
  localparam int Q_W          = 6;    // VMM 6-bit direct-output charge
  localparam int PADS_PER_TDS = 104;
  localparam int BAND_STRIPS  = 17;   // strips in one band of one layer
  localparam int SENT_STRIPS  = 14;   // strips a strip-TDS actually transmits
  localparam int STRIP_CH     = 128;  // channels of a strip-TDS (two VMMs)
  localparam int PAYLOAD_W    = 116;  // TDS payload per bunch crossing
  localparam int FRAME_W      = 30;
  localparam int N_FRAMES     = 4;
  localparam logic [3:0] FRAME_HDR = 4'b1010;

  localparam logic [BAND_W-1:0] BAND_NONE      = 8'hFF;
  localparam logic [BAND_W-1:0] BAND_RUN_START = 8'hFE;

  localparam int RIDX_W = 8;          // R-index of a segment (assumed width)
  localparam int DTH_W  = 8;          // signed delta-theta (assumed width)

  typedef logic [N_FRAMES-1:0][FRAME_W-1:0] tds_frames_t;

  // Strip-TDS payload. 84 + 12 + 8 + 1 + 1 = 106 bits, padded to 116.
  typedef struct packed {
    logic [9:0]                      spare;
    logic                            valid;    // 0: null packet
    logic [BAND_W-1:0]               band_id;
    logic [BCID_W-1:0]               bcid;
    logic                            outer;    // 1: strips 3..16 of the band, 0: strips 0..13
    logic [SENT_STRIPS-1:0][Q_W-1:0] q;        // q[0] is the lowest strip sent
  } strip_payload_t;

  // Pad-TDS payload: 104 pad hits and the BCID they were assigned.
  typedef struct packed {
    logic [PADS_PER_TDS-1:0] pads;
    logic [BCID_W-1:0]       bcid;
  } pad_payload_t;

  // A track segment as sent to the Sector Logic.
  typedef struct packed {
    logic                     valid;
    logic [RIDX_W-1:0]        ridx;
    logic [PHI_W-1:0]         phi;
    logic signed [DTH_W-1:0]  dtheta;
  } segment_t;

  // Output of the Pad Trigger for one found tower.
  typedef struct packed {
    logic              valid;
    logic [BAND_W-1:0] band_id;
    logic [PHI_W-1:0]  phi_id;
  } band_t;

endpackage
