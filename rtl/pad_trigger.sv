// pad_trigger: band finding of the sTGC Pad Trigger board (one per sector).
//
// Inputs are the links of N_TDS pad-TDS ASICs, three per layer, eight layers: layers 0-3 form
// the inner quadruplet and 4-7 the outer one. Each link is unscrambled (tds_descrambler) and
// may be forced to all-0 or all-1 by two 24-bit masks. Pad hits of this and, if `win2` is set,
// the previous bunch crossing are combined: the paper's two-BC coincidence window.
//
// A table of N_PATTERNS trigger patterns (written through pat_*) lists for each pointing tower
// one pad per layer (index 0..3*104-1 within the layer), its band-id and phi-id. Every pattern
// has its own comparator, which fires when at least 3 of 4 layers are hit in both quadruplets
// ("2 x 3/4 coincidence"). Comparator results are ORed per band-id. A priority encoder, lowest
// band-id first, then takes at most MAX_BANDS bands; a band flagged `split` in the band table
// occupies two strip-TDS and so counts twice against the limit. For each band the band table
// also gives the strip-TDS position (per layer) that holds it; the sFEB selector sends every
// strip-TDS either its band-id or 0xFF. The phi-id of a band is that of its lowest-numbered
// firing pattern.
//
// BCID: the BCID that the pad-TDS attached to the data, plus a configurable offset. OCR mode (Table 5): when `ocr_mode`
// is set, nothing is sent until an OCR arrives; the bunch crossing of the OCR is sent with the
// non-existent band-id 0xFE, which marks the first bunch crossing of the run downstream.
//
// Following the paper: 3-of-4 per quadruplet, per-pattern comparators grouped by band,
// 1- or 2-BC window, max four bands with split bands counting twice, masks, 0xFE start
// marker. This design's choices: lowest band-id has priority, table formats, widths.
// Latency: link frames in cycle n give bands at the end of cycle n+2.
module pad_trigger
  import nsw_pkg::*;
#(
  parameter int N_TDS         = 24,
  parameter int N_PATTERNS    = 4700,
  parameter int MAX_BANDS     = 4,
  parameter int TDS_PER_LAYER = 12
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         ocr,
  // configuration
  input  logic                         ocr_mode,
  input  logic                         win2,
  input  logic [BCID_W-1:0]            bc_offset,
  input  logic [N_TDS-1:0]             mask0,
  input  logic [N_TDS-1:0]             mask1,
  input  logic                         pat_we,
  input  logic [$clog2(N_PATTERNS)-1:0] pat_addr,
  input  logic [7:0][8:0]              pat_pad,
  input  logic [BAND_W-1:0]            pat_band,
  input  logic [PHI_W-1:0]             pat_phi,
  input  logic                         pat_valid,
  input  logic                         bt_we,
  input  logic [BAND_W-1:0]            bt_band,
  input  logic [7:0][3:0]              bt_tds,      // strip-TDS position per layer, 15 = none
  input  logic                         bt_split,    // band also in position+1
  // data
  input  tds_frames_t [N_TDS-1:0]      pad_frames,
  output band_t [MAX_BANDS-1:0]        bands,
  output logic [BCID_W-1:0]            bands_bcid,
  output logic [7:0][TDS_PER_LAYER-1:0][BAND_W-1:0] tds_band,
  output logic                         run_started,
  output logic [N_TDS-1:0]             link_err     // frame header not 0b1010
);
  localparam int NB    = 1 << BAND_W;
  localparam int PER_L = N_TDS / 8;
  localparam int LP    = PER_L * PADS_PER_TDS;   // pads per layer

  // ---------------- link receivers ----------------
  pad_payload_t [N_TDS-1:0] rx;
  logic [N_TDS-1:0]         hdr_ok;
  for (genvar t = 0; t < N_TDS; t++) begin : g_rx
    tds_descrambler u_dsc (.clk, .rst_n, .valid(1'b1), .frames(pad_frames[t]),
                           .payload(rx[t]), .hdr_ok(hdr_ok[t]));
  end

  assign link_err = ~hdr_ok;

  // ---------------- configuration tables ----------------
  logic [N_PATTERNS-1:0][7:0][8:0]     t_pad;
  logic [N_PATTERNS-1:0][BAND_W-1:0]   t_band;
  logic [N_PATTERNS-1:0][PHI_W-1:0]    t_phi;
  logic [N_PATTERNS-1:0]               t_valid;
  logic [NB-1:0][7:0][3:0]             b_tds;
  logic [NB-1:0]                       b_split;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      t_valid <= '0;
      b_split <= '0;
      b_tds   <= '1;
    end else begin
      if (pat_we) begin
        t_pad[pat_addr]   <= pat_pad;
        t_band[pat_addr]  <= pat_band;
        t_phi[pat_addr]   <= pat_phi;
        t_valid[pat_addr] <= pat_valid;
      end
      if (bt_we) begin
        b_tds[bt_band]   <= bt_tds;
        b_split[bt_band] <= bt_split;
      end
    end
  end

  // ---------------- pad hit vectors ----------------
  logic [7:0][LP-1:0] hits, hits_prev, hits_win;
  always_comb begin
    for (int l = 0; l < 8; l++)
      for (int k = 0; k < PER_L; k++) begin
        int t;
        t = l*PER_L + k;
        hits[l][k*PADS_PER_TDS +: PADS_PER_TDS] =
          mask1[t] ? '1 : (mask0[t] ? '0 : rx[t].pads);
      end
    hits_win = win2 ? (hits | hits_prev) : hits;
  end

  // ---------------- comparators, grouped by band ----------------
  logic [NB-1:0]            band_hit;
  logic [NB-1:0][PHI_W-1:0] band_phi;
  always_comb begin
    band_hit = '0;
    band_phi = '0;
    for (int p = N_PATTERNS-1; p >= 0; p--) begin
      logic [2:0] c0, c1;
      c0 = 0; c1 = 0;
      for (int l = 0; l < 4; l++) begin
        c0 += 3'(hits_win[l][t_pad[p][l]]);
        c1 += 3'(hits_win[l+4][t_pad[p][l+4]]);
      end
      if (t_valid[p] && c0 >= 3 && c1 >= 3) begin
        band_hit[t_band[p]] = 1'b1;
        band_phi[t_band[p]] = t_phi[p];
      end
    end
    band_hit[BAND_NONE]      = 1'b0;
    band_hit[BAND_RUN_START] = 1'b0;
  end

  // ---------------- priority encoder ----------------
  band_t [MAX_BANDS-1:0] sel;
  logic  [$clog2(MAX_BANDS+2)-1:0] used;
  always_comb begin
    sel  = '0;
    used = '0;
    for (int b = 0; b < NB; b++) begin
      if (band_hit[b]) begin
        if (int'(used) + (b_split[b] ? 2 : 1) <= MAX_BANDS) begin
          sel[used].valid   = 1'b1;
          sel[used].band_id = BAND_W'(b);
          sel[used].phi_id  = band_phi[b];
          used += b_split[b] ? 2 : 1;
        end
      end
    end
  end

  // ---------------- BCID, OCR mode, output ----------------
  logic              waiting;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hits_prev   <= '0;
      bands       <= '0;
      bands_bcid  <= '0;
      waiting     <= 1'b1;
      run_started <= 1'b0;
    end else begin
      hits_prev  <= hits;
      bands_bcid <= rx[0].bcid + bc_offset;
      if (ocr_mode && waiting && !ocr) begin
        bands <= '0;
      end else if (ocr_mode && waiting && ocr) begin
        bands            <= '0;
        bands[0].valid   <= 1'b1;
        bands[0].band_id <= BAND_RUN_START;
        waiting          <= 1'b0;
        run_started      <= 1'b1;
      end else begin
        bands <= sel;
      end
      if (!ocr_mode) waiting <= 1'b1;
    end
  end

  // sFEB selector: each strip-TDS gets its band-id or 0xFF
  always_comb begin
    for (int l = 0; l < 8; l++)
      for (int t = 0; t < TDS_PER_LAYER; t++) begin
        tds_band[l][t] = BAND_NONE;
        for (int s = MAX_BANDS-1; s >= 0; s--) begin
          if (bands[s].valid && bands[s].band_id != BAND_RUN_START &&
              b_tds[bands[s].band_id][l] != 4'hF &&
              (int'(b_tds[bands[s].band_id][l]) == t ||
               (b_split[bands[s].band_id] && int'(b_tds[bands[s].band_id][l]) + 1 == t)))
            tds_band[l][t] = bands[s].band_id;
        end
      end
  end
endmodule
