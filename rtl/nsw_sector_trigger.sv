// nsw_sector_trigger: trigger path of one New Small Wheel sector, all on the 40 MHz bunch
// crossing clock, with the serial links modelled as one parallel word per bunch crossing.
//   sTGC path: N_PAD_TDS (24) pad_tds -> pad_trigger, which selects up to four bands and
//   tells each strip TDS which band (and BCID) to send; N_LAYERS x N_POS (8 x 12) strip_tds
//   answer with 14 strip charges; one router per layer puts up to four packets on four
//   fibres; stgc_tp matches them to the (delayed) pad bands and computes up to four segments.
//   MM path: N_ART (32) art_asic (hit-address mode) -> mmtp, up to eight segments.
//   segment_merge combines both into at most eight segments per bunch crossing.
// Configuration ports are broadcast; table writes carry a layer/position select where tables
// are per chip. The Sector Logic, optical links, GBTx/SCA and readout are outside this block.
// Timing: pad ToT sampled at edge k gives pad_bands after edge k+3. The pad_dly input must
// equal the distance from pad_bands to the matching router fibres (4 clocks) so that the sTGC
// processor sees both together; sTGC segments then appear after edge k+9. MM hits reach
// mm_seg `mm_window` + 4 clocks after entering the ART ASICs. The merged segments follow one clock
// after stgc_seg / mm_seg. OCR mode sends the run-start band 0xFE with the OCR's own edge.
module nsw_sector_trigger
  import nsw_pkg::*;
#(
  parameter int N_PAD_TDS  = 24,
  parameter int N_PATTERNS = 4700,
  parameter int N_LAYERS   = 8,
  parameter int N_POS      = 12,
  parameter int N_CH       = 128,
  parameter int RB_DEPTH   = 8,
  parameter int N_ART      = 32,
  parameter int N_REGIONS  = 16
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       bcr,
  input  logic                       ocr,
  // pad trigger configuration
  input  logic                       ocr_mode,
  input  logic                       win2,
  input  logic [BCID_W-1:0]          bc_offset,
  input  logic [N_PAD_TDS-1:0]       mask0,
  input  logic [N_PAD_TDS-1:0]       mask1,
  input  logic                       pat_we,
  input  logic [$clog2(N_PATTERNS)-1:0] pat_addr,
  input  logic [7:0][8:0]            pat_pad,
  input  logic [BAND_W-1:0]          pat_band,
  input  logic [PHI_W-1:0]           pat_phi,
  input  logic                       pat_valid,
  input  logic                       bt_we,
  input  logic [BAND_W-1:0]          bt_band,
  input  logic [7:0][3:0]            bt_tds,
  input  logic                       bt_split,
  // strip TDS band look-up tables
  input  logic                       lut_we,
  input  logic [2:0]                 lut_layer,
  input  logic [3:0]                 lut_pos,
  input  logic [BAND_W-1:0]          lut_band,
  input  logic                       lut_valid,
  input  logic [$clog2(N_CH)-1:0]    lut_first,
  // router, sTGC processor
  input  logic [3:0]                 sector_id,
  input  logic [1:0]                 outer_dly,
  input  logic [3:0]                 pad_dly,
  input  logic [Q_W-1:0]             q_thr,
  // ART and MM processor
  input  logic [2:0]                 art_dead_bc,
  input  logic                       art_bypass,
  input  logic                       art_fixed,
  input  logic [3:0]                 mm_window,
  input  logic [2:0]                 mm_thr_x,
  input  logic [2:0]                 mm_thr_uv,
  // merge options
  input  logic                       ignore_mm,
  input  logic                       ignore_stgc,
  input  logic                       phi_from_mm,
  input  logic [RIDX_W-1:0]          r_tol,
  // detector inputs, one sample per bunch crossing
  input  logic [N_PAD_TDS-1:0][PADS_PER_TDS-1:0]          pad_tot,
  input  logic [N_LAYERS-1:0][N_POS-1:0][N_CH-1:0][Q_W-1:0] strip_q,
  input  logic [N_ART-1:0][31:0]                          art_flag,
  input  logic [N_ART-1:0][31:0][5:0]                     art_addr,
  // outputs
  output segment_t [7:0]             seg,
  output logic [3:0]                 n_dup,
  output logic [3:0]                 n_lost,
  output band_t [3:0]                pad_bands,
  output logic                       run_started,
  output strip_payload_t [N_LAYERS-1:0][3:0] fibre,
  output segment_t [3:0]             stgc_seg,
  output segment_t [7:0]             mm_seg,
  output logic [N_ART-1:0][111:0]    art_word
);
  // ---------------- sTGC pad path ----------------
  tds_frames_t [N_PAD_TDS-1:0] pad_frames;
  for (genvar t = 0; t < N_PAD_TDS; t++) begin : g_pad
    pad_tds u_pad (.clk, .rst_n, .bcr, .tot(pad_tot[t]), .frames(pad_frames[t]));
  end

  logic [BCID_W-1:0] bands_bcid;
  logic [7:0][N_POS-1:0][BAND_W-1:0] tds_band;
  logic [N_PAD_TDS-1:0] pad_link_err;
  pad_trigger #(.N_TDS(N_PAD_TDS), .N_PATTERNS(N_PATTERNS), .TDS_PER_LAYER(N_POS)) u_pt (
    .clk, .rst_n, .ocr, .ocr_mode, .win2, .bc_offset, .mask0, .mask1,
    .pat_we, .pat_addr, .pat_pad, .pat_band, .pat_phi, .pat_valid,
    .bt_we, .bt_band, .bt_tds, .bt_split, .pad_frames,
    .bands(pad_bands), .bands_bcid, .tds_band, .run_started, .link_err(pad_link_err));

  // ---------------- sTGC strip path ----------------
  tds_frames_t [N_LAYERS-1:0][N_POS-1:0] strip_frames;
  logic [N_LAYERS-1:0][N_POS-1:0] rt_err;
  for (genvar l = 0; l < N_LAYERS; l++) begin : g_lay
    for (genvar p = 0; p < N_POS; p++) begin : g_pos
      strip_tds #(.N_CH(N_CH), .RB_DEPTH(RB_DEPTH)) u_st (
        .clk, .rst_n, .bcr, .q(strip_q[l][p]), .req_band(tds_band[l][p]), .req_bcid(bands_bcid),
        .lut_we(lut_we && lut_layer == 3'(l) && lut_pos == 4'(p)), .lut_band, .lut_valid,
        .lut_first, .frames(strip_frames[l][p]));
    end
    router #(.N_IN(N_POS), .N_OUT(4)) u_rt (
      .clk, .rst_n, .sector_id, .layer_id(3'(l)), .outer_dly, .in_frames(strip_frames[l]),
      .fibre(fibre[l]), .hdr_err(rt_err[l]));
  end

  logic [3:0][N_LAYERS-1:0] matched;
  stgc_tp #(.N_LAYERS(N_LAYERS)) u_stp (
    .clk, .rst_n, .pad_dly, .q_thr, .pad_band(pad_bands), .fibre, .seg(stgc_seg), .matched);

  // ---------------- MM path ----------------
  logic [N_ART-1:0][11:0] art_bcid;
  for (genvar a = 0; a < N_ART; a++) begin : g_art
    art_asic u_art (.clk, .rst_n, .bcr, .art_flag(art_flag[a]), .art_addr(art_addr[a]),
                    .dead_bc(art_dead_bc), .hit_addr_mode(1'b1), .bypass_prio(art_bypass),
                    .fixed_pattern(art_fixed), .pattern(112'd0), .out(art_word[a]),
                    .out_bcid(art_bcid[a]));
  end

  logic [7:0] mm_lost;
  mmtp #(.N_LINKS(N_ART), .N_REGIONS(N_REGIONS)) u_mm (
    .clk, .rst_n, .window(mm_window), .thr_x(mm_thr_x), .thr_uv(mm_thr_uv),
    .art_word, .seg(mm_seg), .n_lost(mm_lost));

  // ---------------- merge ----------------
  segment_merge u_merge (.clk, .rst_n, .ignore_mm, .ignore_stgc, .phi_from_mm, .r_tol,
                         .st(stgc_seg), .mm(mm_seg), .seg, .n_dup, .n_lost);
endmodule
