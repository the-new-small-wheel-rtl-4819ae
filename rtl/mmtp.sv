// mmtp: Micromegas trigger processor for one sector.
// N_LINKS (32) ART links, LINKS_PER_PLANE (4) per plane, each carrying art_asic hit-address
// words, are decoded by mm_decoder into strip/plane/slope hits (eight per link per BC). All
// hits go to N_REGIONS (16) mm_finder regions of 64 slope roads; each region can fire two
// roads per BC and fits them. mm_cand_select keeps up to eight segments per BC.
// Configuration: coincidence window (1..8 BC), X and UV hit thresholds.
// From the paper: decoder, finder with ~1000 roads in 16 regions, fitter, and selection of
// up to eight segments. Own choices are described in the sub-blocks.
// Latency: a road collecting its first hit from link words at edge k fires at edge
// k + 1 + window, and its segment is on `seg` after edge k + 3 + window - 1.
module mmtp
  import nsw_pkg::*;
#(
  parameter int N_LINKS = 32,
  parameter int LINKS_PER_PLANE = 4,
  parameter int N_REGIONS = 16
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic [3:0]                 window,
  input  logic [2:0]                 thr_x,
  input  logic [2:0]                 thr_uv,
  input  logic [N_LINKS-1:0][111:0]  art_word,
  output segment_t [7:0]             seg,
  output logic [7:0]                 n_lost
);
  localparam int NH = 8 * N_LINKS;
  logic [NH-1:0]       hit_v;
  logic [NH-1:0][2:0]  hit_plane;
  logic [NH-1:0][12:0] hit_strip;
  logic [NH-1:0][15:0] hit_slope;

  for (genvar l = 0; l < N_LINKS; l++) begin : g_dec
    mm_decoder #(.LINK(l), .LINKS_PER_PLANE(LINKS_PER_PLANE)) u_dec (
      .clk, .rst_n, .art_word(art_word[l]),
      .hit_v(hit_v[8*l +: 8]), .hit_plane(hit_plane[8*l +: 8]),
      .hit_strip(hit_strip[8*l +: 8]), .hit_slope(hit_slope[8*l +: 8]));
  end

  segment_t [2*N_REGIONS-1:0] cand;
  for (genvar r = 0; r < N_REGIONS; r++) begin : g_reg
    mm_finder #(.REGION(r), .N_HITS(NH)) u_find (
      .clk, .rst_n, .window, .thr_x, .thr_uv, .hit_v, .hit_plane, .hit_slope,
      .seg(cand[2*r +: 2]));
  end

  mm_cand_select #(.N_IN(2*N_REGIONS)) u_sel (.clk, .rst_n, .cand, .seg, .n_lost);
endmodule
