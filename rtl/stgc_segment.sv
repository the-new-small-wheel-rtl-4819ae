// stgc_segment: sTGC segment finder for one pad-trigger band (one algorithm slot of the
// sTGC trigger processor).
// Inputs: the band's strip data from the eight layers (14 strip charges per layer, with the
// `outer` flag telling whether strips 0..13 or 3..16 of the 17-strip band were sent), the
// band id and phi id from the pad trigger.
// Per layer: strips with charge >= q_thr are hits. A layer cluster is accepted when the hits
// form one contiguous run of 2..5 strips, optionally plus one isolated strip at least two
// strips away, which is ignored as noise (cluster-shape look-up function). The cluster's
// charge-weighted centroid is computed in 1/8 strip units relative to band strip 0.
// Per quadruplet (layers 0-3 and 4-7): at least three good layers are required; the centroids
// are averaged. The segment is valid when both quadruplets are; then
//   R-index = {band_id[6:0], average of both quadruplets >= 8.5 strips},
//   delta-theta = (back - front centroid) scaled by a per-band factor (32 - band_id/8)/32,
//   phi = phi id of the band.
// From the paper: cluster selection by width with noise rejection, per-layer centroid,
// quadruplet centroid with at least 3 of 4 layers, segment R-index and delta-theta from the
// two quadruplet centroids, phi from the pad band. This design's choices: the exact cluster
// rules, 1/8 strip precision, the R-index and delta-theta scale formulas. Latency: 1 clock.
module stgc_segment
  import nsw_pkg::*;
(
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic [Q_W-1:0]                q_thr,
  input  logic                          band_v,
  input  logic [BAND_W-1:0]             band_id,
  input  logic [PHI_W-1:0]              phi_id,
  input  logic [7:0]                    lay_v,
  input  logic [7:0]                    lay_outer,
  input  logic [7:0][SENT_STRIPS-1:0][Q_W-1:0] lay_q,
  output segment_t                      seg
);
  // cluster shape check: returns the mask of the accepted cluster strips, 0 if rejected
  function automatic logic [SENT_STRIPS-1:0] cluster(logic [SENT_STRIPS-1:0] h);
    int runs, start [2], len [2];
    logic [SENT_STRIPS-1:0] m;
    runs = 0; start[0] = 0; start[1] = 0; len[0] = 0; len[1] = 0;
    for (int i = 0; i < SENT_STRIPS; i++)
      if (h[i]) begin
        if (i == 0 || !h[i-1]) begin
          if (runs < 2) start[runs] = i;
          runs++;
        end
        if (runs <= 2) len[runs-1]++;
      end
    m = '0;
    if (runs == 1 && len[0] >= 2 && len[0] <= 5)
      m = h;
    else if (runs == 2 && len[0] == 1 && len[1] >= 2 && len[1] <= 5)
      for (int i = 0; i < SENT_STRIPS; i++) m[i] = h[i] && i >= start[1];
    else if (runs == 2 && len[1] == 1 && len[0] >= 2 && len[0] <= 5)
      for (int i = 0; i < SENT_STRIPS; i++) m[i] = h[i] && i < start[1];
    return m;
  endfunction

  logic [7:0]       good;
  logic [7:0][7:0]  cen;    // centroid, 1/8 strip, relative to band strip 0
  always_comb begin
    for (int l = 0; l < 8; l++) begin
      logic [SENT_STRIPS-1:0] h, m;
      logic [15:0] sq, sqx;
      for (int i = 0; i < SENT_STRIPS; i++) h[i] = lay_q[l][i] >= q_thr && lay_q[l][i] != 0;
      m = cluster(h);
      sq = '0; sqx = '0;
      for (int i = 0; i < SENT_STRIPS; i++)
        if (m[i]) begin
          sq  += 16'(lay_q[l][i]);
          sqx += 16'(lay_q[l][i]) * 16'(8 * (i + (lay_outer[l] ? 3 : 0)));
        end
      good[l] = lay_v[l] && m != 0;
      cen[l]  = (sq == 0) ? 8'd0 : 8'(sqx / sq);
    end
  end

  segment_t nxt;
  always_comb begin
    logic [2:0] n0, n1;
    logic [9:0] s0, s1;
    logic [7:0] c0, c1;
    logic [8:0] avg;
    logic signed [15:0] d;
    n0 = '0; n1 = '0; s0 = '0; s1 = '0;
    for (int l = 0; l < 4; l++) if (good[l])   begin n0++; s0 += 10'(cen[l]);   end
    for (int l = 4; l < 8; l++) if (good[l])   begin n1++; s1 += 10'(cen[l]);   end
    c0  = (n0 == 0) ? 8'd0 : 8'(s0 / 10'(n0));
    c1  = (n1 == 0) ? 8'd0 : 8'(s1 / 10'(n1));
    avg = (9'(c0) + 9'(c1)) >> 1;
    d   = ((16'(signed'({1'b0, c1})) - 16'(signed'({1'b0, c0}))) *
           16'(32 - 32'(band_id) / 8)) >>> 5;
    nxt.valid  = band_v && n0 >= 3 && n1 >= 3;
    nxt.ridx   = {band_id[6:0], avg >= 9'd68};
    nxt.phi    = phi_id;
    nxt.dtheta = d < -128 ? -8'sd128 : d > 127 ? 8'sd127 : 8'(d);
    if (!nxt.valid) nxt = '0;
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) seg <= '0;
    else        seg <= nxt;
endmodule
