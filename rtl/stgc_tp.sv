// stgc_tp: sTGC trigger processor for one sector: band builder plus four stgc_segment slots.
// The pad trigger's selected bands (up to four per BC) reach the processor before the strip
// data that they requested; the band builder delays them by `pad_dly` (0..15) bunch
// crossings in a shift register. For algorithm slot j it takes delayed pad band j and, for
// each of the 8 layers, looks among that layer's router fibres for a valid packet with the
// same band id (the first matching fibre wins). The matched strip charges and outer flags
// are registered and given to stgc_segment j, together with the band and phi ids.
// From the paper: band builder matching strip data from the routers to the pad-trigger bands,
// four algorithm slots. This design's choices: explicit pad_dly setting, first-fibre-wins.
// Latency: fibre data at edge k (with pad band delayed to the same edge) -> segment after
// edge k+2.
module stgc_tp
  import nsw_pkg::*;
#(
  parameter int N_LAYERS = 8,
  parameter int N_FIBRES = 4,
  parameter int N_SLOTS  = 4
) (
  input  logic                                         clk,
  input  logic                                         rst_n,
  input  logic [3:0]                                   pad_dly,
  input  logic [Q_W-1:0]                               q_thr,
  input  band_t [N_SLOTS-1:0]                          pad_band,
  input  strip_payload_t [N_LAYERS-1:0][N_FIBRES-1:0]  fibre,
  output segment_t [N_SLOTS-1:0]                       seg,
  output logic [N_SLOTS-1:0][N_LAYERS-1:0]             matched
);
  band_t [15:0][N_SLOTS-1:0] dl;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) dl <= '0;
    else        dl <= {dl[14:0], pad_band};

  band_t [N_SLOTS-1:0] bd;
  assign bd = (pad_dly == 0) ? pad_band : dl[pad_dly - 1];

  band_t [N_SLOTS-1:0] bq;
  logic [N_SLOTS-1:0][N_LAYERS-1:0] lv, lo;
  logic [N_SLOTS-1:0][N_LAYERS-1:0][SENT_STRIPS-1:0][Q_W-1:0] lq;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bq <= '0; lv <= '0; lo <= '0; lq <= '0;
    end else begin
      bq <= bd;
      for (int j = 0; j < N_SLOTS; j++)
        for (int l = 0; l < N_LAYERS; l++) begin
          lv[j][l] <= 1'b0;
          lo[j][l] <= 1'b0;
          lq[j][l] <= '0;
          for (int f = N_FIBRES-1; f >= 0; f--)
            if (bd[j].valid && fibre[l][f].valid && fibre[l][f].band_id == bd[j].band_id) begin
              lv[j][l] <= 1'b1;
              lo[j][l] <= fibre[l][f].outer;
              lq[j][l] <= fibre[l][f].q;
            end
        end
    end
  end
  assign matched = lv;

  for (genvar j = 0; j < N_SLOTS; j++) begin : g_slot
    stgc_segment u_seg (.clk, .rst_n, .q_thr, .band_v(bq[j].valid), .band_id(bq[j].band_id),
                        .phi_id(bq[j].phi_id), .lay_v(lv[j]), .lay_outer(lo[j]),
                        .lay_q(lq[j]), .seg(seg[j]));
  end
endmodule
