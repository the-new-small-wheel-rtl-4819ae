// mm_decoder: first stage of the Micromegas trigger processor. It takes one ART link word
// (hit-address mode of art_asic: eight 5-bit VMM ids, a 4-bit hit count and eight 6-bit
// addresses) and turns each reported hit into a strip number, a plane number and a slope.
// The slope is the hit's radial position divided by the plane's z position, computed as
// slope = (Y0 + strip * PITCH) * INVZ[plane] >> 16 from small constant tables; it is a 16-bit
// fraction of 1. Link LINK serves plane LINK / LINKS_PER_PLANE and covers strips
// (LINK % LINKS_PER_PLANE) * 2048 .. +2047 (32 VMMs x 64 channels).
// From the paper: the use of per-plane offset and 1/z tables, and a slope per hit. This
// design's choices: the table values (1/16 mm units, pitch 0.4375 mm, planes at
// z = 7000..7350 mm), the 16-bit slope, ignoring stereo angle in the slope.
// Latency: one clock.
module mm_decoder #(
  parameter int LINK = 0,
  parameter int LINKS_PER_PLANE = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [111:0]      art_word,
  output logic [7:0]        hit_v,
  output logic [7:0][2:0]   hit_plane,
  output logic [7:0][12:0]  hit_strip,
  output logic [7:0][15:0]  hit_slope
);
  localparam logic [2:0]  PLANE = 3'(LINK / LINKS_PER_PLANE);
  localparam logic [12:0] BASE  = 13'((LINK % LINKS_PER_PLANE) * 2048);
  localparam int Y0 = 16000;   // 1000 mm in 1/16 mm
  localparam int PITCH = 7;    // 0.4375 mm in 1/16 mm
  // 2^32 / z, z = 7000 + 50 * plane mm, in 1/16 mm
  localparam logic [31:0] INVZ = 32'((64'd1 << 32) / (64'(7000 + 50 * (LINK / LINKS_PER_PLANE)) * 16));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hit_v     <= '0;
      hit_plane <= '0;
      hit_strip <= '0;
      hit_slope <= '0;
    end else begin
      for (int s = 0; s < 8; s++) begin
        logic [12:0] strip;
        logic [31:0] y;
        logic [63:0] prod;
        strip = BASE + {art_word[111 - 5*s -: 5], art_word[55 - 6*s -: 6]};
        y     = 32'(Y0) + 32'(strip) * 32'(PITCH);
        prod  = 64'(y) * 64'(INVZ);
        hit_v[s]     <= art_word[59:56] > 4'(s);
        hit_plane[s] <= PLANE;
        hit_strip[s] <= strip;
        hit_slope[s] <= prod[31:16];
      end
    end
  end
endmodule
