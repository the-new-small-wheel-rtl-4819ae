// mm_finder: one slope region of the Micromegas finder, with its fitters.
// A region owns N_ROADS (64) roads; a hit belongs to road slope[11:6] of region slope[15:12].
// Each road keeps, per plane, whether it holds a hit, the hit's age and the low six slope bits.
// A new hit overwrites the plane's entry (latest hit wins) and restarts its age. Every bunch
// crossing the ages advance and a hit whose age reaches `window` (1..8 BC) is dropped.
// A road fires when it holds at least `thr_x` X-plane hits and `thr_uv` stereo hits and its
// oldest hit is in its last bunch crossing, so the whole window has been collected; the
// road is then cleared. At most N_COINC (2) roads per region fire in a bunch crossing, the
// lowest-numbered ones; the others fire when their oldest hit expires, or are lost.
// Each firing road is fitted by an mm_fitter and sent out as a segment.
// From the paper: hits stored in roads for a programmable window of up to 8 BC, X and UV
// coincidence thresholds, readout when the oldest hit expires, two coincidences per region
// per BC, fit inside each region. This design's choices: roads defined on slope bins,
// latest-hit-wins per plane, firing lowest roads first. Latency: hit into road on the next
// edge; a segment appears combinationally from the road state when it fires and is
// registered on `seg`, i.e. `window` clocks after its first hit.
module mm_finder
  import nsw_pkg::*;
#(
  parameter int REGION  = 0,
  parameter int N_HITS  = 256,
  parameter int N_ROADS = 64,
  parameter int N_COINC = 2,
  parameter logic [7:0] X_MASK = 8'b1100_0011
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [3:0]              window,
  input  logic [2:0]              thr_x,
  input  logic [2:0]              thr_uv,
  input  logic [N_HITS-1:0]       hit_v,
  input  logic [N_HITS-1:0][2:0]  hit_plane,
  input  logic [N_HITS-1:0][15:0] hit_slope,
  output segment_t [N_COINC-1:0]  seg
);
  logic [N_ROADS-1:0][7:0]      r_v;
  logic [N_ROADS-1:0][7:0][2:0] r_age;
  logic [N_ROADS-1:0][7:0][5:0] r_low;

  // coincidence and firing decision
  logic [N_ROADS-1:0] ready;
  always_comb begin
    for (int r = 0; r < N_ROADS; r++) begin
      logic [3:0] nx, nuv;
      logic       old;
      nx = '0; nuv = '0; old = 1'b0;
      for (int p = 0; p < 8; p++) if (r_v[r][p]) begin
        if (X_MASK[p]) nx++; else nuv++;
        if (4'(r_age[r][p]) + 4'd1 >= window) old = 1'b1;
      end
      ready[r] = old && nx >= 4'(thr_x) && nuv >= 4'(thr_uv);
    end
  end

  logic [N_ROADS-1:0] fire;
  logic [N_COINC-1:0][$clog2(N_ROADS)-1:0] fire_id;
  logic [N_COINC-1:0] fire_v;
  always_comb begin
    logic [N_ROADS-1:0] left;
    left = ready;
    fire = '0;
    for (int c = 0; c < N_COINC; c++) begin
      fire_v[c]  = 1'b0;
      fire_id[c] = '0;
      for (int r = N_ROADS-1; r >= 0; r--)
        if (left[r]) begin fire_v[c] = 1'b1; fire_id[c] = r[$clog2(N_ROADS)-1:0]; end
      if (fire_v[c]) begin left[fire_id[c]] = 1'b0; fire[fire_id[c]] = 1'b1; end
    end
  end

  // fitters
  segment_t [N_COINC-1:0] fit;
  for (genvar c = 0; c < N_COINC; c++) begin : g_fit
    logic [7:0][15:0] sl;
    always_comb
      for (int p = 0; p < 8; p++)
        sl[p] = {4'(REGION), 6'(fire_id[c]), r_low[fire_id[c]][p]};
    mm_fitter #(.X_MASK(X_MASK)) u_fit (.fire(fire_v[c]), .hit(r_v[fire_id[c]]), .slope(sl),
                                        .seg(fit[c]));
  end

  // road storage
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r_v   <= '0;
      r_age <= '0;
      r_low <= '0;
      seg   <= '0;
    end else begin
      seg <= fit;
      for (int r = 0; r < N_ROADS; r++)
        for (int p = 0; p < 8; p++) begin
          if (fire[r] || 4'(r_age[r][p]) + 4'd1 >= window) r_v[r][p] <= 1'b0;
          r_age[r][p] <= r_age[r][p] + 1'b1;
        end
      for (int h = 0; h < N_HITS; h++)
        if (hit_v[h] && hit_slope[h][15:12] == 4'(REGION)) begin
          r_v[hit_slope[h][11:6]][hit_plane[h]]   <= 1'b1;
          r_age[hit_slope[h][11:6]][hit_plane[h]] <= '0;
          r_low[hit_slope[h][11:6]][hit_plane[h]] <= hit_slope[h][5:0];
        end
    end
  end
endmodule
