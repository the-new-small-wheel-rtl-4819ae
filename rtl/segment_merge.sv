// segment_merge: merges the sTGC (N_ST = 4) and Micromegas (N_MM = 8) segments of a bunch
// crossing into at most N_OUT (8) segments for the Sector Logic, removing duplicates.
// sTGC segments have priority: they fill the output first, in slot order. An MM segment is a
// duplicate when some valid sTGC segment has an R-index within `r_tol` of it; duplicates are
// dropped, the remaining MM segments follow in slot order. Options:
//   ignore_mm   - MM segments are not used;
//   ignore_stgc - sTGC segments are not used (MM segments then have no duplicates);
//   phi_from_mm - an sTGC segment that has an MM duplicate takes the phi of the first one.
// `n_dup` and `n_lost` count removed duplicates and segments beyond N_OUT in the BC.
// From the paper: merging both detectors' segments, duplicate removal with sTGC priority,
// options to ignore either detector and to use the MM phi. This design's choices: the
// R-index distance rule and ordering. Latency: one clock.
module segment_merge
  import nsw_pkg::*;
#(
  parameter int N_ST  = 4,
  parameter int N_MM  = 8,
  parameter int N_OUT = 8
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  ignore_mm,
  input  logic                  ignore_stgc,
  input  logic                  phi_from_mm,
  input  logic [RIDX_W-1:0]     r_tol,
  input  segment_t [N_ST-1:0]   st,
  input  segment_t [N_MM-1:0]   mm,
  output segment_t [N_OUT-1:0]  seg,
  output logic [3:0]            n_dup,
  output logic [3:0]            n_lost
);
  function automatic logic close(logic [RIDX_W-1:0] a, logic [RIDX_W-1:0] b,
                                 logic [RIDX_W-1:0] tol);
    return ((a > b) ? a - b : b - a) <= tol;
  endfunction

  segment_t [N_OUT-1:0] nxt;
  logic [3:0] dup, lost;
  always_comb begin
    segment_t [N_ST-1:0] s;
    logic [N_MM-1:0] is_dup;
    int n;
    nxt = '0; dup = '0; lost = '0; n = 0; is_dup = '0;
    for (int i = 0; i < N_ST; i++) begin
      s[i] = st[i];
      if (ignore_stgc) s[i].valid = 1'b0;
    end
    for (int m = 0; m < N_MM; m++)
      for (int i = 0; i < N_ST; i++)
        if (!ignore_mm && mm[m].valid && s[i].valid && close(s[i].ridx, mm[m].ridx, r_tol)) begin
          is_dup[m] = 1'b1;
        end
    // last assignment wins, so scan MM from the back to let the first duplicate set phi
    if (phi_from_mm && !ignore_mm)
      for (int m = N_MM-1; m >= 0; m--)
        for (int i = 0; i < N_ST; i++)
          if (mm[m].valid && s[i].valid && close(s[i].ridx, mm[m].ridx, r_tol))
            s[i].phi = mm[m].phi;
    for (int i = 0; i < N_ST; i++)
      if (s[i].valid) begin
        if (n < N_OUT) nxt[n] = s[i]; else lost++;
        n++;
      end
    for (int m = 0; m < N_MM; m++)
      if (!ignore_mm && mm[m].valid) begin
        if (is_dup[m]) dup++;
        else begin
          if (n < N_OUT) nxt[n] = mm[m]; else lost++;
          n++;
        end
      end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      seg <= '0; n_dup <= '0; n_lost <= '0;
    end else begin
      seg <= nxt; n_dup <= dup; n_lost <= lost;
    end
  end
endmodule
