// mm_cand_select: output stage of the Micromegas trigger processor. From N_IN candidate
// segments (two per finder region) it keeps at most N_OUT (8) valid ones per bunch crossing,
// in input order (lowest region first), and registers them. Slots without a segment are
// zero (valid = 0). `n_lost` counts, per bunch crossing, the valid segments that did not fit.
// From the paper: a priority encoder selects up to eight segments per BC for the output.
// This design's choice: priority by input index. Latency: one clock.
module mm_cand_select
  import nsw_pkg::*;
#(
  parameter int N_IN  = 32,
  parameter int N_OUT = 8
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  segment_t [N_IN-1:0]   cand,
  output segment_t [N_OUT-1:0]  seg,
  output logic [7:0]            n_lost
);
  segment_t [N_OUT-1:0] sel;
  logic [7:0]           lost;
  always_comb begin
    int n;
    n = 0;
    sel  = '0;
    lost = '0;
    for (int i = 0; i < N_IN; i++)
      if (cand[i].valid) begin
        if (n < N_OUT) sel[n] = cand[i];
        else           lost++;
        n++;
      end
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      seg    <= '0;
      n_lost <= '0;
    end else begin
      seg    <= sel;
      n_lost <= lost;
    end
  end
endmodule
