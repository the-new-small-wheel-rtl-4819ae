// tb_strip_tds: writes a band look-up table into strip_tds, drives random strip charges every
// bunch crossing and sends band requests. Requests hit: a BCID a few bunch crossings old (in
// the ring buffer), a BCID already overwritten (must give a null packet), band-id 0xFF and a
// band without a table entry (null), and a band running off the last channel (charges read
// as 0). The expected 14 charges and inner/outer flag are computed here from the stored
// stimulus. Latency checked: a request at clock edge k is recovered after edge k+2.
module tb_strip_tds;
  import nsw_pkg::*;
  localparam int N = 300;
  localparam int DEPTH = 8;
  logic clk = 0, rst_n = 1, bcr = 0;
  logic [STRIP_CH-1:0][Q_W-1:0] q;
  logic [BAND_W-1:0] req_band;
  logic [BCID_W-1:0] req_bcid;
  logic lut_we = 0, lut_valid = 0;
  logic [BAND_W-1:0] lut_band;
  logic [6:0] lut_first;
  tds_frames_t frames;
  strip_payload_t rx;
  logic hdr_ok;
  int checks = 0, failures = 0, n_valid = 0, n_null = 0, n_outer = 0;

  strip_tds #(.RB_DEPTH(DEPTH)) dut (.clk, .rst_n, .bcr, .q, .req_band, .req_bcid,
    .lut_we, .lut_band, .lut_valid, .lut_first, .frames);
  tds_descrambler u_rx (.clk, .rst_n, .valid(1'b1), .frames, .payload(rx), .hdr_ok);

  always #5 clk = ~clk;
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  logic [STRIP_CH-1:0][Q_W-1:0] q_h [N];
  logic [BCID_W-1:0] bcid_h [N];
  logic [BAND_W-1:0] rb_h [N];
  logic [BCID_W-1:0] rq_h [N];
  strip_payload_t exp_h [N];
  int first_of [256];

  function automatic strip_payload_t expect_of(int k);
    strip_payload_t e;
    int src, lo, hi;
    logic [16:0][Q_W-1:0] bq;
    e = '0;
    src = -1;
    for (int m = k - 1; m >= k - DEPTH && m >= 0; m--)
      if (bcid_h[m] == rq_h[k]) src = m;
    if (src < 0 || first_of[rb_h[k]] < 0) return e;
    for (int i = 0; i < 17; i++)
      bq[i] = (first_of[rb_h[k]] + i < STRIP_CH) ? q_h[src][first_of[rb_h[k]] + i] : '0;
    lo = 0; hi = 0;
    for (int i = 0; i < 14; i++) begin lo += bq[i]; hi += bq[i+3]; end
    e.valid = 1; e.band_id = rb_h[k]; e.bcid = rq_h[k]; e.outer = hi > lo;
    for (int i = 0; i < 14; i++) e.q[i] = e.outer ? bq[i+3] : bq[i];
    return e;
  endfunction

  initial begin
    logic [BCID_W-1:0] cnt;
    for (int b = 0; b < 256; b++) first_of[b] = -1;
    first_of[5] = 10; first_of[9] = 120; first_of[17] = 0; first_of[40] = 64;
    q = '0; req_band = BAND_NONE; req_bcid = '0;
    #1 rst_n = 0;
    #20 rst_n = 1;
    foreach (first_of[b]) if (first_of[b] >= 0) begin
      @(negedge clk);
      lut_we = 1; lut_band = b; lut_valid = 1; lut_first = first_of[b];
    end
    @(negedge clk); lut_we = 0;
    cnt = 0;
    for (int k = 0; k < N; k++) begin
      for (int c = 0; c < STRIP_CH; c++) q_h[k][c] = $urandom_range(0, 63);
      bcid_h[k] = (k == 0) ? '0 : cnt;
      cnt = bcid_h[k] + 1;
      case ($urandom_range(0, 5))
        0: rb_h[k] = BAND_NONE;
        1: rb_h[k] = 8'd77;
        2: rb_h[k] = 8'd9;
        3: rb_h[k] = 8'd40;
        default: rb_h[k] = ($urandom_range(0, 1) != 0) ? 8'd5 : 8'd17;
      endcase
      if (k > 12 && $urandom_range(0, 3) == 0) rq_h[k] = bcid_h[k] - BCID_W'(12);   // overwritten
      else rq_h[k] = bcid_h[k] - BCID_W'($urandom_range(0, DEPTH));
      exp_h[k] = expect_of(k);
    end
    for (int k = 0; k < N + 3; k++) begin
      @(negedge clk);
      if (k < N) begin
        q = q_h[k]; bcr = (k == 0); req_band = rb_h[k]; req_bcid = rq_h[k];
      end
      if (k >= 3) begin
        checks++;
        if (rx !== exp_h[k-3] || !hdr_ok) begin
          failures++;
          $display("BC %0d: got v%0d band %0d outer %0d q0 %0d / exp v%0d band %0d outer %0d q0 %0d",
                   k-3, rx.valid, rx.band_id, rx.outer, rx.q[0], exp_h[k-3].valid, exp_h[k-3].band_id,
                   exp_h[k-3].outer, exp_h[k-3].q[0]);
        end
        if (exp_h[k-3].valid) begin n_valid++; if (exp_h[k-3].outer) n_outer++; end
        else n_null++;
      end
    end
    checks++;
    if (n_valid < 20 || n_null < 20 || n_outer == 0 || n_outer == n_valid) begin
      failures++; $display("coverage: valid %0d null %0d outer %0d", n_valid, n_null, n_outer);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
