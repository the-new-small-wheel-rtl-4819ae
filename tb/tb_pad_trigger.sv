// tb_pad_trigger: loads a table of random trigger patterns and a band table into pad_trigger
// (reduced to 64 patterns), then each bunch crossing builds pad hits that satisfy some
// patterns fully, some with exactly 3 of 4 layers per quadruplet, some with only 2 of 4 in one
// quadruplet (must not fire), plus random noise. The hits are sent through real TDS link
// framing. A reference written here computes the firing bands, the priority selection (lowest
// band first, split bands counting twice, at most four), the phi-ids and the band-id sent to
// every strip-TDS. Phases: 1-BC window, 2-BC window, a masked link, and OCR mode with the 0xFE
// start marker. Latency checked: pads entering the link at clock edge k give bands after
// edge k+2.
module tb_pad_trigger;
  import nsw_pkg::*;
  localparam int NP = 64, NTDS = 24, LP = 312, N = 240, TPL = 12;
  logic clk = 0, rst_n = 1, ocr = 0, ocr_mode = 0, win2 = 0;
  logic [BCID_W-1:0] bc_offset = 0;
  logic [NTDS-1:0] mask0 = 0, mask1 = 0;
  logic pat_we = 0, pat_valid = 0, bt_we = 0, bt_split = 0;
  logic [5:0] pat_addr;
  logic [7:0][8:0] pat_pad;
  logic [BAND_W-1:0] pat_band, bt_band;
  logic [PHI_W-1:0] pat_phi;
  logic [7:0][3:0] bt_tds;
  pad_payload_t [NTDS-1:0] pl;
  tds_frames_t [NTDS-1:0] frames;
  band_t [3:0] bands;
  logic [BCID_W-1:0] bands_bcid;
  logic [7:0][TPL-1:0][BAND_W-1:0] tds_band;
  logic run_started;
  int checks = 0, failures = 0;

  pad_trigger #(.N_PATTERNS(NP)) dut (.clk, .rst_n, .ocr, .ocr_mode, .win2, .bc_offset,
    .mask0, .mask1, .pat_we, .pat_addr, .pat_pad, .pat_band, .pat_phi, .pat_valid, .bt_we, .bt_band,
    .bt_tds, .bt_split, .pad_frames(frames), .bands, .bands_bcid, .tds_band, .run_started, .link_err());
  for (genvar t = 0; t < NTDS; t++) begin : g_tx
    tds_scrambler u_tx (.clk, .rst_n, .valid(1'b1), .payload(pl[t]), .frames(frames[t]));
  end

  always #5 clk = ~clk;
  initial begin #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  // tables
  int p_pad [NP][8]; int p_band [NP]; int p_phi [NP];
  int b_pos [256][8]; bit b_split [256];
  // stimulus and expectations
  logic [7:0][LP-1:0] hits_h [N];
  logic [NTDS-1:0] m0_h [N];
  bit win_h [N];
  band_t [3:0] exp_b [N];
  logic [7:0][TPL-1:0][BAND_W-1:0] exp_t [N];
  int n_fire = 0, n_limit = 0, n_split = 0;

  function automatic logic [7:0][LP-1:0] masked(int k);
    logic [7:0][LP-1:0] h;
    h = hits_h[k];
    for (int t = 0; t < NTDS; t++) if (m0_h[k][t]) h[t/3][(t%3)*104 +: 104] = '0;
    return h;
  endfunction

  task automatic compute(int k);
    logic [7:0][LP-1:0] h;
    bit fire [256]; int phi [256]; int used, c0, c1, nf;
    h = masked(k);
    if (win_h[k] && k > 0) h = h | masked(k-1);
    for (int b = 0; b < 256; b++) fire[b] = 0;
    for (int p = NP-1; p >= 0; p--) begin
      c0 = 0; c1 = 0;
      for (int l = 0; l < 4; l++) begin c0 += h[l][p_pad[p][l]]; c1 += h[l+4][p_pad[p][l+4]]; end
      if (c0 >= 3 && c1 >= 3) begin fire[p_band[p]] = 1; phi[p_band[p]] = p_phi[p]; end
    end
    exp_b[k] = '0; used = 0; nf = 0;
    for (int b = 0; b < 254; b++) if (fire[b]) begin
      nf++;
      if (used + (b_split[b] ? 2 : 1) <= 4) begin
        exp_b[k][used].valid = 1; exp_b[k][used].band_id = b; exp_b[k][used].phi_id = phi[b];
        used += b_split[b] ? 2 : 1;
        if (b_split[b]) n_split++;
      end
    end
    if (nf > 0) n_fire++;
    if (nf > 4) n_limit++;
    for (int l = 0; l < 8; l++) for (int t = 0; t < TPL; t++) begin
      exp_t[k][l][t] = 8'hFF;
      for (int s = 3; s >= 0; s--) if (exp_b[k][s].valid) begin
        int b; b = exp_b[k][s].band_id;
        if (b_pos[b][l] != 15 && (b_pos[b][l] == t || (b_split[b] && b_pos[b][l] + 1 == t)))
          exp_t[k][l][t] = b;
      end
    end
  endtask

  initial begin
    // random tables: bands 0..39
    for (int b = 0; b < 256; b++) begin
      b_split[b] = ($urandom_range(0, 4) == 0);
      for (int l = 0; l < 8; l++) b_pos[b][l] = $urandom_range(0, 10);
    end
    for (int p = 0; p < NP; p++) begin
      p_band[p] = $urandom_range(0, 39); p_phi[p] = $urandom_range(0, 63);
      for (int l = 0; l < 8; l++) p_pad[p][l] = $urandom_range(0, LP-1);
    end
    for (int k = 0; k < N; k++) begin
      hits_h[k] = '0;
      for (int j = 0; j < 6; j++) hits_h[k][$urandom_range(0,7)][$urandom_range(0, LP-1)] = 1'b1;
      for (int j = 0; j < $urandom_range(0, 6); j++) begin
        int p, mode, skip0, skip1;
        p = $urandom_range(0, NP-1); mode = $urandom_range(0, 2);
        skip0 = (mode == 0) ? -1 : $urandom_range(0, 3);
        skip1 = (mode == 0) ? -1 : $urandom_range(4, 7);
        for (int l = 0; l < 8; l++) if (l != skip0 && l != skip1 && !(mode == 2 && l == (skip0 + 1) % 4))
          hits_h[k][l][p_pad[p][l]] = 1'b1;
      end
      m0_h[k] = (k >= 120 && k < 160) ? 24'h000104 : '0;
      win_h[k] = (k >= 80 && k < 200);
    end
    for (int k = 0; k < N; k++) compute(k);

    pl = '0;
    #1 rst_n = 0;
    #20 rst_n = 1;
    for (int p = 0; p < NP; p++) begin
      @(negedge clk);
      pat_we = 1; pat_addr = p; pat_valid = 1; pat_band = p_band[p]; pat_phi = p_phi[p];
      for (int l = 0; l < 8; l++) pat_pad[l] = p_pad[p][l];
    end
    for (int b = 0; b < 40; b++) begin
      @(negedge clk);
      pat_we = 0; bt_we = 1; bt_band = b; bt_split = b_split[b];
      for (int l = 0; l < 8; l++) bt_tds[l] = b_pos[b][l];
    end
    @(negedge clk); bt_we = 0;
    // stimulus: payload of edge k is hits_h[k]; window/mask settings apply at the comparator,
    // two edges later
    for (int k = 0; k < N + 3; k++) begin
      @(negedge clk);
      if (k < N) for (int t = 0; t < NTDS; t++) begin
        pl[t].pads = hits_h[k][t/3][(t%3)*104 +: 104];
        pl[t].bcid = k;
      end
      if (k >= 2 && k - 2 < N) begin win2 = win_h[k-2]; mask0 = m0_h[k-2]; end
      if (k >= 3) begin
        checks++;
        if (bands !== exp_b[k-3] || tds_band !== exp_t[k-3] || bands_bcid !== BCID_W'(k-3)) begin
          failures++;
          $display("BC %0d: got %h exp %h bcid %0d", k-3, bands, exp_b[k-3], bands_bcid);
        end
      end
    end
    // OCR mode: idle until OCR, then 0xFE
    @(negedge clk); ocr_mode = 1;
    repeat (3) @(negedge clk);
    checks++; if (bands !== '0 || run_started) begin failures++; $display("OCR idle failed"); end
    ocr = 1; @(negedge clk); ocr = 0;
    checks++; if (!(bands[0].valid && bands[0].band_id == 8'hFE) || !run_started) begin failures++; $display("OCR start failed"); end
    checks++;
    if (n_fire < 50 || n_limit == 0 || n_split == 0) begin failures++; $display("coverage %0d %0d %0d", n_fire, n_limit, n_split); end
    $display("fired %0d, over limit %0d, split %0d", n_fire, n_limit, n_split);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
