// tb_nsw_sector_trigger: end-to-end test of one sector's trigger path (nsw_sector_trigger).
// Set-up: 40 pad-trigger patterns (band b = pattern b, one pad per layer, phi = b), a band
// table placing band b in strip-TDS position b % 12 (bands 9,19,29,39 are split over two
// TDS), strip-TDS band tables with the band's first strip, and MM roads reached by computing
// per plane the strip whose slope falls in the same road.
// Every 12 bunch crossings an event is generated: 1..6 sTGC tracks in distinct TDS positions
// (pad hits in all layers, sometimes one inner layer missing, a 3-strip cluster in every
// layer) and one MM track (eight planes, sometimes one stereo plane missing), timed so that
// both segments reach the merger in the same bunch crossing.
// Extra stimulus: an 10-hit ART burst on one link (more than eight hits), a repeated hit
// inside the ART dead time, BCR pulses.
// Phases: OCR mode with OCR at BC 40; normal; 2-BC window with the outer quadruplet's pads one
// BC late; duplicate removal with R tolerance 255 and phi from MM; ignore-MM; ignore-sTGC.
// Checks: pad bands (lowest band-id first, four at most, split bands counting twice, 0xFE
// after OCR), router null packets carry sector/layer/fibre, sTGC segment per band (R-index,
// phi, delta-theta), MM segment (R-index, phi, delta-theta from the same formulas), ART
// hit counts, and the merged output against a reference of the merge rules.
// Latencies are fixed constants (pad_dly = 4 matches the pad-band to strip-fibre distance);
// they are also measured on the first event and compared.
// Every mechanism must have happened at least once, otherwise a failure is counted.
module tb_nsw_sector_trigger #(parameter bit FULL = 0);
  import nsw_pkg::*;
  localparam int NPAT = FULL ? 4700 : 64;
  localparam int NREG = 16;
  localparam int NB = 40, N = 1200;
  localparam int LP = 3;      // pad ToT sample -> pad_bands
  localparam int LM0 = 4;     // ART input -> road holds hit (then + window - 1 + 2 to seg)

  logic clk = 0, rst_n = 1, bcr = 0, ocr = 0;
  logic ocr_mode = 1, win2 = 0;
  logic [11:0] bc_offset = 0;
  logic [23:0] mask0 = 0, mask1 = 0;
  logic pat_we = 0, pat_valid = 0, bt_we = 0, bt_split = 0, lut_we = 0, lut_valid = 0;
  logic [$clog2(NPAT)-1:0] pat_addr = 0;
  logic [7:0][8:0] pat_pad = 0;
  logic [7:0] pat_band = 0, bt_band = 0, lut_band = 0;
  logic [5:0] pat_phi = 0;
  logic [7:0][3:0] bt_tds = 0;
  logic [2:0] lut_layer = 0;
  logic [3:0] lut_pos = 0;
  logic [6:0] lut_first = 0;
  logic [3:0] sector_id = 4'd6, pad_dly = 4'(4);
  logic [1:0] outer_dly = 0;
  logic [5:0] q_thr = 6'd8;
  logic [2:0] art_dead_bc = 3'd2, mm_thr_x = 3'd3, mm_thr_uv = 3'd2;
  logic art_bypass = 0, art_fixed = 0;
  logic [3:0] mm_window = 4'd4;
  logic ignore_mm = 0, ignore_stgc = 0, phi_from_mm = 0;
  logic [7:0] r_tol = 0;
  logic [23:0][103:0] pad_tot = 0;
  logic [7:0][11:0][127:0][5:0] strip_q = 0;
  logic [31:0][31:0] art_flag = 0;
  logic [31:0][31:0][5:0] art_addr = 0;
  segment_t [7:0] seg, mm_seg;
  segment_t [3:0] stgc_seg;
  logic [3:0] n_dup, n_lost;
  band_t [3:0] pad_bands;
  logic run_started;
  strip_payload_t [7:0][3:0] fibre;
  logic [31:0][111:0] art_word;

  if (FULL) begin : g_full
    nsw_sector_trigger dut (.*);
  end else begin : g_small
    nsw_sector_trigger #(.N_PATTERNS(NPAT)) dut (.*);
  end

  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  initial begin #(FULL ? 400000 : 600000); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic fail(string m);
    failures++;
    if (failures < 12) $display("mismatch %s", m);
  endtask

  // ---------------- geometry helpers ----------------
  function automatic int pos_of(int b); return b % 12; endfunction
  function automatic bit split_of(int b); return b % 10 == 9; endfunction
  function automatic int first_of(int b); return ((b / 12) * 20) % 100; endfunction
  function automatic int pad_of(int b, int l); return b * 5 + l % 3; endfunction
  function automatic int slope_of(int plane, int strip);
    longint invz, y;
    invz = (64'd1 << 32) / ((7000 + 50 * plane) * 16);
    y = 16000 + strip * 7;
    return int'(((y * invz) >> 16) & 16'hFFFF);
  endfunction
  function automatic int mean(int s[8], bit h[8], bit [7:0] m);
    int sum = 0, n = 0;
    for (int p = 0; p < 8; p++) if (m[p] && h[p]) begin sum += s[p]; n++; end
    return n == 0 ? 0 : sum / n;
  endfunction

  // ---------------- expectation stores, indexed by bunch crossing ----------------
  band_t    exp_pb [N + 64][4];
  bit       exp_pb_set [N + 64];
  segment_t exp_mm [N + 64];
  bit       exp_mm_set [N + 64];
  int       exp_art_cnt [N + 64];   // expected hit count on link 31, -1: don't care
  int m_ocr = 0, m_limit = 0, m_split = 0, m_win2 = 0, m_null = 0, m_stseg = 0, m_mmseg = 0;
  int m_dup = 0, m_dead = 0, m_art8 = 0, m_phimm = 0, m_ign_mm = 0, m_ign_st = 0, m_lost = 0;
  // expected latencies: strip fibres 4 BC after the pad bands (so pad_dly = 4), sTGC segment
  // 9 BC after the pad hits, MM segment 8 BC after the ART hits (window 4)
  localparam int LAT_FIB = 4, LAT_ST = 9, LAT_MM = 8;
  int lat_st = LAT_ST, lat_mm = LAT_MM, cal_bc = -1;
  int meas_fib = -1, meas_st = -1, meas_mm = -1;
  int mm_shift = LAT_ST - LAT_MM;
  segment_t st_q [4];
  segment_t mm_q [8];

  // expected pad trigger selection for a set of bands
  function automatic void select(bit hit[NB], output band_t o[4], output int dropped);
    int used = 0;
    for (int s = 0; s < 4; s++) o[s] = '0;
    dropped = 0;
    for (int b = 0; b < NB; b++) if (hit[b]) begin
      int c = split_of(b) ? 2 : 1;
      if (used + c <= 4) begin
        o[used].valid = 1; o[used].band_id = b; o[used].phi_id = b; used += c;
      end else dropped++;
    end
  endfunction

  // ---------------- stimulus ----------------
  task automatic put_stgc(int b, bit drop_inner, bit late_outer, int k);
    for (int l = 0; l < 8; l++) begin
      int pd = pad_of(b, l);
      if (!(drop_inner && l == 1) && !(late_outer && l >= 4)) pad_tot[l*3 + pd/104][pd%104] = 1;
    end
  endtask
  task automatic put_strips(int b);
    for (int l = 0; l < 8; l++) begin
      strip_q[l][pos_of(b)][first_of(b) + 6] = 20;
      strip_q[l][pos_of(b)][first_of(b) + 7] = 40;
      strip_q[l][pos_of(b)][first_of(b) + 8] = 20;
    end
  endtask

  // MM track: returns the expected segment
  function automatic segment_t put_mm(int strip0, bit drop_uv);
    int road, sl[8];
    bit h[8];
    segment_t e;
    int mx, mu, mv, dx;
    road = slope_of(0, strip0) >> 6;
    for (int p = 0; p < 8; p++) begin
      int st = -1;
      int est = strip0 * (7000 + 50 * p) / 7000 + (16000 * p * 50 / 7000) / 7;
      for (int d = -60; d <= 60 && st < 0; d++)
        if (est + d >= 0 && est + d < 8192 && (slope_of(p, est + d) >> 6) == road) st = est + d;
      h[p] = st >= 0 && !(drop_uv && p == 5);
      sl[p] = h[p] ? slope_of(p, st) : 0;
      if (h[p]) begin
        art_flag[p*4 + st/2048][(st % 2048) / 64] = 1;
        art_addr[p*4 + st/2048][(st % 2048) / 64] = st % 64;
      end
    end
    mx = mean(sl, h, 8'b1100_0011);
    mu = mean(sl, h, 8'b0010_0100);
    mv = mean(sl, h, 8'b0001_1000);
    dx = mean(sl, h, 8'b1100_0000) - mean(sl, h, 8'b0000_0011);
    e.valid = 1;
    e.ridx = mx >> 8;
    begin int ph = ((mu - mv) >>> 2) + 32; e.phi = ph < 0 ? 0 : ph > 63 ? 63 : ph; end
    e.dtheta = dx < -128 ? -128 : dx > 127 ? 127 : dx;
    return e;
  endfunction

  // ---------------- reference merge ----------------
  function automatic void ref_merge(output segment_t o[8], output int dup);
    segment_t s[4];
    bit isd[8];
    int n = 0;
    dup = 0;
    for (int i = 0; i < 8; i++) begin o[i] = '0; isd[i] = 0; end
    for (int i = 0; i < 4; i++) begin s[i] = st_q[i]; if (ignore_stgc) s[i].valid = 0; end
    for (int m = 0; m < 8; m++) for (int i = 0; i < 4; i++)
      if (!ignore_mm && mm_q[m].valid && s[i].valid &&
          (s[i].ridx > mm_q[m].ridx ? s[i].ridx - mm_q[m].ridx : mm_q[m].ridx - s[i].ridx) <= r_tol)
        isd[m] = 1;
    if (phi_from_mm && !ignore_mm)
      for (int i = 0; i < 4; i++) if (s[i].valid)
        for (int m = 7; m >= 0; m--)
          if (mm_q[m].valid && (s[i].ridx > mm_q[m].ridx ? s[i].ridx - mm_q[m].ridx : mm_q[m].ridx - s[i].ridx) <= r_tol)
            s[i].phi = mm_q[m].phi;
    for (int i = 0; i < 4; i++) if (s[i].valid) begin if (n < 8) o[n] = s[i]; n++; end
    for (int m = 0; m < 8; m++) if (!ignore_mm && mm_q[m].valid) begin
      if (isd[m]) dup++;
      else begin if (n < 8) o[n] = mm_q[m]; n++; end
    end
  endfunction

  // ---------------- main ----------------
  initial begin
    for (int k = 0; k < N + 64; k++) begin exp_pb_set[k] = 0; exp_mm_set[k] = 0; exp_art_cnt[k] = -1; end
    for (int i = 0; i < 4; i++) st_q[i] = '0;
    for (int i = 0; i < 8; i++) mm_q[i] = '0;
    #1 rst_n = 0; #20 rst_n = 1;
    // configuration
    @(negedge clk);
    for (int b = 0; b < NB; b++) begin
      pat_we = 1; pat_addr = b; pat_band = b; pat_phi = b; pat_valid = 1;
      for (int l = 0; l < 8; l++) pat_pad[l] = pad_of(b, l);
      bt_we = 1; bt_band = b; bt_split = split_of(b);
      for (int l = 0; l < 8; l++) bt_tds[l] = pos_of(b);
      @(negedge clk);
    end
    pat_we = 0; bt_we = 0;
    for (int b = 0; b < NB; b++)
      for (int l = 0; l < 8; l++)
        for (int x = 0; x < (split_of(b) ? 2 : 1); x++) begin
          lut_we = 1; lut_layer = l; lut_pos = pos_of(b) + x; lut_band = b; lut_valid = 1;
          lut_first = x ? 0 : first_of(b);
          @(negedge clk);
        end
    lut_we = 0;

    for (int k = 0; k < N; k++) begin
      bit hit[NB];
      band_t sel[4];
      int drop;
      // phase control
      ocr_mode = k < 100;
      win2 = k >= 400 && k < 600;
      r_tol = (k >= 600 && k < 800) ? 8'd255 : 8'd0;
      phi_from_mm = k >= 600 && k < 800;
      ignore_mm = k >= 800 && k < 900;
      ignore_stgc = k >= 900 && k < 1000;
      ocr = k == 40;
      bcr = k == 3 || k == 1090;
      pad_tot = '0; strip_q = '0; art_flag = '0; art_addr = '0;
      if (ocr) begin   // the run-start marker leaves with the OCR's own clock edge
        exp_pb_set[k] = 1;
        for (int s = 0; s < 4; s++) exp_pb[k][s] = '0;
        exp_pb[k][0].valid = 1; exp_pb[k][0].band_id = BAND_RUN_START; end
      if (k < 40 && k > 10) begin exp_pb_set[k] = 1; for (int s = 0; s < 4; s++) exp_pb[k][s] = '0; end

      // sTGC event (k % 12 == 0), calibration event at 60
      if (k >= 60 && k % 12 == 0 && k % 100 < 76 && k < N - 30) begin
        automatic int nt = (k == 60) ? 1 : $urandom_range(1, 6);
        bit used_pos[12];
        automatic bit late = win2;
        for (int p = 0; p < 12; p++) used_pos[p] = 0;
        for (int b = 0; b < NB; b++) hit[b] = 0;
        for (int tries = 0, t = 0; t < nt && tries < 50; tries++) begin
          automatic int b = $urandom_range(0, NB - 1);
          if (!hit[b] && !used_pos[pos_of(b)] && !(split_of(b) && used_pos[pos_of(b) + 1])) begin
            hit[b] = 1; used_pos[pos_of(b)] = 1; if (split_of(b)) used_pos[pos_of(b) + 1] = 1; t++;
            put_stgc(b, $urandom_range(0, 3) == 0, late, k);
          end
        end
        select(hit, sel, drop);
        if (drop > 0) m_limit++;
        for (int s = 0; s < 4; s++) if (sel[s].valid && split_of(sel[s].band_id)) m_split++;
        exp_pb_set[k + LP + late] = 1;
        for (int s = 0; s < 4; s++) exp_pb[k + LP + late][s] = sel[s];
        if (!late) for (int b = 0; b < NB; b++) if (hit[b]) put_strips(b);
        exp_pb_set[k + LP + 1 - late] = 1;
        for (int s = 0; s < 4; s++) exp_pb[k + LP + 1 - late][s] = '0;
      end
      // pending late-outer pads and MM injections
      if (win2 && k >= 60 && k % 12 == 1 && (k - 1) % 100 < 76) begin
        // outer quadruplet pads and the strips one BC later
        for (int b = 0; b < NB; b++) if (exp_pb_band(k - 1 + LP + 1, b)) begin
          for (int l = 4; l < 8; l++) begin automatic int pd = pad_of(b, l); pad_tot[l*3 + pd/104][pd%104] = 1; end
          put_strips(b);
        end
      end
      if (k > 80 && k % 12 == mm_shift_mod() && k < N - 40 && lat_mm >= 0 && (k - mm_shift_mod()) % 100 < 76) begin
        automatic segment_t e = put_mm($urandom_range(300, 5500), $urandom_range(0, 3) == 0);
        exp_mm[k + lat_mm] = e; exp_mm_set[k + lat_mm] = 1;
      end
      if (k == 70) begin automatic segment_t e = put_mm(2000, 0); cal_bc = k; end
      // ART burst and dead time on link 31 (plane 7)
      if (k % 12 == 6 && k > 20) begin
        automatic int n = (k % 24 == 6) ? 10 : 1;
        for (int v = 0; v < n; v++) begin art_flag[31][v] = 1; art_addr[31][v] = v; end
        exp_art_cnt[k + 1] = n > 8 ? 8 : n;
        if (n > 8) m_art8++;
      end
      if (k % 12 == 7 && k > 20) begin   // inside dead time of the VMM hit one BC earlier
        art_flag[31][0] = 1; exp_art_cnt[k + 1] = 0;
      end

      @(posedge clk); #1;
      // ---- checks on outputs after edge k ----
      if (exp_pb_set[k]) begin
        checks++;
        for (int s = 0; s < 4; s++) if (pad_bands[s] !== exp_pb[k][s])
          fail($sformatf("pad bands BC %0d slot %0d got %0d/%0d exp %0d/%0d", k, s, pad_bands[s].valid,
                         pad_bands[s].band_id, exp_pb[k][s].valid, exp_pb[k][s].band_id));
        if (pad_bands[0].valid && pad_bands[0].band_id == BAND_RUN_START) m_ocr++;
        if (win2) for (int s = 0; s < 4; s++) if (pad_bands[s].valid) m_win2++;
      end
      // calibration of sTGC latencies on the first event
      if (k > 60 && k < 80) begin
        if (meas_fib < 0 && fibre[0][0].valid) meas_fib = k - 60 - LP;
        if (meas_st < 0 && stgc_seg[0].valid) meas_st = k - 60;
        if (meas_mm < 0 && mm_seg[0].valid) meas_mm = k - cal_bc;
      end
      if (k == 80) begin
        $display("latency: fibre after pad band %0d, sTGC segment %0d, MM segment %0d", meas_fib, meas_st, meas_mm);
        checks++;
        if (meas_fib != LAT_FIB || meas_st != LAT_ST || meas_mm != LAT_MM) fail("latency");
      end
      // router null packets
      for (int l = 0; l < 8; l++) for (int f = 0; f < 4; f++) if (!fibre[l][f].valid && k > 10) begin
        checks++;
        if (fibre[l][f].spare !== {1'b0, sector_id, 3'(l), 2'(f)}) fail("null packet spare");
        else m_null++;
      end
      // sTGC segments: band of exp_pb[k - lat_st + LP]
      if (lat_st > 0 && k > 90) begin
        automatic int src = k - lat_st + LP;
        if (exp_pb_set[src]) begin
          checks++;
          for (int s = 0; s < 4; s++) begin
            automatic segment_t e = '0;
            if (exp_pb[src][s].valid && exp_pb[src][s].band_id < NB) begin
              e.valid = 1; e.ridx = {exp_pb[src][s].band_id[6:0], 1'b0}; e.phi = exp_pb[src][s].band_id;
              e.dtheta = 0;
            end
            if (stgc_seg[s] !== e) fail($sformatf("sTGC seg BC %0d slot %0d got %p exp %p", k, s, stgc_seg[s], e));
            if (e.valid) m_stseg++;
          end
        end
      end
      // MM segments
      if (exp_mm_set[k]) begin
        checks++;
        if (mm_seg[0] !== exp_mm[k]) fail($sformatf("MM seg BC %0d got %p exp %p", k, mm_seg[0], exp_mm[k]));
        else m_mmseg++;
      end
      // ART words of link 31
      if (exp_art_cnt[k] >= 0) begin
        checks++;
        if (int'(art_word[31][59:56]) != exp_art_cnt[k]) fail($sformatf("ART count BC %0d got %0d exp %0d", k, art_word[31][59:56], exp_art_cnt[k]));
        else if (exp_art_cnt[k] == 0) m_dead++;
      end
      // merge
      if (k > 10) begin
        segment_t o[8];
        int d;
        ref_merge(o, d);
        checks++;
        for (int i = 0; i < 8; i++) if (seg[i] !== o[i]) fail($sformatf("merge BC %0d slot %0d", k, i));
        if (n_dup != d) fail("n_dup");
        if (d > 0) m_dup++;
        if (phi_from_mm && d > 0) m_phimm++;
        if (ignore_mm && seg[0].valid) m_ign_mm++;
        if (ignore_stgc && seg[0].valid) m_ign_st++;
      end
      for (int i = 0; i < 4; i++) st_q[i] = stgc_seg[i];
      for (int i = 0; i < 8; i++) mm_q[i] = mm_seg[i];
    end
    $display("coverage ocr=%0d limit=%0d split=%0d win2=%0d null=%0d stgc_seg=%0d mm_seg=%0d dup=%0d dead=%0d art8=%0d phi_mm=%0d ign_mm=%0d ign_st=%0d",
             m_ocr, m_limit, m_split, m_win2, m_null, m_stseg, m_mmseg, m_dup, m_dead, m_art8, m_phimm, m_ign_mm, m_ign_st);
    if (m_ocr == 0 || m_limit == 0 || m_split == 0 || m_win2 == 0 || m_null == 0 || m_stseg == 0 ||
        m_mmseg == 0 || m_dup == 0 || m_dead == 0 || m_art8 == 0 || m_phimm == 0 || m_ign_mm == 0 || m_ign_st == 0)
      failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic bit exp_pb_band(int t, int b);
    for (int s = 0; s < 4; s++) if (exp_pb[t][s].valid && exp_pb[t][s].band_id == b) return 1;
    return 0;
  endfunction
  function automatic int mm_shift_mod();
    return ((mm_shift % 12) + 12) % 12;
  endfunction
endmodule
