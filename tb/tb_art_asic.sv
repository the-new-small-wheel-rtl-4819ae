// tb_art_asic: drives art_asic with random ART hits from 32 VMMs (hit density varied so that
// both fewer and more than eight hits per bunch crossing occur) and random dead-time settings,
// in four phases: hit-map mode, hit-address mode, priority bypass and fixed pattern. A
// reference written here keeps its own dead-time counters, selects the eight most significant
// flagged VMMs, builds the expected 112-bit word with BCID and parities and compares it with
// `out` two clocks after the inputs were applied. BCR is pulsed to check the BCID restart.
module tb_art_asic;
  localparam int NV = 32, N = 400;
  logic clk = 0, rst_n = 1, bcr = 0;
  logic [NV-1:0] art_flag = '0;
  logic [NV-1:0][5:0] art_addr = '0;
  logic [2:0] dead_bc = 0;
  logic hit_addr_mode = 0, bypass_prio = 0, fixed_pattern = 0;
  logic [111:0] pattern = '0, out;
  logic [11:0] out_bcid;
  int checks = 0, failures = 0, n_over8 = 0, n_dead = 0;

  art_asic dut (.*);
  always #5 clk = ~clk;
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  logic [111:0] exp_w [N];
  logic [11:0]  exp_b [N];
  int dcnt [NV];
  int bc;

  function automatic logic [111:0] model(logic [NV-1:0] f, logic [NV-1:0][5:0] a, logic [11:0] b);
    logic [55:0] b1, b2;
    logic [NV-1:0] map;
    int ids[$];
    b1 = '0; b2 = '0; map = '0;
    if (bypass_prio) begin
      for (int s = 0; s < 8; s++) if (f[s]) ids.push_back(s); else ids.push_back(-1);
    end else begin
      for (int v = NV-1; v >= 0 && ids.size() < 8; v--) if (f[v]) ids.push_back(v);
    end
    for (int s = 0; s < ids.size(); s++) if (ids[s] >= 0) begin
      map[ids[s]] = 1;
      b2[55-6*s -: 6] = a[ids[s]];
      b2[7-s] = ^a[ids[s]];
      if (hit_addr_mode) b1[55-5*s -: 5] = ids[s];
    end
    if (hit_addr_mode) begin b1[15:4] = b; b1[3:0] = $countones(map); end
    else b1 = {map, b, 12'd0};
    return fixed_pattern ? pattern : {b1, b2};
  endfunction

  initial begin
    for (int v = 0; v < NV; v++) dcnt[v] = 0;
    bc = 0;
    #1 rst_n = 0; #20 rst_n = 1;
    for (int k = 0; k < N; k++) begin
      logic [NV-1:0] acc;
      int dens;
      @(negedge clk);
      if (k % 100 == 0) begin
        hit_addr_mode = (k / 100) == 1;
        bypass_prio   = (k / 100) == 2;
        fixed_pattern = (k / 100) == 3;
        pattern = {$urandom, $urandom, $urandom, $urandom};
      end
      if (k % 25 == 0) dead_bc = $urandom_range(0, 7);
      bcr = (k == 7 || k == 250);
      dens = (k % 50 < 25) ? 8 : 40;
      for (int v = 0; v < NV; v++) begin
        art_flag[v] = $urandom_range(0, 99) < dens;
        art_addr[v] = $urandom;
      end
      // reference dead time and BCID
      acc = '0;
      for (int v = 0; v < NV; v++) begin
        if (art_flag[v] && dcnt[v] == 0) begin acc[v] = 1; dcnt[v] = dead_bc; end
        else begin
          if (art_flag[v]) n_dead++;
          if (dcnt[v] != 0) dcnt[v]--;
        end
      end
      if (!bypass_prio && $countones(acc) > 8) n_over8++;
      if (bcr) bc = 0;
      exp_b[k] = bc;
      exp_w[k] = model(acc, art_addr, 12'(bc));
      bc++;
      @(posedge clk); #1;
      if (k >= 1 && k - 1 > 7 && k % 100 != 0) begin  // modes are static: skip switch BC
        checks++;
        if (out !== exp_w[k-1] || out_bcid !== exp_b[k-1]) begin
          failures++;
          if (failures < 5) $display("mismatch BC %0d got %h/%0d exp %h/%0d", k-1, out, out_bcid, exp_w[k-1], exp_b[k-1]);
        end
      end
    end
    $display("coverage over8=%0d dead_suppressed=%0d", n_over8, n_dead);
    if (n_over8 == 0 || n_dead == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
