// art_asic: digital core of the Micromegas ART (Address in Real Time) ASIC.
//
// Every bunch crossing each of the N_VMM (32) VMMs may report one ART hit: a flag and the
// 6-bit address of its earliest channel. The chain, as in the paper's block diagram, is:
//   programmable dead time: after an accepted hit, further hits of the same VMM are ignored
//     for `dead_bc` (0..7) bunch crossings;
//   priority selection: eight cascaded priority encoders. Each takes the most significant set
//     bit of the 32-bit flag word, reports that VMM and clears the bit for the next stage, so
//     at most eight hits leave per bunch crossing;
//   data formatter: 112 bits per bunch crossing, two 56-bit batches for the GBTx wide mode.
//     Batch 1 (out[111:56]): hit-map mode {32-bit hit map, 12-bit BCID, 12 zero bits};
//     hit-address mode {8 x 5-bit VMM id, 12-bit BCID, 4-bit hit count}.
//     Batch 2 (out[55:0]): {8 x 6-bit ART address, 8 parity bits, one per address}.
//     Slot 0 is the first selected hit and sits in the most significant position.
// Debug modes from the paper: priority-encoder bypass (VMMs 0..7 go straight to slots 0..7)
// and a fixed calibration pattern. The BCID counter restarts at 0 on BCR.
// From the paper: the 0-7 BC dead time, the MSB-first cascade of eight encoders, the 5-bit
// VMM id, the 12-bit BCID, the 56+56 split with hit map or VMM ids and eight parities. This
// design's choices: the order of fields inside a batch, the 4-bit hit count, even parity,
// one dead-time setting shared by all inputs. Deserialisers and phase aligners are not
// modelled: each input arrives already as flag + address per bunch crossing.
// Latency: inputs at clock edge k appear on `out` after edge k+1.
module art_asic #(
  parameter int N_VMM = 32,
  parameter int N_SEL = 8
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       bcr,
  input  logic [N_VMM-1:0]           art_flag,
  input  logic [N_VMM-1:0][5:0]      art_addr,
  // configuration
  input  logic [2:0]                 dead_bc,
  input  logic                       hit_addr_mode,   // 0: hit map, 1: VMM id list
  input  logic                       bypass_prio,
  input  logic                       fixed_pattern,
  input  logic [111:0]               pattern,
  // output to GBTx, one word per bunch crossing
  output logic [111:0]               out,
  output logic [11:0]                out_bcid
);
  logic [N_VMM-1:0][2:0] dead_cnt;
  logic [N_VMM-1:0]      flag_q;
  logic [N_VMM-1:0][5:0] addr_q;
  logic [11:0]           bcid, bcid_q;

  // dead-time gate and BCID
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dead_cnt <= '0;
      flag_q   <= '0;
      addr_q   <= '0;
      bcid     <= '0;
      bcid_q   <= '0;
    end else begin
      bcid   <= bcr ? 12'd1 : bcid + 1'b1;
      bcid_q <= bcr ? 12'd0 : bcid;
      addr_q <= art_addr;
      for (int v = 0; v < N_VMM; v++) begin
        flag_q[v] <= art_flag[v] && dead_cnt[v] == 0;
        if (art_flag[v] && dead_cnt[v] == 0) dead_cnt[v] <= dead_bc;
        else if (dead_cnt[v] != 0)           dead_cnt[v] <= dead_cnt[v] - 1'b1;
      end
    end
  end

  // cascaded priority encoders, most significant bit first
  logic [N_SEL-1:0]                   sel_v;
  logic [N_SEL-1:0][$clog2(N_VMM)-1:0] sel_id;
  always_comb begin
    logic [N_VMM-1:0] word;
    word = flag_q;
    for (int s = 0; s < N_SEL; s++) begin
      sel_v[s]  = 1'b0;
      sel_id[s] = '0;
      if (bypass_prio) begin
        sel_v[s]  = flag_q[s];
        sel_id[s] = s[$clog2(N_VMM)-1:0];
      end else begin
        for (int v = 0; v < N_VMM; v++)
          if (word[v]) begin
            sel_v[s]  = 1'b1;
            sel_id[s] = v[$clog2(N_VMM)-1:0];
          end
        if (sel_v[s]) word[sel_id[s]] = 1'b0;
      end
    end
  end

  // data formatter
  logic [111:0] fmt;
  always_comb begin
    logic [N_VMM-1:0] map;
    logic [3:0]       cnt;
    logic [55:0]      b1, b2;
    map = '0;
    cnt = '0;
    b2  = '0;
    for (int s = 0; s < N_SEL; s++) begin
      if (sel_v[s]) begin
        map[sel_id[s]] = 1'b1;
        cnt = cnt + 1'b1;
        b2[55 - 6*s -: 6] = addr_q[sel_id[s]];
        b2[7 - s]         = ^addr_q[sel_id[s]];
      end
    end
    if (hit_addr_mode) begin
      b1 = '0;
      for (int s = 0; s < N_SEL; s++)
        if (sel_v[s]) b1[55 - 5*s -: 5] = 5'(sel_id[s]);
      b1[15:4] = bcid_q;
      b1[3:0]  = cnt;
    end else begin
      b1 = {32'(map), bcid_q, 12'd0};
    end
    fmt = fixed_pattern ? pattern : {b1, b2};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out      <= '0;
      out_bcid <= '0;
    end else begin
      out      <= fmt;
      out_bcid <= bcid_q;
    end
  end
endmodule
