// tb_router: sends random strip-TDS packets (about one in four inputs valid each bunch
// crossing, sometimes more than four at once) over real TDS link framing into router, in three
// phases with outer-board delay 0, 1 and 2. The outer board's stimulus is sent earlier by the
// same delay, as a shorter cable would deliver it, so after alignment all inputs of a bunch
// crossing must leave together. A reference written here routes the valid packets in input
// order to fibres 0..3, fills the rest with null packets carrying sector, layer and fibre
// number, and drops packets beyond four. Latency checked: 2 clocks after the receiver's input.
module tb_router;
  import nsw_pkg::*;
  localparam int NI = 12, NO = 4, N = 120;
  logic clk = 0, rst_n = 1;
  logic [1:0] outer_dly = 0;
  strip_payload_t [NI-1:0] pl;
  tds_frames_t [NI-1:0] frames;
  strip_payload_t [NO-1:0] fibre;
  logic [NI-1:0] hdr_err;
  int checks = 0, failures = 0, n_drop = 0, n_null = 0;

  router dut (.clk, .rst_n, .sector_id(4'd11), .layer_id(3'd5), .outer_dly, .in_frames(frames),
              .fibre, .hdr_err);
  for (genvar t = 0; t < NI; t++) begin : g_tx
    tds_scrambler u_tx (.clk, .rst_n, .valid(1'b1), .payload(pl[t]), .frames(frames[t]));
  end

  always #5 clk = ~clk;
  initial begin #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  strip_payload_t stim [N][NI];
  strip_payload_t exp_f [N][NO];

  initial begin
    for (int k = 0; k < N; k++) begin
      int n;
      n = 0;
      for (int i = 0; i < NI; i++) begin
        stim[k][i] = '0;
        if ($urandom_range(0, 3) == 0 || (k % 10 == 3)) begin
          stim[k][i].valid = 1; stim[k][i].band_id = $urandom_range(0, 200);
          stim[k][i].bcid = k; stim[k][i].q = {$urandom, $urandom, $urandom};
        end
      end
      for (int f = 0; f < NO; f++) begin
        exp_f[k][f] = '0; exp_f[k][f].spare = {1'b0, 4'd11, 3'd5, 2'(f)};
      end
      for (int i = 0; i < NI; i++) if (stim[k][i].valid) begin
        if (n < NO) exp_f[k][n] = stim[k][i]; else n_drop++;
        n++;
      end
      if (n < NO) n_null++;
    end
    pl = '0;
    #1 rst_n = 0;
    #20 rst_n = 1;
    for (int ph = 0; ph < 3; ph++) begin
      outer_dly = ph;
      // bunch crossing k enters inner inputs at step k+4 and outer inputs at step k+4-ph
      for (int s = 0; s < N/3 + 8; s++) begin
        @(negedge clk);
        for (int i = 0; i < NI; i++) begin
          int k;
          k = s - 4 + ((i >= 8) ? ph : 0) + ph * (N/3);
          pl[i] = (k >= ph * (N/3) && k < (ph + 1) * (N/3)) ? stim[k][i] : '0;
        end
        begin
          int k;
          k = s - 4 - 3 + ph * (N/3);
          if (k >= ph * (N/3) && k < (ph + 1) * (N/3)) begin
            checks++;
            for (int f = 0; f < NO; f++)
              if (fibre[f] !== exp_f[k][f]) begin
                failures++;
                $display("ph %0d BC %0d fibre %0d: got v%0d bcid %0d exp v%0d bcid %0d", ph, k, f,
                         fibre[f].valid, fibre[f].bcid, exp_f[k][f].valid, exp_f[k][f].bcid);
              end
          end
        end
      end
    end
    checks++;
    if (n_drop == 0 || n_null == 0 || hdr_err != 0) begin failures++; $display("coverage drop %0d null %0d", n_drop, n_null); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
