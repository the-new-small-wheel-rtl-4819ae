// tb_pad_tds: drives random pad Time-over-Threshold levels and bunch-counter resets into
// pad_tds, recovers the payload with the link receiver and compares it, bunch crossing by
// bunch crossing, with a reference: hits are 0->1 changes of ToT, BCID counts from the last
// BCR (checked from the first BCR on). Also checks the latency: the payload of the level sampled at clock edge k is
// recovered after edge k+2 (pad_tds 2 clocks, receiver 1 clock).
module tb_pad_tds;
  import nsw_pkg::*;
  localparam int N = 200;
  logic clk = 0, rst_n = 1, bcr = 0;
  logic [PADS_PER_TDS-1:0] tot;
  tds_frames_t frames;
  pad_payload_t rx;
  logic hdr_ok;
  int checks = 0, failures = 0;

  pad_tds dut (.clk, .rst_n, .bcr, .tot, .frames);
  tds_descrambler u_rx (.clk, .rst_n, .valid(1'b1), .frames, .payload(rx), .hdr_ok);

  always #5 clk = ~clk;
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  logic [PADS_PER_TDS-1:0] tot_h [N];
  logic                    bcr_h [N];
  pad_payload_t            exp_h [N];
  int cyc = 0;
  int n_hits = 0;

  initial begin
    logic [PADS_PER_TDS-1:0] prev;
    logic [BCID_W-1:0] cnt;
    prev = '0; cnt = '0;
    for (int k = 0; k < N; k++) begin
      tot_h[k] = {$urandom, $urandom, $urandom, $urandom} & {$urandom, $urandom, $urandom, $urandom};
      bcr_h[k] = (k == 10) || (k == 150);
      exp_h[k].pads = tot_h[k] & ~prev;
      exp_h[k].bcid = bcr_h[k] ? '0 : cnt;
      cnt = exp_h[k].bcid + 1'b1;
      prev = tot_h[k];
    end
    tot = '0;
    #1 rst_n = 0;
    #20 rst_n = 1;
    // edge k samples tot_h[k]
    for (int k = 0; k < N; k++) begin
      @(negedge clk);
      tot = tot_h[k]; bcr = bcr_h[k];
      if (k >= 3) begin
        checks++;
        if (rx.pads !== exp_h[k-3].pads || (k-3 >= 10 && rx.bcid !== exp_h[k-3].bcid) || !hdr_ok) begin
          failures++;
          $display("BC %0d: got bcid %0d exp %0d", k-3, rx.bcid, exp_h[k-3].bcid);
        end
        n_hits += $countones(exp_h[k-3].pads);
      end
    end
    checks++;
    if (n_hits == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
