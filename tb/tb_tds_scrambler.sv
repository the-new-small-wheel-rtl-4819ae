// tb_tds_scrambler: checks tds_scrambler against a bit-serial reference scrambler written
// here, and checks that tds_descrambler recovers every payload and sees the 0b1010 header.
// Random payloads for 40 bunch crossings; the descrambler is started in a different state
// from the scrambler to show that it synchronises by itself within one payload.
module tb_tds_scrambler;
  import nsw_pkg::*;
  logic clk = 0, rst_n = 1, valid = 0;
  logic [PAYLOAD_W-1:0] payload, rx_payload;
  tds_frames_t frames;
  logic hdr_ok;
  int checks = 0, failures = 0;

  tds_scrambler   u_scr (.clk, .rst_n, .valid, .payload, .frames);
  logic v_d;
  always_ff @(posedge clk) v_d <= valid;
  tds_descrambler u_dsc (.clk, .rst_n, .valid(v_d), .frames, .payload(rx_payload), .hdr_ok);

  always #5 clk = ~clk;
  initial begin #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  logic [57:0] ref_st;
  logic [119:0] ref_bits;
  task automatic ref_scramble(input logic [PAYLOAD_W-1:0] p, output logic [119:0] o);
    logic s;
    o[119:116] = 4'b1010;
    for (int i = PAYLOAD_W-1; i >= 0; i--) begin
      s = p[i] ^ ref_st[38] ^ ref_st[57];
      ref_st = {ref_st[56:0], s};
      o[i] = s;
    end
  endtask

  logic [PAYLOAD_W-1:0] prev;
  initial begin
    ref_st = '1;
    payload = '0;
    #1 rst_n = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 40; n++) begin
      @(negedge clk);
      for (int w = 0; w < 4; w++) payload = {payload[PAYLOAD_W-33:0], 32'($urandom)};
      valid = 1;
      ref_scramble(payload, ref_bits);
      @(negedge clk);
      valid = 0;
      checks++;
      if ({frames[0], frames[1], frames[2], frames[3]} !== ref_bits) begin
        failures++; $display("frame mismatch at %0d %h %h", n, {frames[0], frames[1], frames[2], frames[3]}, ref_bits);
      end
      prev = payload;
      @(negedge clk);
      if (n > 0) begin
        checks++;
        if (rx_payload !== prev || !hdr_ok) begin failures++; $display("descramble mismatch at %0d", n); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
