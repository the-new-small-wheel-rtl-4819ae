// router: sTGC Router of one layer of one sector, a fixed-latency packet switch.
//
// It receives the links of N_IN strip-TDS positions (three strip front-end boards with four
// TDS positions each) and has N_OUT output fibres to the sTGC Trigger Processor. Each input is
// unscrambled (tds_descrambler). The inputs of the outer board (the last N_IN/3) have a
// shorter cable; they are delayed by `outer_dly` (0, 1 or 2) cycles so that all inputs line up.
// Then, every bunch crossing, the valid strip packets are routed to the fibres: the lowest-
// numbered valid input to fibre 0, the next to fibre 1, and so on; at most N_OUT are
// forwarded. A fibre with nothing to send carries a null packet (valid = 0) holding the
// sector-id, layer and fibre number in its spare field, which lets the receiver check the
// cabling.
//
// From the paper: unscrambling, alignment delay for the outer board, up to four packets onto
// four fibres, null packets with sector, layer and fibre. This design's choices: the
// input-to-fibre priority, the delay unit (one clock here, one 160 MHz clock in the paper),
// and that the fibres carry unscrambled payloads. Latency: 2 cycles plus `outer_dly`
// for the outer board.
module router
  import nsw_pkg::*;
#(
  parameter int N_IN  = 12,
  parameter int N_OUT = 4
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [3:0]             sector_id,
  input  logic [2:0]             layer_id,
  input  logic [1:0]             outer_dly,
  input  tds_frames_t [N_IN-1:0] in_frames,
  output strip_payload_t [N_OUT-1:0] fibre,
  output logic [N_IN-1:0]        hdr_err
);
  localparam int FIRST_OUTER = N_IN - N_IN/3;

  strip_payload_t [N_IN-1:0] rx, aligned;
  logic [N_IN-1:0]           hdr_ok;
  strip_payload_t [N_IN-1:0] d1, d2;

  for (genvar i = 0; i < N_IN; i++) begin : g_rx
    tds_descrambler u_dsc (.clk, .rst_n, .valid(1'b1), .frames(in_frames[i]),
                           .payload(rx[i]), .hdr_ok(hdr_ok[i]));
  end
  assign hdr_err = ~hdr_ok;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      d1 <= '0;
      d2 <= '0;
    end else begin
      d1 <= rx;
      d2 <= d1;
    end
  end

  always_comb begin
    for (int i = 0; i < N_IN; i++) begin
      if (i >= FIRST_OUTER)
        aligned[i] = (outer_dly == 2'd2) ? d2[i] : (outer_dly == 2'd1) ? d1[i] : rx[i];
      else
        aligned[i] = rx[i];
    end
  end

  strip_payload_t [N_OUT-1:0] out_d;
  always_comb begin
    int k;
    k = 0;
    for (int f = 0; f < N_OUT; f++) begin
      out_d[f]       = '0;
      out_d[f].spare = {1'b0, sector_id, layer_id, 2'(f)};
    end
    for (int i = 0; i < N_IN; i++) begin
      if (aligned[i].valid && k < N_OUT) begin
        out_d[k] = aligned[i];
        k++;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) fibre <= '0;
    else        fibre <= out_d;
  end
endmodule
