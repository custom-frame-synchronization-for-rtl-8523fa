// frame_sync -- correlation-based frame synchronizer, top level.
//
// Every frame on the line is sent as  c_k, b_l, a_k, payload  (in time
// order), where b_l is an L-bit marker known to the receiver and the k-bit
// guards c_k and a_k are the inverted first and last K bits of b_l. The
// receiver gets the demodulated bit stream L bits per clock (bit 0 of a word
// earliest) and finds each marker by correlating every L-bit slice of its
// 2L-bit window with b_l in parallel. From the best position it locates the
// payload and streams it out as it arrives.
//
// Chain: fs_window (2L-bit window register) -> fs_correlation (L correlators,
// selector and input delay buffer, LAT = 2*ceil(log2 L) clocks) ->
// fs_payload_capture (threshold test, re-check, n+1-beat capture).
//
// Interface: din_i is one L-bit word per clock, no back-pressure.
// threshold_i is the detection threshold on sum_m, n_words_i the payload
// length in words of L bits, power_save_i lets the capture unit switch the
// correlators off during a payload. payload_o/valid_o/cut_o carry the payload
// in HEAD, BODY..., TAIL beats (see fs_pkg::beat_e). A payload bit that
// arrives in word w leaves in the beat LAT+2 clocks after w was presented.
// sum_o and pos_o expose the correlation result (sum_m and m) for monitoring.
//
// Defaults are the paper's FPGA configuration: L = 123, K = 23, and a
// threshold of 89 is what the paper used (it is an input here). The marker
// value is this design's own; the paper's marker for L = 123 is not given.
module frame_sync
  import fs_pkg::*;
#(
  parameter int unsigned  L      = 123,
  parameter int unsigned  K      = 23,
  parameter logic [L-1:0] MARKER = L'(123'h392921df8cbf43bb39e201d62072bd4),
  parameter int unsigned  NW     = 16,
  parameter int unsigned  SW     = fs_pkg::count_width(L),
  parameter int unsigned  PW     = fs_pkg::pos_width(L)
) (
  input  logic          clk_i,
  input  logic          rst_ni,
  input  logic [L-1:0]  din_i,
  input  logic [SW-1:0] threshold_i,
  input  logic [NW-1:0] n_words_i,
  input  logic          power_save_i,
  output logic [L-1:0]  payload_o,
  output beat_e         valid_o,
  output logic [PW-1:0] cut_o,
  output logic [SW-1:0] sum_o,
  output logic [PW-1:0] pos_o
);

  localparam int unsigned LAT = corr_latency(L);

  logic [2*L-1:0] win, win_dly;
  logic           corr_en;

  fs_window #(.L(L)) u_window (
    .clk_i  (clk_i),
    .rst_ni (rst_ni),
    .din_i  (din_i),
    .win_o  (win)
  );

  fs_correlation #(.L(L), .MARKER(MARKER), .SW(SW), .PW(PW), .LAT(LAT)) u_corr (
    .clk_i  (clk_i),
    .rst_ni (rst_ni),
    .en_i   (corr_en),
    .win_i  (win),
    .sum_o  (sum_o),
    .pos_o  (pos_o),
    .win_o  (win_dly)
  );

  fs_payload_capture #(.L(L), .K(K), .NW(NW), .SW(SW), .PW(PW), .LAT(LAT)) u_capture (
    .clk_i        (clk_i),
    .rst_ni       (rst_ni),
    .sum_i        (sum_o),
    .pos_i        (pos_o),
    .win_i        (win_dly),
    .threshold_i  (threshold_i),
    .n_words_i    (n_words_i),
    .power_save_i (power_save_i),
    .payload_o    (payload_o),
    .valid_o      (valid_o),
    .cut_o        (cut_o),
    .corr_en_o    (corr_en)
  );

  // Parameter sanity: the header a_k b_l c_k needs l > 2k.
  initial begin
    assert (L > 2 * K) else $error("frame_sync: L must exceed 2*K");
  end

endmodule
