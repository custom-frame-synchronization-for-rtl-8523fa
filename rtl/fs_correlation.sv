// fs_correlation -- the correlation module of the frame synchronizer.
//
// Finds where in the current 2L-bit window the marker b_l most probably
// starts. The L parallel correlators produce the match count of every
// possible start position (ceil(log2 L) clocks), the selector reduces them to
// the largest count sum_m and its position m (another ceil(log2 L) clocks),
// and the input delay buffer holds the window for those same
// LAT = 2*ceil(log2 L) clocks. The three outputs therefore always describe
// the same window.
//
// Interface: win_i is the window register; sum_o, pos_o and win_o are the
// results for the window of LAT clocks earlier and that window itself. en_i
// low switches the correlators' inputs to zero (power saving while a payload
// is being captured); the delay buffer always runs.
// Structure and latency follow the paper.
module fs_correlation #(
  parameter int unsigned  L      = 123,
  parameter logic [L-1:0] MARKER = L'(123'h392921df8cbf43bb39e201d62072bd4),
  parameter int unsigned  SW     = fs_pkg::count_width(L),
  parameter int unsigned  PW     = fs_pkg::pos_width(L),
  parameter int unsigned  LAT    = fs_pkg::corr_latency(L)
) (
  input  logic           clk_i,
  input  logic           rst_ni,
  input  logic           en_i,
  input  logic [2*L-1:0] win_i,
  output logic [SW-1:0]  sum_o,
  output logic [PW-1:0]  pos_o,
  output logic [2*L-1:0] win_o
);

  logic [SW-1:0] sums [L];

  fs_parallel_adder_trees #(.L(L), .MARKER(MARKER), .SW(SW)) u_trees (
    .clk_i  (clk_i),
    .rst_ni (rst_ni),
    .en_i   (en_i),
    .win_i  (win_i),
    .sums_o (sums)
  );

  fs_selector #(.L(L), .SW(SW), .PW(PW)) u_sel (
    .clk_i  (clk_i),
    .rst_ni (rst_ni),
    .vals_i (sums),
    .max_o  (sum_o),
    .pos_o  (pos_o)
  );

  fs_delay_buffer #(.W(2*L), .DEPTH(LAT)) u_dly (
    .clk_i  (clk_i),
    .rst_ni (rst_ni),
    .d_i    (win_i),
    .d_o    (win_o)
  );

endmodule
