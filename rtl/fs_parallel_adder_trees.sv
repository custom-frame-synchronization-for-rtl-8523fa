// fs_parallel_adder_trees -- the L parallel correlators of the synchronizer.
//
// Correlator i compares the stored marker b_l with window bits i+L-1..i, the
// i-th of the L places where a marker can start inside the 2L-bit window
// (places L..2L-1 are not needed: the same bits are at 0..L-1 one clock
// later). It XNORs the L bit pairs, marker bit j against window bit i+j, and
// counts the ones with a pipelined adder tree. sum_i is therefore the number
// of bits in which the window slice agrees with the marker: L for a perfect
// match, about L/2 for unrelated data.
//
// Interface: win_i is the window register, sums_o[i] the match count of
// place i, LEVELS = ceil(log2 L) clocks after win_i. MARKER holds b_l with
// its first transmitted bit in bit 0. en_i low forces every XNOR output to
// zero, so the trees settle at zero and stop toggling; the paper allows the
// correlation to be switched off while a payload is captured to save power,
// and gating the XNOR outputs is this design's way of doing it.
// The XNOR rows and one adder tree per place follow the paper (its Figure 5
// shows the L = 8 case); the default MARKER for L = 123 is this design's
// own pseudo-random choice, as the paper does not print one.
module fs_parallel_adder_trees #(
  parameter int unsigned  L      = 123,
  parameter logic [L-1:0] MARKER = L'(123'h392921df8cbf43bb39e201d62072bd4),
  parameter int unsigned  SW     = fs_pkg::count_width(L)
) (
  input  logic           clk_i,
  input  logic           rst_ni,
  input  logic           en_i,
  input  logic [2*L-1:0] win_i,
  output logic [SW-1:0]  sums_o [L]
);

  for (genvar i = 0; i < L; i++) begin : g_corr
    logic [L-1:0] match;
    assign match = en_i ? ~(win_i[i +: L] ^ MARKER) : '0;

    fs_adder_tree #(.N(L), .SW(SW)) u_tree (
      .clk_i  (clk_i),
      .rst_ni (rst_ni),
      .bits_i (match),
      .sum_o  (sums_o[i])
    );
  end

endmodule
