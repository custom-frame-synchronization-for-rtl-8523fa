// fs_selector -- pipelined maximum search over the L correlation values.
//
// A comparator tree of the same shape as the adder tree: each level compares
// values two by two and passes the larger one, together with its position,
// to the next level, so after ceil(log2 L) registered levels the largest
// value sum_m and its position m come out. The position travels in its own
// register beside the value. Missing leaves (L not a power of two) are zero
// with positions above L-1; they sit to the right of every real leaf.
//
// Interface: vals_i[i] is the match count of place i; max_o and pos_o give the
// largest count and its place, LEVELS = ceil(log2 L) clocks later. A new set
// of values is accepted every clock.
// The tree and its latency follow the paper. On equal values the paper does
// not say which wins; here the lower position wins, which also keeps the
// padding leaves from ever being chosen.
module fs_selector #(
  parameter int unsigned L  = 123,
  parameter int unsigned SW = fs_pkg::count_width(L),
  parameter int unsigned PW = fs_pkg::pos_width(L)
) (
  input  logic          clk_i,
  input  logic          rst_ni,
  input  logic [SW-1:0] vals_i [L],
  output logic [SW-1:0] max_o,
  output logic [PW-1:0] pos_o
);

  localparam int unsigned LEVELS = fs_pkg::tree_levels(L);
  localparam int unsigned P      = 1 << LEVELS;

  typedef struct packed {
    logic [SW-1:0]     val;
    logic [LEVELS-1:0] pos;   // wide enough for padded positions
  } cand_t;

  cand_t leaves [P];
  always_comb begin
    for (int i = 0; i < P; i++) begin
      leaves[i].val = (i < L) ? vals_i[i] : '0;
      leaves[i].pos = LEVELS'(i);
    end
  end

  // Larger value wins; on a tie the lower position (the left operand) wins.
  function automatic cand_t pick(input cand_t lo, input cand_t hi);
    return (hi.val > lo.val) ? hi : lo;
  endfunction

  for (genvar s = 0; s < LEVELS; s++) begin : g_lvl
    localparam int unsigned NO = P >> (s + 1);
    cand_t r [NO];

    if (s == 0) begin : g_first
      always_ff @(posedge clk_i or negedge rst_ni) begin
        if (!rst_ni) begin
          for (int i = 0; i < NO; i++) r[i] <= '0;
        end else begin
          for (int i = 0; i < NO; i++) r[i] <= pick(leaves[2*i], leaves[2*i+1]);
        end
      end
    end else begin : g_next
      always_ff @(posedge clk_i or negedge rst_ni) begin
        if (!rst_ni) begin
          for (int i = 0; i < NO; i++) r[i] <= '0;
        end else begin
          for (int i = 0; i < NO; i++) r[i] <= pick(g_lvl[s-1].r[2*i], g_lvl[s-1].r[2*i+1]);
        end
      end
    end
  end

  assign max_o = g_lvl[LEVELS-1].r[0].val;
  assign pos_o = PW'(g_lvl[LEVELS-1].r[0].pos);

endmodule
