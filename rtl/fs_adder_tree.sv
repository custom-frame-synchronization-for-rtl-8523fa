// fs_adder_tree -- pipelined population count of N one-bit values.
//
// Level 1 adds the inputs two by two, each further level adds the previous
// level's results two by two, until one sum is left after ceil(log2 N)
// levels. When N is not a power of two the missing leaves are zeros. A
// register follows every level, so the tree accepts a new input vector every
// clock and presents its sum ceil(log2 N) clocks later.
//
// Interface: bits_i is the vector to count (one XNOR output per bit),
// sum_o the number of ones in it, LEVELS clocks after bits_i was presented.
// The tree shape and its latency follow the paper. Every level is kept at the
// width of the final sum (the synthesis tool trims the unused upper bits of
// the early levels), and the asynchronous reset clearing every level is
// this design's choice.
module fs_adder_tree #(
  parameter int unsigned N  = 123,
  parameter int unsigned SW = fs_pkg::count_width(N)
) (
  input  logic          clk_i,
  input  logic          rst_ni,
  input  logic [N-1:0]  bits_i,
  output logic [SW-1:0] sum_o
);

  localparam int unsigned LEVELS = fs_pkg::tree_levels(N);
  localparam int unsigned P      = 1 << LEVELS;   // leaves after zero padding

  logic [P-1:0] leaves;
  assign leaves = P'(bits_i);

  for (genvar s = 0; s < LEVELS; s++) begin : g_lvl
    localparam int unsigned NO = P >> (s + 1);    // adders in this level
    logic [SW-1:0] r [NO];

    if (s == 0) begin : g_first
      always_ff @(posedge clk_i or negedge rst_ni) begin
        if (!rst_ni) begin
          for (int i = 0; i < NO; i++) r[i] <= '0;
        end else begin
          for (int i = 0; i < NO; i++)
            r[i] <= SW'(leaves[2*i]) + SW'(leaves[2*i+1]);
        end
      end
    end else begin : g_next
      always_ff @(posedge clk_i or negedge rst_ni) begin
        if (!rst_ni) begin
          for (int i = 0; i < NO; i++) r[i] <= '0;
        end else begin
          for (int i = 0; i < NO; i++)
            r[i] <= g_lvl[s-1].r[2*i] + g_lvl[s-1].r[2*i+1];
        end
      end
    end
  end

  assign sum_o = g_lvl[LEVELS-1].r[0];

endmodule
