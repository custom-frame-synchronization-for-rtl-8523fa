// fs_delay_buffer -- fixed delay line for the window contents.
//
// The correlation results for a window appear DEPTH clocks after the window
// itself. This buffer delays the W-bit window by the same DEPTH clocks, so
// that the payload capture unit sees each window together with its own
// sum_m and m. It is a chain of DEPTH W-bit registers.
//
// Interface: d_o equals d_i of DEPTH clocks earlier (zero after reset).
// The paper gives the buffer's purpose and delay, 2*ceil(log2 l) clocks for
// a 2l-bit window; the register chain and its reset are this design's
// choice.
module fs_delay_buffer #(
  parameter int unsigned W     = 246,
  parameter int unsigned DEPTH = 14
) (
  input  logic         clk_i,
  input  logic         rst_ni,
  input  logic [W-1:0] d_i,
  output logic [W-1:0] d_o
);

  logic [W-1:0] stage [DEPTH];

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int i = 0; i < DEPTH; i++) stage[i] <= '0;
    end else begin
      stage[0] <= d_i;
      for (int i = 1; i < DEPTH; i++) stage[i] <= stage[i-1];
    end
  end

  assign d_o = stage[DEPTH-1];

endmodule
