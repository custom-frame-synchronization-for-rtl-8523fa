// fs_window -- the window register of the frame synchronizer.
//
// A 2*L-bit register that holds the two most recent L-bit input words, so
// that any L-bit marker that straddles a word boundary lies wholly inside it.
// Each clock the new word din_i is loaded into the left half (bits 2L-1..L)
// and the word that was there moves, in the same bit order, into the right
// half (bits L-1..0): flip-flops L positions apart form one shift chain.
// Bit 0 of an input word is the earliest received bit, so within the window
// higher bit numbers are later in time.
//
// Timing: a word presented at a rising edge is in win_o[2L-1:L] right after
// that edge and in win_o[L-1:0] one clock later.
// The structure follows the paper; the asynchronous active-low reset that
// clears the register is this design's choice.
module fs_window #(
  parameter int unsigned L = 123
) (
  input  logic           clk_i,
  input  logic           rst_ni,
  input  logic [L-1:0]   din_i,
  output logic [2*L-1:0] win_o
);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) win_o <= '0;
    else         win_o <= {din_i, win_o[2*L-1:L]};
  end

endmodule
