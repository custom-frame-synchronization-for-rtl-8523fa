// tb_fs_parallel_adder_trees -- self-checking test of the L correlators.
//
// Part 1 reproduces the worked example of l = 8, marker 10001110: the window
// 0011100011100011 (bits 15..0) must give the counts 3,0,3,5,8,5,3,0 for
// places 0..7, three clocks later (the example prints 6 for place 5,
// which its own window bits do not give). Part 2 uses l = 123 and random windows
// (some holding the marker) and compares every count with a count made
// here, seven clocks later. Part 3 checks that with en_i low every count
// drops to zero.
module tb_fs_parallel_adder_trees;
  localparam int unsigned LS = 8, LB = 123;
  localparam logic [LS-1:0] MK_S = 8'b10001110;
  localparam logic [LB-1:0] MK_B = 123'h392921df8cbf43bb39e201d62072bd4;

  logic            clk = 1'b0, rst_n = 1'b0, en = 1'b1;
  logic [2*LS-1:0] win_s;
  logic [2*LB-1:0] win_b;
  logic [3:0]      sums_s [LS];
  logic [6:0]      sums_b [LB];
  int unsigned     checks = 0, failures = 0;
  // The worked example prints 6 for place 5, but its own window bits 12..5
  // (11000111) agree with 10001110 in 5 places; 5 is expected here.
  int unsigned     fig5 [LS] = '{3, 0, 3, 5, 8, 5, 3, 0};

  fs_parallel_adder_trees #(.L(LS), .MARKER(MK_S)) dut_s (
    .clk_i(clk), .rst_ni(rst_n), .en_i(en), .win_i(win_s), .sums_o(sums_s));
  fs_parallel_adder_trees dut_b (
    .clk_i(clk), .rst_ni(rst_n), .en_i(en), .win_i(win_b), .sums_o(sums_b));

  always #5 clk = ~clk;

  function automatic int unsigned count_b(logic [2*LB-1:0] w, int unsigned i);
    int unsigned s = 0;
    for (int j = 0; j < LB; j++) s += (w[i+j] == MK_B[j]) ? 1 : 0;
    return s;
  endfunction

  initial begin
    logic [2*LB-1:0] hist[$];
    win_s = '0; win_b = '0;
    #12 rst_n = 1'b1;

    // Part 1: the l = 8 example
    @(negedge clk);
    win_s = 16'b0011100011100011;
    repeat (3) @(negedge clk);
    for (int i = 0; i < LS; i++) begin
      checks++;
      if (sums_s[i] != 4'(fig5[i])) begin
        failures++;
        $display("l=8 place %0d: got %0d want %0d", i, sums_s[i], fig5[i]);
      end
    end

    // Part 2: l = 123, random windows
    for (int t = 0; t < 60; t++) begin
      if (t >= 7) begin
        for (int i = 0; i < LB; i++) begin
          checks++;
          if (sums_b[i] != 7'(count_b(hist[t-7], i))) failures++;
        end
      end
      for (int i = 0; i < 2*LB; i++) win_b[i] = 1'($urandom);
      if (t % 3 == 0) win_b[$urandom_range(LB-1) +: LB] = MK_B;
      hist.push_back(win_b);
      @(negedge clk);
    end

    // Part 3: isolation
    en = 1'b0;
    repeat (8) @(negedge clk);
    for (int i = 0; i < LB; i++) begin
      checks++;
      if (sums_b[i] != '0) failures++;
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
