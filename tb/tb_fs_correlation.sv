// tb_fs_correlation -- self-checking test of the correlation module.
//
// Part 1: l = 8, marker 10001110, window 0011100011100011 -- the result must
// be sum_m = 8 at m = 4, and the delayed window must equal the input window,
// all exactly 2*ceil(log2 8) = 6 clocks later. Part 2: l = 123 with random
// windows, half of them holding a marker copy with a few bit errors; each
// sum_m, m and delayed window is compared with a model computed here,
// 14 clocks later.
module tb_fs_correlation;
  import fs_tb_pkg::*;
  localparam int unsigned LS = 8, LB = 123, LAT_S = 6, LAT_B = 14;
  localparam logic [LS-1:0] MK_S = 8'b10001110;
  localparam logic [LB-1:0] MK_B = 123'h392921df8cbf43bb39e201d62072bd4;

  logic            clk = 1'b0, rst_n = 1'b0;
  logic [2*LS-1:0] win_s, dly_s;
  logic [2*LB-1:0] win_b, dly_b;
  logic [3:0]      sum_s;
  logic [2:0]      pos_s;
  logic [6:0]      sum_b, pos_b;
  int unsigned     checks = 0, failures = 0;

  fs_correlation #(.L(LS), .MARKER(MK_S)) dut_s (
    .clk_i(clk), .rst_ni(rst_n), .en_i(1'b1), .win_i(win_s),
    .sum_o(sum_s), .pos_o(pos_s), .win_o(dly_s));
  fs_correlation dut_b (
    .clk_i(clk), .rst_ni(rst_n), .en_i(1'b1), .win_i(win_b),
    .sum_o(sum_b), .pos_o(pos_b), .win_o(dly_b));

  always #5 clk = ~clk;

  initial begin
    logic [2*LB-1:0] hist[$];
    int unsigned     e_sum[$], e_pos[$];
    automatic bit    mk[] = new[LB];
    automatic bit    w[]  = new[2*LB];
    foreach (mk[j]) mk[j] = MK_B[j];
    win_s = '0; win_b = '0;
    #12 rst_n = 1'b1;

    // Part 1
    @(negedge clk);
    win_s = 16'b0011100011100011;
    @(negedge clk);
    win_s = '0;
    repeat (LAT_S - 1) @(negedge clk);
    checks++;
    if (sum_s != 4'd8 || pos_s != 3'd4 || dly_s != 16'b0011100011100011) begin
      failures++;
      $display("l=8 example: sum %0d m %0d", sum_s, pos_s);
    end

    // Part 2
    for (int t = 0; t < 200; t++) begin
      int unsigned b, p, at;
      if (t >= LAT_B) begin
        checks++;
        if (sum_b != 7'(e_sum[t-LAT_B]) || pos_b != 7'(e_pos[t-LAT_B]) || dly_b !== hist[t-LAT_B]) begin
          failures++;
          if (failures < 5) $display("t=%0d got %0d@%0d want %0d@%0d", t, sum_b, pos_b, e_sum[t-LAT_B], e_pos[t-LAT_B]);
        end
      end
      for (int i = 0; i < 2*LB; i++) win_b[i] = 1'($urandom);
      if (t % 2 == 0) begin
        at = $urandom_range(LB-1);
        win_b[at +: LB] = MK_B;
        repeat ($urandom_range(10)) win_b[at + $urandom_range(LB-1)] ^= 1'b1;
      end
      foreach (w[j]) w[j] = win_b[j];
      ref_corr(w, mk, b, p);
      hist.push_back(win_b);
      e_sum.push_back(b);
      e_pos.push_back(p);
      @(negedge clk);
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
