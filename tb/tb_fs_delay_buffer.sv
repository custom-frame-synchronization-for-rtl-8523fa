// tb_fs_delay_buffer -- self-checking test of the input delay buffer.
//
// With the default size (246 bits, 14 clocks, i.e. 2l bits delayed by
// 2*ceil(log2 l) clocks for l = 123) random words go in every clock and each
// output is compared with the input of exactly 14 clocks earlier; the first
// outputs after reset must be zero.
module tb_fs_delay_buffer;
  localparam int unsigned W = 246, D = 14;

  logic         clk = 1'b0, rst_n = 1'b0;
  logic [W-1:0] din, dout;
  logic [W-1:0] hist[$];
  int unsigned  checks = 0, failures = 0;

  fs_delay_buffer dut (.clk_i(clk), .rst_ni(rst_n), .d_i(din), .d_o(dout));

  always #5 clk = ~clk;

  initial begin
    din = '0;
    #12 rst_n = 1'b1;
    for (int t = 0; t < 300; t++) begin
      @(negedge clk);
      checks++;
      if (t >= D) begin
        if (dout !== hist[t-D]) failures++;
      end else if (dout !== '0) failures++;
      for (int i = 0; i < W; i++) din[i] = 1'($urandom);
      hist.push_back(din);
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
