// tb_fs_window -- self-checking test of the window register.
//
// Drives random L-bit words (L = 123, the default) and checks after every
// clock that the left half holds the word just presented and the right half
// the word before it, bit order kept, and that reset clears the register.
module tb_fs_window;
  localparam int unsigned L = 123;

  logic           clk = 1'b0, rst_n = 1'b0;
  logic [L-1:0]   din;
  logic [2*L-1:0] win;
  logic [L-1:0]   prev, cur;
  int unsigned    checks = 0, failures = 0;

  fs_window #(.L(L)) dut (.clk_i(clk), .rst_ni(rst_n), .din_i(din), .win_o(win));

  always #5 clk = ~clk;

  function automatic logic [L-1:0] rand_word();
    logic [L-1:0] w;
    for (int i = 0; i < L; i++) w[i] = 1'($urandom);
    return w;
  endfunction

  initial begin
    din = '0; prev = '0; cur = '0;
    #12;
    checks++; if (win !== '0) failures++;
    rst_n = 1'b1;
    for (int t = 0; t < 200; t++) begin
      @(negedge clk);
      din = rand_word();
      @(posedge clk); #1;
      prev = cur; cur = din;
      checks++;
      if (win[2*L-1:L] !== cur || win[L-1:0] !== prev) begin
        failures++;
        if (failures < 5) $display("mismatch at step %0d", t);
      end
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
