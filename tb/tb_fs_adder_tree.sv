// tb_fs_adder_tree -- self-checking test of the pipelined adder tree.
//
// Two trees, N = 123 (the paper's l) and N = 8 (its Figure 5 example), get a
// new random vector, all-ones and all-zeros vectors every clock. Each output
// is compared with a population count computed here, exactly
// ceil(log2 N) clocks after its input: 7 clocks for N = 123, 3 for N = 8.
module tb_fs_adder_tree;
  localparam int unsigned NA = 123, NB = 8;
  localparam int unsigned LA = 7, LB = 3;          // ceil(log2 N)
  localparam int unsigned SA = 7, SB = 4;          // sum widths

  logic          clk = 1'b0, rst_n = 1'b0;
  logic [NA-1:0] a_in;
  logic [NB-1:0] b_in;
  logic [SA-1:0] a_sum;
  logic [SB-1:0] b_sum;
  int unsigned   a_hist[$], b_hist[$];
  int unsigned   checks = 0, failures = 0;

  fs_adder_tree #(.N(NA)) dut_a (.clk_i(clk), .rst_ni(rst_n), .bits_i(a_in), .sum_o(a_sum));
  fs_adder_tree #(.N(NB)) dut_b (.clk_i(clk), .rst_ni(rst_n), .bits_i(b_in), .sum_o(b_sum));

  always #5 clk = ~clk;

  initial begin
    a_in = '0; b_in = '0;
    #12 rst_n = 1'b1;
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      // the history holds the counts of the inputs of earlier clocks
      if (t >= LA) begin
        checks++;
        if (a_sum != SA'(a_hist[t-LA])) begin
          failures++;
          if (failures < 5) $display("N=%0d t=%0d got %0d want %0d", NA, t, a_sum, a_hist[t-LA]);
        end
      end
      if (t >= LB) begin
        checks++;
        if (b_sum != SB'(b_hist[t-LB])) failures++;
      end
      case (t % 50)
        0:       begin a_in = '1; b_in = '1; end
        1:       begin a_in = '0; b_in = '0; end
        default: begin
          for (int i = 0; i < NA; i++) a_in[i] = 1'($urandom);
          for (int i = 0; i < NB; i++) b_in[i] = 1'($urandom);
        end
      endcase
      a_hist.push_back($countones(a_in));
      b_hist.push_back($countones(b_in));
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
