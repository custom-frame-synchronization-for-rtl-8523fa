// tb_fs_selector -- self-checking test of the pipelined maximum selector.
//
// Feeds L = 123 random match counts per clock (sometimes with forced ties, or
// with the maximum at the first or last place) and checks that exactly
// ceil(log2 123) = 7 clocks later max_o is the largest value and pos_o the
// lowest place holding it.
module tb_fs_selector;
  localparam int unsigned L = 123, LAT = 7, SW = 7, PW = 7;

  logic          clk = 1'b0, rst_n = 1'b0;
  logic [SW-1:0] vals [L];
  logic [SW-1:0] mx;
  logic [PW-1:0] pos;
  int unsigned   exp_max[$], exp_pos[$];
  int unsigned   checks = 0, failures = 0;

  fs_selector #(.L(L)) dut (.clk_i(clk), .rst_ni(rst_n), .vals_i(vals), .max_o(mx), .pos_o(pos));

  always #5 clk = ~clk;

  initial begin
    foreach (vals[i]) vals[i] = '0;
    #12 rst_n = 1'b1;
    for (int t = 0; t < 500; t++) begin
      int unsigned best, bpos;
      @(negedge clk);
      if (t >= LAT) begin
        checks++;
        if (mx != SW'(exp_max[t-LAT]) || pos != PW'(exp_pos[t-LAT])) begin
          failures++;
          if (failures < 5)
            $display("t=%0d got %0d@%0d want %0d@%0d", t, mx, pos, exp_max[t-LAT], exp_pos[t-LAT]);
        end
      end
      foreach (vals[i]) vals[i] = SW'($urandom_range(100));
      case (t % 5)
        1: vals[$urandom_range(L-1)] = 7'd123;
        2: begin vals[L-1] = 7'd120; vals[5] = 7'd120; end   // tie
        3: vals[0] = 7'd122;
        4: vals[L-1] = 7'd122;
        default: ;
      endcase
      best = 0; bpos = 0;
      for (int i = 0; i < L; i++)
        if (32'(vals[i]) > best) begin best = 32'(vals[i]); bpos = i; end
      exp_max.push_back(best);
      exp_pos.push_back(bpos);
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
