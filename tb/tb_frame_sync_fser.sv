// tb_frame_sync_fser -- frame synchronization error rate of the full-size
// synchronizer (l = 123, k = 23, threshold 89) on a noisy bit stream.
//
// Frames of the form c_k b_l a_k payload follow each other with no gap, each
// with a 12300-bit (100-word) payload, the frame size of the paper's
// error-rate test. Every bit, header included, passes a binary symmetric
// channel that flips it with probability BER, for several BER values. The
// stream is generated on the fly, 123 bits per clock. A frame counts as
// synchronized when its TAIL beat comes exactly 100 words after the word
// holding its payload start and the captured bits equal the received bits
// at the payload's place; a missed, misplaced or extra frame is a frame
// synchronization error. The paper's own curve comes from OFDM/16QAM over
// AWGN, which is not modelled here, so these figures are not comparable
// point by point; the test only requires no error at the lowest BER and
// reports the rate at every BER.
module tb_frame_sync_fser;
  import fs_pkg::*;
  localparam int unsigned L = 123, K = 23, TH = 89, N = 100, LAT = 14;
  localparam int unsigned FRAMES = 4000;                // per BER point
  localparam int unsigned NPTS = 5;
  localparam int unsigned BER_PPM [NPTS] = '{20000, 80000, 120000, 160000, 200000};
  localparam logic [L-1:0] MK = 123'h392921df8cbf43bb39e201d62072bd4;

  logic         clk = 1'b0, rst_n = 1'b0;
  logic [L-1:0] din;
  logic [L-1:0] payload;
  beat_e        valid;
  logic [6:0]   cut, sum, pos;

  frame_sync dut (
    .clk_i(clk), .rst_ni(rst_n), .din_i(din),
    .threshold_i(7'(TH)), .n_words_i(16'(N)), .power_save_i(1'b1),
    .payload_o(payload), .valid_o(valid), .cut_o(cut), .sum_o(sum), .pos_o(pos));

  always #5 clk = ~clk;

  int unsigned checks = 0, failures = 0;

  // transmit side
  bit          txq[$];          // bits generated, not yet sent
  int      tx_base = 0;     // stream index of txq[0]
  int      exp_start[$];    // payload start of frames sent
  bit          exp_bits[$][];   // received payload bits of frames sent
  int unsigned ber_ppm = 0;

  // receive side
  bit          got[$];
  bit          open_frame = 1'b0;
  int unsigned n_sent, n_ok, n_err;

  function automatic bit chan(bit b);
    return ($urandom_range(999999) < ber_ppm) ? ~b : b;
  endfunction

  function automatic void gen_frame();
    bit p[] = new[N * L];
    for (int j = 0; j < K; j++) txq.push_back(chan(~MK[j]));
    for (int j = 0; j < L; j++) txq.push_back(chan(MK[j]));
    for (int j = 0; j < K; j++) txq.push_back(chan(~MK[L-K+j]));
    exp_start.push_back(tx_base + txq.size());
    foreach (p[j]) begin
      p[j] = 1'($urandom);       // channel applied to random data is random
      txq.push_back(p[j]);
    end
    exp_bits.push_back(p);
    n_sent++;
  endfunction

  // TAIL at word d: drop expected frames that should have ended earlier
  // (missed), then compare with the front one.
  task automatic on_tail(int d);
    bit matched = 1'b0;
    while (exp_start.size() > 0 && exp_start[0] / L + N < d) begin
      n_err++; void'(exp_start.pop_front()); void'(exp_bits.pop_front());
    end
    if (exp_start.size() > 0 && exp_start[0] / L + N == d && got.size() == N * L) begin
      matched = 1'b1;
      foreach (got[j]) if (got[j] != exp_bits[0][j]) matched = 1'b0;
      if (matched) begin
        n_ok++; void'(exp_start.pop_front()); void'(exp_bits.pop_front());
      end
    end
    if (!matched) n_err++;
  endtask

  task automatic on_beat(int d);
    unique case (valid)
      BEAT_HEAD: begin
        open_frame = 1'b1; got.delete();
        for (int j = 32'(cut); j < L; j++) got.push_back(payload[j]);
      end
      BEAT_BODY: for (int j = 0; j < L; j++) got.push_back(payload[j]);
      BEAT_TAIL: begin
        for (int j = 0; j < cut; j++) got.push_back(payload[j]);
        open_frame = 1'b0;
        on_tail(d);
      end
      default: ;
    endcase
  endtask

  initial begin
    automatic int w = 0;
    din = '0;
    #12 rst_n = 1'b1;
    for (int pt = 0; pt < NPTS; pt++) begin
      ber_ppm = BER_PPM[pt];
      n_sent = 0; n_ok = 0; n_err = 0;
      // random lead-in, then FRAMES frames back to back, then a tail gap
      repeat (2 * L) txq.push_back(1'($urandom));
      for (int f = 0; f < FRAMES; f++) begin
        gen_frame();
        while (txq.size() >= L) begin
          @(negedge clk);
          for (int j = 0; j < L; j++) din[j] = txq.pop_front();
          tx_base += L;
          @(posedge clk); #1;
          if (w >= LAT + 1) on_beat(w - LAT - 1);
          w++;
        end
      end
      repeat (3 * L) txq.push_back(1'($urandom));
      repeat (LAT + 3) for (int j = 0; j < L; j++) txq.push_back(1'($urandom));
      while (txq.size() >= L) begin
        @(negedge clk);
        for (int j = 0; j < L; j++) din[j] = txq.pop_front();
        tx_base += L;
        @(posedge clk); #1;
        on_beat(w - LAT - 1);
        w++;
      end
      // frames never captured
      n_err += exp_start.size();
      exp_start.delete(); exp_bits.delete();
      $display("BER %0d ppm: %0d frames sent, %0d synchronized, FSER %0d/%0d",
               ber_ppm, n_sent, n_ok, n_err, n_sent);
      checks++;
      if (pt == 0 && (n_err != 0 || n_ok != FRAMES)) failures++;
      checks++;
      if (n_ok > n_sent) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (NPTS * (FRAMES * (N + 2) + 100)) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
