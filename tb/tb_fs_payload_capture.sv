// tb_fs_payload_capture -- self-checking test of the payload capture unit.
//
// The unit is driven as the correlation module would drive it, but from a
// model in this testbench: every clock it gets the window {word w, word w-1}
// of a generated stream together with the best match count and place for
// that window, computed here (no pipeline delay). l = 123, k = 23,
// threshold 89, as in the paper's FPGA build.
//
// The stream holds frames with random and chosen marker offsets (offset 0,
// offsets that put the payload start just inside and just outside the
// window, offset l-k where the last beat is empty), marker bit errors,
// back-to-back frames, frames preceded by a decoy that crosses the
// threshold one clock early (forcing the re-check to restart), and long
// frames with power saving on. Every captured payload is rebuilt from the
// HEAD/BODY/TAIL beats and compared bit for bit with the one sent; the TAIL
// must come exactly n words after the word holding the payload start, and
// corr_en_o may only be low inside a capture and not in its last LAT
// words. Each mechanism must be seen at least once.
module tb_fs_payload_capture;
  import fs_pkg::*;
  import fs_tb_pkg::*;
  localparam int unsigned L = 123, K = 23, LAT = 14, TH = 89;
  localparam logic [L-1:0] MK = 123'h392921df8cbf43bb39e201d62072bd4;

  logic           clk = 1'b0, rst_n = 1'b0;
  logic [6:0]     sum, pos;
  logic [2*L-1:0] win;
  logic [15:0]    n_words;
  logic           psave;
  logic [L-1:0]   payload;
  beat_e          valid;
  logic [6:0]     cut;
  logic           corr_en;

  int unsigned checks = 0, failures = 0;
  int unsigned n_ok = 0, n_restart = 0, n_wait = 0, n_now = 0, n_cut0 = 0;
  int unsigned n_gated = 0, n_err_frames = 0;

  fs_payload_capture dut (
    .clk_i(clk), .rst_ni(rst_n), .sum_i(sum), .pos_i(pos), .win_i(win),
    .threshold_i(7'(TH)), .n_words_i(n_words), .power_save_i(psave),
    .payload_o(payload), .valid_o(valid), .cut_o(cut), .corr_en_o(corr_en));

  always #5 clk = ~clk;

  frame_stream fs;
  bit          mk[];
  int unsigned frame_nerr[$];
  int unsigned frame_psave[$];

  // receiver state
  bit          got[$];
  bit          open_frame = 1'b0;
  int unsigned fidx = 0;

  task automatic check_beat(int unsigned w);
    if (valid == BEAT_HEAD) begin
      if (open_frame) n_restart++;
      open_frame = 1'b1;
      got.delete();
      if (32'(cut) < K) n_wait++; else n_now++;
      if (cut == 0) n_cut0++;
      for (int j = 32'(cut); j < L; j++) got.push_back(payload[j]);
    end else if (valid == BEAT_BODY) begin
      for (int j = 0; j < L; j++) got.push_back(payload[j]);
    end else if (valid == BEAT_TAIL) begin
      for (int j = 0; j < cut; j++) got.push_back(payload[j]);
      open_frame = 1'b0;
      checks++;
      if (fidx >= fs.pay_start.size()) begin
        failures++;
        $display("word %0d: frame captured where none was sent", w);
      end else begin
        int unsigned s = fs.pay_start[fidx], n = fs.pay_words[fidx];
        bit bad = (got.size() != n * L) || (w != s / L + n);
        for (int unsigned j = 0; j < got.size() && !bad; j++)
          if (got[j] != fs.bits[s + j]) bad = 1'b1;
        if (bad) begin
          failures++;
          $display("frame %0d wrong: %0d bits, tail at word %0d, expected %0d bits at word %0d",
                   fidx, got.size(), w, n * L, s / L + n);
        end else begin
          n_ok++;
          if (frame_nerr[fidx] != 0) n_err_frames++;
        end
        fidx++;
      end
    end
  endtask

  // corr_en_o may be low only with power saving on, after the HEAD and at
  // least LAT words before the TAIL of the frame being captured.
  task automatic check_gate(int unsigned w);
    if (!corr_en) begin
      bit ok = 1'b0;
      n_gated++;
      for (int f = 0; f < fs.pay_start.size(); f++) begin
        int unsigned h = fs.pay_start[f] / L, t = h + fs.pay_words[f];
        if (psave && w > h && w + LAT <= t) ok = 1'b1;
      end
      checks++;
      if (!ok) begin
        failures++;
        $display("word %0d: correlation switched off outside the allowed span", w);
      end
    end
  endtask

  function automatic void frame(int unsigned n, int unsigned nerr, bit ps);
    fs.add_frame(n, nerr);
    frame_nerr.push_back(nerr);
    frame_psave.push_back(32'(ps));
  endfunction

  initial begin
    automatic bit wv[] = new[2*L];
    int unsigned best, bpos, nw;
    int unsigned ps_from_word;

    mk = new[L];
    foreach (mk[j]) mk[j] = MK[j];
    fs = new(L, K, mk);

    // --- build the stream ---
    fs.add_random(3 * L);
    // random offsets, errors and lengths
    for (int i = 0; i < 12; i++) begin
      fs.add_random(L + $urandom_range(2 * L));
      frame($urandom_range(1, 4), $urandom_range(0, 15), 0);
    end
    // chosen offsets
    for (int i = 0; i < 7; i++) begin
      automatic int unsigned offs [7] = '{0, L-K-1, L-K, L-K+1, L-1, 1, K-1};
      fs.add_random(2 * L);
      fs.align_marker(offs[i]);
      frame($urandom_range(1, 3), 0, 0);
    end
    // back-to-back frames
    for (int i = 0; i < 4; i++) frame($urandom_range(1, 3), $urandom_range(0, 8), 0);
    // decoys: a noisy marker copy right before c_k, real offset >= K, so the
    // decoy is in view one word before the real marker
    for (int i = 0; i < 4; i++) begin
      fs.add_random(3 * L);
      fs.align_marker($urandom_range(K, L - 1));
      fs.add_decoy(8);
      frame(2, $urandom_range(0, 3), 0);
    end
    // long frames with power saving, two of them back to back
    ps_from_word = fs.num_words();
    fs.add_random(2 * L);
    frame(20, 5, 1);
    frame(17, 0, 1);
    fs.add_random(2 * L);
    frame(30, 2, 1);
    fs.add_random(6 * L);

    // --- run ---
    sum = '0; pos = '0; win = '0; n_words = 16'd1; psave = 1'b0;
    #12 rst_n = 1'b1;
    nw = fs.num_words();
    fidx = 0;
    for (int unsigned w = 0; w < nw; w++) begin
      @(negedge clk);
      for (int j = 0; j < L; j++) begin
        wv[j]     = (w > 0) ? fs.get_bit(w - 1, j) : 1'b0;
        wv[L + j] = fs.get_bit(w, j);
      end
      foreach (wv[j]) win[j] = wv[j];
      ref_corr(wv, mk, best, bpos);
      sum = 7'(best);
      pos = 7'(bpos);
      // n_words: length of the frame whose payload starts in this word or
      // the next one (the unit samples it at HEAD)
      for (int f = 0; f < fs.pay_start.size(); f++)
        if (fs.pay_start[f] / L == w || fs.pay_start[f] / L == w + 1)
          n_words = 16'(fs.pay_words[f]);
      psave = (w >= ps_from_word);
      #1 check_gate(w);
      @(posedge clk); #1;
      check_beat(w);
    end

    checks++;
    if (fidx != fs.pay_start.size()) begin
      failures++;
      $display("%0d of %0d frames captured", fidx, fs.pay_start.size());
    end
    $display("frames ok %0d, immediate %0d, waited %0d, empty tail %0d, restarts %0d, with bit errors %0d, gated words %0d",
             n_ok, n_now, n_wait, n_cut0, n_restart, n_err_frames, n_gated);
    checks += 6;
    if (n_now == 0)        begin failures++; $display("no immediate start seen"); end
    if (n_wait == 0)       begin failures++; $display("no one-word wait seen"); end
    if (n_cut0 == 0)       begin failures++; $display("no empty tail seen"); end
    if (n_restart == 0)    begin failures++; $display("no restart seen"); end
    if (n_err_frames == 0) begin failures++; $display("no frame with bit errors seen"); end
    if (n_gated == 0)      begin failures++; $display("power saving never engaged"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
