// fs_tb_pkg -- stimulus and reference helpers shared by the frame
// synchronizer testbenches.
//
// frame_stream builds a received bit stream, earliest bit first, out of
// random filler and frames laid out as c_k, b_l, a_k, payload: c_k is the
// inverse of the first K marker bits, a_k the inverse of the last K marker
// bits. It remembers where every payload starts and how long it is, so a
// testbench can check the synchronizer's output against it. Frames can carry
// bit errors in the marker, start at a chosen marker offset within an input
// word, or be preceded by a noisy copy of the marker (a decoy) that is seen
// one clock before the real marker. ref_corr() is an independent model of
// the correlation: the best match count over the L places of a 2L window.
package fs_tb_pkg;

  class frame_stream;
    int unsigned L, K;
    bit          marker[];
    bit          bits[$];
    int unsigned pay_start[$];   // first payload bit of each frame
    int unsigned pay_words[$];   // payload length in L-bit words
    int unsigned marker_pos[$];  // first marker bit of each frame

    function new(int unsigned l, int unsigned k, bit mk[]);
      L = l; K = k; marker = mk;
    endfunction

    function void add_random(int unsigned n);
      repeat (n) bits.push_back(1'($urandom));
    endfunction

    // Pad with random bits so that the next marker starts at window offset m.
    function void align_marker(int unsigned m);
      int unsigned cur = (bits.size() + K) % L;
      add_random((m + L - cur) % L);
    endfunction

    // A noisy marker copy ending exactly where the next c_k begins.
    function void add_decoy(int unsigned nerr);
      bit d[] = new[L];
      foreach (d[j]) d[j] = marker[j];
      flip_some(d, nerr);
      foreach (d[j]) bits.push_back(d[j]);
    endfunction

    static function void flip_some(ref bit v[], input int unsigned nerr);
      bit done[] = new[v.size()];
      int unsigned cnt = 0;
      while (cnt < nerr) begin
        int unsigned j = $urandom_range(v.size() - 1);
        if (!done[j]) begin
          done[j] = 1'b1; v[j] = ~v[j]; cnt++;
        end
      end
    endfunction

    // c_k, b_l (with nerr flipped bits), a_k, then n random payload words.
    function void add_frame(int unsigned n, int unsigned nerr);
      bit b[] = new[L];
      foreach (b[j]) b[j] = marker[j];
      flip_some(b, nerr);
      for (int unsigned j = 0; j < K; j++) bits.push_back(~marker[j]);
      marker_pos.push_back(bits.size());
      foreach (b[j]) bits.push_back(b[j]);
      for (int unsigned j = 0; j < K; j++) bits.push_back(~marker[L-K+j]);
      pay_start.push_back(bits.size());
      pay_words.push_back(n);
      add_random(n * L);
    endfunction

    function int unsigned num_words();
      return (bits.size() + L - 1) / L;
    endfunction

    // Input word w, bit j = stream bit w*L+j (zero past the end).
    function bit get_bit(int unsigned w, int unsigned j);
      int unsigned i = w * L + j;
      return (i < bits.size()) ? bits[i] : 1'b0;
    endfunction
  endclass

  // Best match count and its place (lowest place on a tie) for a window
  // given as bits win[0..2L-1].
  function automatic void ref_corr(input bit win[], input bit mk[],
                                   output int unsigned best, output int unsigned pos);
    int unsigned L = mk.size();
    best = 0; pos = 0;
    for (int unsigned i = 0; i < L; i++) begin
      int unsigned s = 0;
      for (int unsigned j = 0; j < L; j++) s += (win[i+j] == mk[j]) ? 1 : 0;
      if (s > best) begin best = s; pos = i; end
    end
  endfunction

endpackage
