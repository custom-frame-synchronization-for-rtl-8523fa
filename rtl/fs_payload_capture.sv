// fs_payload_capture -- control unit that finds and captures the payload.
//
// Works on the correlation results (sum_i = sum_m, pos_i = m) and on the
// window of the same clock (win_i, from the delay buffer).
//
// Detection. While idle, a sum_m above threshold_i starts a frame: the marker
// is taken to start at window bit m, so the payload, which follows the k-bit
// guard a_k after the marker, starts at window bit L+K+m. On the very next
// clock sum_m is compared once more with the value that started the frame;
// if the new one is not smaller the marker is taken to be at the new m and
// the capture starts over. (A partly arrived marker can exceed the threshold
// one clock before the whole marker is in view.)
//
// Capture. Let q = K+m. If q < L the payload starts inside the left half of
// the window (bit L+q) and capture begins at once with cut = q; otherwise it
// starts in the next input word, at left-half bit q-L, and capture begins one
// clock later with cut = q-L. A payload of n words of L bits (n_words_i) is
// then delivered in n+1 beats, all taken from the left half of the window:
//   HEAD  bits L-1..cut  (the first L-cut payload bits)
//   BODY  all L bits, n-1 times
//   TAIL  bits cut-1..0  (the last cut payload bits; none if cut = 0)
// so payload bits leave at the rate they arrive and the circuit does not grow
// with the frame length. Correlation results are ignored during a capture.
//
// Interface and timing: payload_o, valid_o and cut_o are registered, one
// clock after the window they were cut from. Bits of payload_o that are not
// payload are zero. valid_o uses fs_pkg::beat_e; a HEAD while a frame is
// open means the frame restarts. n_words_i is sampled when HEAD is sent (0 is
// taken as 1). With power_save_i set, corr_en_o turns the correlators off
// during a capture, and back on LAT clocks before its last beat so that a
// frame that follows at once is still seen.
//
// What follows the paper: the threshold test, the one-clock re-check, the
// payload position L+K+m, the one-clock wait when it lies outside the
// register, the n+1-beat capture and a 2-bit valid. This design's choices:
// "above" the threshold is read as strictly greater, the re-check restarts on
// a new sum that is greater or equal, the beat coding of valid_o, the cut_o
// output that tells a receiver where a HEAD or TAIL beat splits, zeroing of
// the non-payload bits, and the timing of corr_en_o. The right half of win_i
// is not needed (lint reports it as unused); the port carries the whole
// window as the delay buffer delivers it.
module fs_payload_capture
  import fs_pkg::*;
#(
  parameter int unsigned L   = 123,
  parameter int unsigned K   = 23,
  parameter int unsigned NW  = 16,
  parameter int unsigned SW  = fs_pkg::count_width(L),
  parameter int unsigned PW  = fs_pkg::pos_width(L),
  parameter int unsigned LAT = fs_pkg::corr_latency(L)
) (
  input  logic           clk_i,
  input  logic           rst_ni,
  input  logic [SW-1:0]  sum_i,
  input  logic [PW-1:0]  pos_i,
  input  logic [2*L-1:0] win_i,
  input  logic [SW-1:0]  threshold_i,
  input  logic [NW-1:0]  n_words_i,
  input  logic           power_save_i,
  output logic [L-1:0]   payload_o,
  output beat_e          valid_o,
  output logic [PW-1:0]  cut_o,
  output logic           corr_en_o
);

  typedef enum logic [1:0] {
    S_IDLE = 2'd0,   // watching sum_m
    S_WAIT = 2'd1,   // payload start not yet in the register
    S_CAPT = 2'd2    // sending BODY beats, then TAIL
  } state_e;

  state_e        state_q, state_d;
  logic          chk_q, chk_d;         // this clock is the re-check clock
  logic [SW-1:0] saved_q, saved_d;     // sum_m that started the frame
  logic [PW-1:0] cut_q, cut_d;         // split point inside the left half
  logic [NW-1:0] cnt_q, cnt_d;         // BODY beats still to send

  beat_e         beat;
  logic [PW-1:0] beat_cut;
  logic [L-1:0]  mask;
  logic [NW-1:0] n_body;
  logic          start;
  int unsigned   q;

  assign n_body = (n_words_i == '0) ? '0 : n_words_i - 1'b1;

  always_comb begin
    state_d  = state_q;
    chk_d    = 1'b0;
    saved_d  = saved_q;
    cut_d    = cut_q;
    cnt_d    = cnt_q;
    beat     = BEAT_IDLE;
    beat_cut = cut_q;
    start    = 1'b0;
    q        = K + 32'(pos_i);

    if (state_q == S_IDLE && sum_i > threshold_i) begin
      start   = 1'b1;
      chk_d   = 1'b1;
      saved_d = sum_i;
    end else if (chk_q && sum_i >= saved_q) begin
      start   = 1'b1;
    end

    if (start) begin
      if (q < L) begin
        beat     = BEAT_HEAD;
        beat_cut = PW'(q);
        cut_d    = PW'(q);
        cnt_d    = n_body;
        state_d  = S_CAPT;
      end else begin
        cut_d    = PW'(q - L);
        state_d  = S_WAIT;
      end
    end else begin
      unique case (state_q)
        S_WAIT: begin
          beat    = BEAT_HEAD;
          cnt_d   = n_body;
          state_d = S_CAPT;
        end
        S_CAPT: begin
          if (cnt_q != '0) begin
            beat  = BEAT_BODY;
            cnt_d = cnt_q - 1'b1;
          end else begin
            beat    = BEAT_TAIL;
            state_d = S_IDLE;
          end
        end
        default: ;
      endcase
    end
  end

  // Which left-half bits are payload in this beat.
  always_comb begin
    unique case (beat)
      BEAT_HEAD: mask = {L{1'b1}} << beat_cut;
      BEAT_BODY: mask = {L{1'b1}};
      BEAT_TAIL: mask = ~({L{1'b1}} << beat_cut);
      default:   mask = '0;
    endcase
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q   <= S_IDLE;
      chk_q     <= 1'b0;
      saved_q   <= '0;
      cut_q     <= '0;
      cnt_q     <= '0;
      payload_o <= '0;
      valid_o   <= BEAT_IDLE;
      cut_o     <= '0;
    end else begin
      state_q   <= state_d;
      chk_q     <= chk_d;
      saved_q   <= saved_d;
      cut_q     <= cut_d;
      cnt_q     <= cnt_d;
      payload_o <= win_i[2*L-1:L] & mask;
      valid_o   <= beat;
      cut_o     <= beat_cut;
      // Beat order: BODY and TAIL only follow HEAD or BODY.
      if (beat == BEAT_BODY || beat == BEAT_TAIL)
        a_beat_order: assert (valid_o == BEAT_HEAD || valid_o == BEAT_BODY)
          else $error("payload beat without an open frame");
    end
  end

  assign corr_en_o = !(power_save_i && state_q == S_CAPT && cnt_q >= NW'(LAT));

endmodule
