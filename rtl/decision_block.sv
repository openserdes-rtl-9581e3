// decision_block: picks the sampling point and outputs the recovered bit.
//
// The block sees the last three oversampled words as one stream of 3*OSR
// samples in time order (stream[0] is the oldest sample, stream[3*OSR-1] the
// newest) and keeps a pointer c into it: the sample taken as the middle of a
// bit, i.e. the optimal sampling point. Because the stream advances by one
// word per bit clock, a constant c samples every bit at the same phase.
//
// Acquisition. After reset the pointer is simply set to OSR/2 samples after
// each observed boundary, in the middle word of the stream, until ACQ
// transitions have been seen; then the block is locked (valid_o) and tracks.
//
// Tracking. The boundary detector reports the first transition in the
// newest word. The block remembers the boundary position bnd (0..OSR-1).
// When a transition is seen at another position, the pointer moves by the
// signed distance between the two positions (the shorter way round), so the
// sampling point stays OSR/2 samples after the boundary. If c leaves the
// window [OSR/2, 5*OSR/2) it is moved back by one word (a bit slip, which
// only a sustained frequency offset can cause); slip_o reports it.
// A jump of the boundary by exactly OSR/2 samples is ambiguous and is taken
// as a move backwards; the line's phase must therefore change by less than
// half a bit between two observed transitions, as it does for jitter and
// drift.
//
// Scan bits, which tune the correction of glitches and jitter:
//   glitch_scan[0]  output the majority of samples c-1, c, c+1 instead of c,
//                   so a glitch that flips one sample is voted out;
//   glitch_scan[1]  ignore, for tracking, any bit period with more than one
//                   transition (a glitch, since a bit lasts OSR samples);
//   jitter_scan     a new boundary position must be seen on jitter_scan
//                   transitions in a row before the pointer moves (0 or 1:
//                   at once), so edge jitter of a sample does not move it.
// That the decision block takes the samples, the boundary information and
// glitch and jitter scan inputs follows the link description; the pointer
// scheme, the acquisition phase, the majority vote and the run-length jitter
// filter are this design's choices.
// Interface: one bit per bit clock. valid_o rises one bit clock after the
// ACQ-th transition is seen (lock). Status pulses last one bit clock.
`timescale 1ps/1ps
module decision_block #(
  parameter int unsigned OSR = serdes_pkg::OSR,
  parameter int unsigned JW  = serdes_pkg::JW,
  parameter int unsigned ACQ = 16
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic [2:0][OSR-1:0]          words_i,      // [0] newest
  input  logic [$clog2(OSR)-1:0]       first_i,
  input  logic [$clog2(OSR):0]         count_i,
  input  logic                         any_i,
  input  logic [1:0]                   glitch_scan,
  input  logic [JW-1:0]                jitter_scan,
  output logic                         bit_o,
  output logic                         valid_o,
  output logic [$clog2(3*OSR)-1:0]     sel_o,
  output logic                         phase_step_o,
  output logic                         jitter_hold_o,
  output logic                         glitch_o,
  output logic                         vote_fix_o,
  output logic                         slip_o
);
  localparam int unsigned LW = $clog2(OSR);
  localparam int unsigned CW = $clog2(3*OSR);
  localparam int          HALF = OSR / 2;

  logic [3*OSR-1:0] stream;
  logic             locked;
  logic [LW-1:0]    bnd, cand;
  logic [JW-1:0]    cand_cnt;
  logic [CW-1:0]    c;
  logic [$clog2(ACQ+1)-1:0] acq_cnt;

  logic             glitch, use_obs;
  logic [LW-1:0]    diff;
  int               delta, c_move;
  logic [JW-1:0]    cnt_next;
  logic             s_lo, s_mid, s_hi, maj;

  assign stream = {words_i[0], words_i[1], words_i[2]};
  assign sel_o  = c;

  always_comb begin
    glitch   = (count_i > 1);
    use_obs  = any_i && !(glitch && glitch_scan[1]);
    diff     = first_i - bnd;
    delta    = (int'(diff) >= HALF) ? int'(diff) - int'(OSR) : int'(diff);
    cnt_next = (first_i == cand) ? cand_cnt + 1'b1 : JW'(1);
    c_move   = int'(c) + delta;
    if (c_move < HALF)                   c_move = c_move + int'(OSR);
    else if (c_move >= 2*int'(OSR)+HALF) c_move = c_move - int'(OSR);
    s_lo  = stream[c - 1'b1];
    s_mid = stream[c];
    s_hi  = stream[c + 1'b1];
    maj   = (s_lo & s_mid) | (s_lo & s_hi) | (s_mid & s_hi);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      locked        <= 1'b0;
      bnd           <= '0;
      cand          <= '0;
      cand_cnt      <= '0;
      c             <= CW'(OSR);
      acq_cnt       <= '0;
      bit_o         <= 1'b0;
      valid_o       <= 1'b0;
      phase_step_o  <= 1'b0;
      jitter_hold_o <= 1'b0;
      glitch_o      <= 1'b0;
      vote_fix_o    <= 1'b0;
      slip_o        <= 1'b0;
    end else begin
      phase_step_o  <= 1'b0;
      jitter_hold_o <= 1'b0;
      slip_o        <= 1'b0;
      glitch_o      <= glitch;
      bit_o         <= glitch_scan[0] ? maj : s_mid;
      vote_fix_o    <= locked && glitch_scan[0] && (maj != s_mid);
      valid_o       <= locked;
      if (!locked) begin
        if (use_obs) begin
          acq_cnt  <= acq_cnt + 1'b1;
          locked   <= (acq_cnt == ($clog2(ACQ+1))'(ACQ-1));
          bnd      <= first_i;
          cand     <= first_i;
          cand_cnt <= '0;
          c        <= CW'(OSR + ((int'(first_i) + HALF) % OSR));
        end
      end else if (use_obs) begin
        if (first_i == bnd) begin
          cand_cnt <= '0;
        end else begin
          cand <= first_i;
          if (cnt_next >= jitter_scan) begin
            bnd          <= first_i;
            cand_cnt     <= '0;
            c            <= CW'(c_move);
            phase_step_o <= 1'b1;
            slip_o       <= (int'(c) + delta != c_move);
          end else begin
            cand_cnt      <= cnt_next;
            jitter_hold_o <= 1'b1;
          end
        end
      end
    end
  end
endmodule
