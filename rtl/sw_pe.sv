// sw_pe -- one processing element of the Smith-Waterman systolic array.
//
// The PE holds one base of the short read (row i of the dynamic programming
// table). Reference bases stream in from the previous PE, one per cycle, so PE
// i computes cell (i, j) one cycle after PE i-1 computed cell (i-1, j): the
// computation wavefront moves along the anti-diagonal, left to right.
// Local alignment with the affine gap model:
//   E(i,j) = max(H(i,j-1) - open, E(i,j-1) - ext)       gap along the reference
//   F(i,j) = max(H(i-1,j) - open, F(i-1,j) - ext)       gap along the read
//   H(i,j) = max(0, H(i-1,j-1) + s(read_i, ref_j), E(i,j), F(i,j))
// E and F are held saturated at zero; since H is never below zero a negative E
// or F can never win, so the scores are exact.
//
// Interface: the upstream H and F and the reference base with its flags
// arrive from the previous PE's output registers (the first PE gets H = F = 0).
// `first` marks column 0 of a new alignment and clears this PE's row state;
// `last` marks the final column and only travels along. All outputs are
// registered: one cycle per PE. `en` freezes the PE (array-wide stall).
//
// Follows the paper: one read base per processor, reference streamed through,
// cell from its up, left and up-left neighbours, affine gaps. Own choices: the
// gap cost convention (open includes the first gap base) and zero saturation.
module sw_pe
  import sra_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  logic    en,
  input  sw_cfg_t cfg,
  input  base_t   read_base,
  // from the previous PE
  input  logic    vld_in,
  input  logic    first_in,
  input  logic    last_in,
  input  base_t   ref_in,
  input  score_t  h_in,
  input  score_t  f_in,
  // to the next PE
  output logic    vld_out,
  output logic    first_out,
  output logic    last_out,
  output base_t   ref_out,
  output score_t  h_out,
  output score_t  f_out
);

  score_t h_left_q, e_q, h_diag_q;
  score_t h_left, e_left, h_diag;
  score_t e_new, f_new, m_new, h_new;

  function automatic score_t sub_sat(score_t a, score_t b);
    return (a > b) ? score_t'(a - b) : '0;
  endfunction

  function automatic score_t max2(score_t a, score_t b);
    return (a > b) ? a : b;
  endfunction

  always_comb begin
    h_left = first_in ? '0 : h_left_q;
    e_left = first_in ? '0 : e_q;
    h_diag = first_in ? '0 : h_diag_q;
    e_new  = max2(sub_sat(h_left, score_t'(cfg.gap_open)), sub_sat(e_left, score_t'(cfg.gap_ext)));
    f_new  = max2(sub_sat(h_in, score_t'(cfg.gap_open)), sub_sat(f_in, score_t'(cfg.gap_ext)));
    if (ref_in == read_base) m_new = h_diag + score_t'(cfg.match);
    else                     m_new = sub_sat(h_diag, score_t'(cfg.mismatch));
    h_new = max2(m_new, max2(e_new, f_new));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vld_out   <= 1'b0;
      first_out <= 1'b0;
      last_out  <= 1'b0;
      ref_out   <= '0;
      h_out     <= '0;
      f_out     <= '0;
      h_left_q  <= '0;
      e_q       <= '0;
      h_diag_q  <= '0;
    end else if (en) begin
      vld_out   <= vld_in;
      first_out <= vld_in & first_in;
      last_out  <= vld_in & last_in;
      ref_out   <= ref_in;
      if (vld_in) begin
        h_out    <= h_new;
        f_out    <= f_new;
        h_left_q <= h_new;
        e_q      <= e_new;
        h_diag_q <= h_in;
      end
    end
  end

endmodule
