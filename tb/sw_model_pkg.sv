// sw_model_pkg -- reference model of the read-versus-section scoring, for
// testbenches. A plain full-table dynamic program of local alignment with
// affine gaps (gap of length k costs open + (k-1)*ext), returning the largest
// cell of the last read row and its column (first maximum wins). For a
// reverse-strand CAL the read's reverse complement is scored.
package sw_model_pkg;
  import sra_pkg::*;

  function automatic int imax(int a, int b);
    return a > b ? a : b;
  endfunction

  function automatic void sw_model(input sw_cfg_t cfg, input read_seq_t rd,
                                   input logic strand, input seg_seq_t sg, input int slen,
                                   output int best, output int bcol);
    int Hp[SEG_BASES+1], Hc[SEG_BASES+1], Fp[SEG_BASES+1], Fc[SEG_BASES+1];
    int e;
    base_t r;
    for (int j = 0; j <= slen; j++) begin Hp[j] = 0; Fp[j] = -1000; end
    for (int i = 1; i <= READ_LEN; i++) begin
      r = strand ? ~rd[2*(READ_LEN-i) +: 2] : rd[2*(i-1) +: 2];
      Hc[0] = 0; Fc[0] = -1000; e = -1000;
      for (int j = 1; j <= slen; j++) begin
        int s;
        s = (r == sg[2*(j-1) +: 2]) ? int'(cfg.match) : -int'(cfg.mismatch);
        e = imax(Hc[j-1] - int'(cfg.gap_open), e - int'(cfg.gap_ext));
        Fc[j] = imax(Hp[j] - int'(cfg.gap_open), Fp[j] - int'(cfg.gap_ext));
        Hc[j] = imax(imax(0, Hp[j-1] + s), imax(e, Fc[j]));
      end
      for (int j = 0; j <= slen; j++) begin Hp[j] = Hc[j]; Fp[j] = Fc[j]; end
    end
    best = -1; bcol = 0;
    for (int j = 1; j <= slen; j++)
      if (Hp[j] > best) begin best = Hp[j]; bcol = j - 1; end
  endfunction

endpackage
