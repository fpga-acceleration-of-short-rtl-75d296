// tb_sw_pe -- self-checking testbench of one Smith-Waterman processing element.
//
// Drives the PE with random upstream scores, reference bases and column-0
// markers, keeps its own copy of the row state (left H, left E, diagonal H)
// with signed integer arithmetic, and compares the registered H and F outputs
// and the forwarded base and flags every cycle. Includes cycles with the PE
// disabled (outputs must hold) and with no valid input.
module tb_sw_pe;
  import sra_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic    en;
  sw_cfg_t cfg;
  base_t   read_base;
  logic    vld_in, first_in, last_in, vld_out, first_out, last_out;
  base_t   ref_in, ref_out;
  score_t  h_in, f_in, h_out, f_out;

  sw_pe dut (.*);

  int m_hl, m_e, m_hd;            // model row state
  int exp_h, exp_f;
  logic exp_v, exp_first, exp_last;
  base_t exp_ref;

  function automatic int imax(int a, int b);
    return a > b ? a : b;
  endfunction

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int hl, el, hd, e, f, m, h;
    cfg = '{match: 4'd2, mismatch: 4'd3, gap_open: 5'd7, gap_ext: 4'd2};
    read_base = 2'd1;
    en = 1; vld_in = 0; first_in = 0; last_in = 0; ref_in = 0; h_in = 0; f_in = 0;
    m_hl = 0; m_e = 0; m_hd = 0; exp_h = 0; exp_f = 0;
    exp_v = 0; exp_first = 0; exp_last = 0; exp_ref = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 5000; n++) begin
      @(negedge clk);
      if (n % 500 == 0) begin
        read_base = base_t'($urandom_range(3));
        cfg.match = 4'($urandom_range(1, 3));
        cfg.mismatch = 4'($urandom_range(1, 5));
        cfg.gap_open = 5'($urandom_range(3, 12));
        cfg.gap_ext = 4'($urandom_range(1, 3));
      end
      en       = ($urandom_range(9) != 0);
      vld_in   = ($urandom_range(7) != 0);
      first_in = ($urandom_range(19) == 0);
      last_in  = ($urandom_range(19) == 0);
      ref_in   = base_t'($urandom_range(3));
      h_in     = score_t'($urandom_range(60));
      f_in     = score_t'($urandom_range(60));
      // model of the cell computed in this cycle
      hl = first_in ? 0 : m_hl;
      el = first_in ? 0 : m_e;
      hd = first_in ? 0 : m_hd;
      e = imax(imax(hl - int'(cfg.gap_open), el - int'(cfg.gap_ext)), 0);
      f = imax(imax(int'(h_in) - int'(cfg.gap_open), int'(f_in) - int'(cfg.gap_ext)), 0);
      m = (ref_in == read_base) ? hd + int'(cfg.match) : hd - int'(cfg.mismatch);
      h = imax(imax(m, 0), imax(e, f));
      if (en) begin
        exp_v = vld_in; exp_first = vld_in & first_in; exp_last = vld_in & last_in;
        exp_ref = ref_in;
        if (vld_in) begin
          exp_h = h; exp_f = f;
          m_hl = h; m_e = e; m_hd = int'(h_in);
        end
      end
      @(posedge clk); #1;
      checks++;
      if (vld_out !== exp_v || (exp_v && (int'(h_out) != exp_h || int'(f_out) != exp_f)) ||
          first_out !== exp_first || last_out !== exp_last || ref_out !== exp_ref) begin
        failures++;
        if (failures < 10)
          $display("FAIL n=%0d h %0d/%0d f %0d/%0d", n, h_out, exp_h, f_out, exp_f);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
