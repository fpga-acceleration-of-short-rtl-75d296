// tb_sw_slot -- self-checking testbench of a Smith-Waterman unit behind its
// clock-domain crossing.
//
// The lookup clock and the array clock run at unrelated periods (4 ns and
// 7 ns). Jobs are written on the lookup side, some for the read already held
// and some for new reads, with random gaps; results are taken with random
// back-pressure. Checks every result (score, position, tag) against the
// software model, in order; that none is lost; that the held-read tag follows
// the last written job; and that job_ready falls when the job FIFO fills.
module tb_sw_slot;
  import sra_pkg::*;
  import sw_model_pkg::*;

  logic clk = 0, rst_n = 0, sw_clk = 0, sw_rst_n = 0;
  always #2 clk = ~clk;
  always #3.5 sw_clk = ~sw_clk;
  int checks = 0, failures = 0;

  sw_cfg_t    cfg;
  logic       job_valid, job_ready, tag_v, tag_strand, res_valid, res_ready;
  sw_job_t    job;
  read_id_t   tag_id;
  sw_result_t res;

  sw_slot dut (.*);

  sw_result_t exp_q[$];
  int nres = 0, n_full = 0;

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  always @(negedge clk) res_ready = ($urandom_range(3) != 0);

  always @(posedge clk) if (rst_n) begin
    if (!job_ready) n_full++;
    if (res_valid && res_ready) begin
      sw_result_t e;
      nres++;
      if (exp_q.size() == 0) check("unexpected result", 0);
      else begin
        e = exp_q.pop_front();
        check("result", res == e);
      end
    end
  end

  initial begin : watchdog
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    sw_job_t j;
    cfg = '{match: 4'd1, mismatch: 4'd3, gap_open: 5'd7, gap_ext: 4'd2};
    job_valid = 0; job = '0; j = '0;
    repeat (3) @(posedge sw_clk);
    rst_n = 1; sw_rst_n = 1;
    for (int n = 0; n < 30; n++) begin
      sw_result_t e;
      int best, bcol;
      if (n % 3 == 0) begin
        j.read_id = read_id_t'(n); j.strand = logic'($urandom_range(1));
        for (int k = 0; k < SEG_BASES; k++) j.seg[2*k +: 2] = base_t'($urandom_range(3));
        for (int k = 0; k < READ_LEN; k++) j.read[2*k +: 2] = j.seg[2*(k + 20) +: 2];
      end
      for (int k = 0; k < 16; k++) j.seg[2*$urandom_range(SEG_BASES-1) +: 2] = base_t'($urandom_range(3));
      j.two_words = logic'($urandom_range(1));
      j.seg_start = cal_t'(n * 256); j.cal = j.seg_start + 20;
      sw_model(cfg, j.read, j.strand, j.seg, j.two_words ? SEG_BASES : BASES_PER_WORD, best, bcol);
      e.read_id = j.read_id; e.strand = j.strand; e.cal = j.cal; e.score = score_t'(best);
      e.best_pos = j.seg_start + cal_t'(bcol);
      exp_q.push_back(e);
      @(negedge clk);
      job_valid = 1; job = j;
      do @(posedge clk); while (!job_ready);
      @(negedge clk);
      job_valid = 0;
      check("tag follows last written job", tag_v && tag_id == j.read_id && tag_strand == j.strand);
      repeat ($urandom_range(0, 3)) @(negedge clk);
    end
    while (exp_q.size() != 0) @(posedge clk);
    repeat (10) @(posedge clk);
    check("all results", nres == 30);
    check("job FIFO filled at least once", n_full > 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
