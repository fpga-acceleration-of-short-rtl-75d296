// tb_sw_unit -- self-checking testbench of one Smith-Waterman unit.
//
// Builds random reference sections and reads (copies of a reference slice with
// substitutions, an insertion or a deletion, reverse complements, and unrelated
// random reads), sends them as jobs and compares every result with a plain
// dynamic-programming model of the local affine-gap alignment written here.
// It also checks the timing: a job for a new read yields its result
// S + READ_LEN + 2 cycles after it is offered to an idle unit (S = section
// length), and further jobs for the loaded read yield one result every S
// cycles. Part of the run applies random back-pressure on the result port.
module tb_sw_unit;
  import sra_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  sw_cfg_t    cfg;
  logic       job_valid, job_ready;
  sw_job_t    job;
  logic       tag_v, tag_strand;
  read_id_t   tag_id;
  logic       res_valid, res_ready;
  sw_result_t res;

  sw_unit dut (.*);

  // ---------------------------------------------------------------- model
  function automatic int imax(int a, int b);
    return a > b ? a : b;
  endfunction

  // Best cell of the final row; first maximum wins.
  function automatic void sw_model(input read_seq_t rd, input logic strand,
                                   input seg_seq_t sg, input int slen,
                                   output int best, output int bcol);
    int H[READ_LEN+1][SEG_BASES+1];
    int E[READ_LEN+1][SEG_BASES+1];
    int F[READ_LEN+1][SEG_BASES+1];
    base_t r[READ_LEN];
    for (int i = 0; i < READ_LEN; i++)
      r[i] = strand ? ~rd[2*(READ_LEN-1-i) +: 2] : rd[2*i +: 2];
    for (int i = 0; i <= READ_LEN; i++)
      for (int j = 0; j <= slen; j++) begin H[i][j] = 0; E[i][j] = -1000; F[i][j] = -1000; end
    for (int i = 1; i <= READ_LEN; i++)
      for (int j = 1; j <= slen; j++) begin
        int s;
        s = (r[i-1] == sg[2*(j-1) +: 2]) ? int'(cfg.match) : -int'(cfg.mismatch);
        E[i][j] = imax(H[i][j-1] - int'(cfg.gap_open), E[i][j-1] - int'(cfg.gap_ext));
        F[i][j] = imax(H[i-1][j] - int'(cfg.gap_open), F[i-1][j] - int'(cfg.gap_ext));
        H[i][j] = imax(imax(0, H[i-1][j-1] + s), imax(E[i][j], F[i][j]));
      end
    best = -1; bcol = 0;
    for (int j = 1; j <= slen; j++)
      if (H[READ_LEN][j] > best) begin best = H[READ_LEN][j]; bcol = j - 1; end
  endfunction

  // ---------------------------------------------------------------- stimulus
  function automatic seg_seq_t rand_seg();
    seg_seq_t s;
    for (int k = 0; k < SEG_BASES; k++) s[2*k +: 2] = base_t'($urandom_range(3));
    return s;
  endfunction

  // A read copied from the section at `ofs`, with `nsub` substitutions and,
  // for kind 1, one inserted base, for kind 2 one deleted base.
  function automatic read_seq_t make_read(seg_seq_t s, int ofs, int nsub, int kind);
    read_seq_t r;
    int src = ofs;
    for (int i = 0; i < READ_LEN; i++) begin
      if (kind == 1 && i == 40) r[2*i +: 2] = base_t'($urandom_range(3));
      else begin
        if (kind == 2 && i == 40) src++;
        r[2*i +: 2] = s[2*(src % SEG_BASES) +: 2];
        src++;
      end
    end
    for (int n = 0; n < nsub; n++) begin
      int p = $urandom_range(READ_LEN-1);
      r[2*p +: 2] = r[2*p +: 2] + 2'd1;
    end
    return r;
  endfunction

  function automatic read_seq_t revcomp(read_seq_t r);
    read_seq_t o;
    for (int i = 0; i < READ_LEN; i++) o[2*i +: 2] = ~r[2*(READ_LEN-1-i) +: 2];
    return o;
  endfunction

  sw_result_t exp_q[$];
  longint     acc_cyc_q[$];
  longint     last_res_cyc;
  int         nres = 0;
  logic       bp_en = 0;

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at cycle %0d", what, cyc);
    end
  endtask

  task automatic send(read_id_t id, logic strand, read_seq_t rd, seg_seq_t sg,
                      logic two, cal_t seg_start);
    sw_job_t j;
    sw_result_t e;
    int best, bcol;
    j.read_id = id; j.strand = strand; j.cal = seg_start + 5; j.read = rd;
    j.seg_start = seg_start; j.two_words = two; j.seg = sg;
    sw_model(rd, strand, sg, two ? SEG_BASES : BASES_PER_WORD, best, bcol);
    e.read_id = id; e.strand = strand; e.cal = j.cal; e.score = score_t'(best);
    e.best_pos = seg_start + cal_t'(bcol);
    exp_q.push_back(e);
    @(negedge clk);
    job_valid = 1; job = j;
    do @(posedge clk); while (!job_ready);
    acc_cyc_q.push_back(cyc);
    @(negedge clk);
    job_valid = 0;
  endtask

  // result monitor
  longint res_cyc_q[$];
  always @(posedge clk) if (rst_n && res_valid && res_ready) begin
    sw_result_t e;
    res_cyc_q.push_back(cyc);
    nres++;
    if (exp_q.size() == 0) check("unexpected result", 0);
    else begin
      e = exp_q.pop_front();
      check("score", res.score == e.score);
      check("best_pos", res.best_pos == e.best_pos);
      check("tag", res.read_id == e.read_id && res.strand == e.strand && res.cal == e.cal);
      if (res.score != e.score || res.best_pos != e.best_pos)
        $display("  got score %0d pos %0d, expected %0d pos %0d", res.score, res.best_pos,
                 e.score, e.best_pos);
    end
  end

  always @(negedge clk) res_ready = bp_en ? ($urandom_range(3) != 0) : 1'b1;

  task automatic wait_idle();
    while (exp_q.size() != 0) @(posedge clk);
    repeat (3) @(posedge clk);
  endtask

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    seg_seq_t  sg [6];
    read_seq_t rd;
    logic strand;
    cfg = '{match: 4'd1, mismatch: 4'd3, gap_open: 5'd7, gap_ext: 4'd2};
    job_valid = 0; job = '0;
    for (int k = 0; k < 6; k++) sg[k] = rand_seg();
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);

    // 1. exact copy, new read: latency S + READ_LEN + 2
    rd = make_read(sg[0], 30, 0, 0);
    send(1, 0, rd, sg[0], 1, 1024);
    wait_idle();
    check("one result", res_cyc_q.size() == 1);
    check("new-read latency", res_cyc_q[0] - acc_cyc_q[0] == SEG_BASES + READ_LEN + 2);
    $display("new-read latency %0d cycles", res_cyc_q[0] - acc_cyc_q[0]);

    // 2. same read, three more sections back to back: one result per S cycles
    res_cyc_q.delete(); acc_cyc_q.delete();
    send(1, 0, rd, sg[1], 1, 2048);
    send(1, 0, rd, sg[2], 1, 4096);
    send(1, 0, rd, sg[3], 1, 8192);
    wait_idle();
    check("three results", res_cyc_q.size() == 3);
    check("back-to-back interval 1", res_cyc_q[1] - res_cyc_q[0] == SEG_BASES);
    check("back-to-back interval 2", res_cyc_q[2] - res_cyc_q[1] == SEG_BASES);

    // 3. reverse strand: reverse complement of a reference slice, one word
    res_cyc_q.delete(); acc_cyc_q.delete();
    rd = revcomp(make_read(sg[4], 10, 0, 0));
    send(2, 1, rd, sg[4], 0, 128);
    wait_idle();
    check("reverse strand perfect score", exp_q.size() == 0 && res_cyc_q.size() == 1);
    check("one-word latency", res_cyc_q[0] - acc_cyc_q[0] == BASES_PER_WORD + READ_LEN + 2);

    // 4. mutated and random reads, mixed reads, with back-pressure
    bp_en = 1;
    for (int n = 0; n < 24; n++) begin
      int k, kind;
      k = $urandom_range(5);
      kind = $urandom_range(3);
      // odd jobs reuse the previous read (same id and strand), even jobs bring a new one
      if (n % 2 == 0) begin
        rd = (kind == 3) ? make_read(rand_seg(), 0, 0, 0)
                         : make_read(sg[k], $urandom_range(150), $urandom_range(4), kind);
        strand = logic'($urandom_range(1));
      end
      send(read_id_t'(10 + n / 2), strand, rd, sg[k], logic'($urandom_range(1)),
           cal_t'(100000 + n * 256));
    end
    wait_idle();
    bp_en = 0;
    check("all results returned", nres == 1 + 3 + 1 + 24);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // a reference-slice copy must score exactly READ_LEN * match
  always @(posedge clk) if (rst_n && res_valid && res_ready && (res.cal == 1029 || res.cal == 133))
    check("perfect score value", res.score == score_t'(READ_LEN));

endmodule
