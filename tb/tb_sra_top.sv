// tb_sra_top -- end-to-end testbench of the aligner at its default size
// (six Smith-Waterman units of READ_LEN PEs, four DRAM jobs in flight), with
// the lookup logic at 250 MHz and the arrays at 125 MHz.
//
// A DRAM model holds a random reference of 256 words (32768 bases). Reads are
// cut from it, some as reverse complements, with substitutions and indels,
// plus unrelated random reads. Each read is sent on the host stream followed
// by its true CAL and a few decoy CALs; a malformed word is sent once. Every
// result word that comes back is checked against a software dynamic program
// over the same reference section. Phase 2 sends one read with many CALs and
// checks the sustained rate, in array-clock cycles, against the paper's
// per-unit figure of at most 256 + lead-in cycles per reference section. Counts each mechanism of the
// design and fails if one never occurred: one- and two-word sections, reverse
// strand, reuse of a loaded read, DRAM reads in flight, DRAM stalls, result
// back-pressure, all six units working in parallel, and the protocol-error flag.
module tb_sra_top;
  import sra_pkg::*;
  import sw_model_pkg::*;

  localparam int unsigned AW = 8;

  logic clk = 0, rst_n = 0, sw_clk = 0, sw_rst_n = 0;
  always #2 clk = ~clk;       // lookup clock, 250 MHz
  always #4 sw_clk = ~sw_clk; // array clock, 125 MHz
  longint swcyc = 0;
  always @(posedge sw_clk) swcyc <= swcyc + 1;
  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  sw_cfg_t    cfg;
  logic       host_in_valid, host_in_ready, host_out_valid, host_out_ready;
  host_word_t host_in_data, host_out_data;
  logic       mem_req_valid, mem_req_ready, mem_rsp_valid;
  dram_addr_t mem_req_addr;
  dram_word_t mem_rsp_data;
  logic       proto_err, ev_two_words, ev_reuse;

  sra_top dut (.*);

  dram_model #(.AW(AW), .LATENCY(30)) u_dram (
    .clk, .rst_n, .req_valid(mem_req_valid), .req_ready(mem_req_ready),
    .req_addr(mem_req_addr), .rsp_valid(mem_rsp_valid), .rsp_data(mem_rsp_data));

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at cycle %0d", what, cyc); end
  endtask

  // ------------------------------------------------------------ reference
  function automatic base_t ref_base(int unsigned p);
    return u_dram.mem[(p / BASES_PER_WORD) % (2**AW)][2*(p % BASES_PER_WORD) +: 2];
  endfunction

  function automatic seg_seq_t section(cal_t cal, output logic two);
    int unsigned w0 = cal / BASES_PER_WORD;
    two = (cal % BASES_PER_WORD) + READ_LEN > BASES_PER_WORD;
    section = '0;
    section[WORD_BITS-1:0] = u_dram.mem[w0 % (2**AW)];
    if (two) section[2*WORD_BITS-1:WORD_BITS] = u_dram.mem[(w0 + 1) % (2**AW)];
  endfunction

  // expected results keyed by {read id, strand, CAL}
  typedef logic [READ_ID_W+1+CAL_W-1:0] key_t;
  int  exp_score [key_t];
  int  exp_pos   [key_t];
  int  n_expected = 0, n_got = 0;
  int  n_one = 0, n_two = 0, n_rev = 0, n_reuse = 0, n_dram_stall = 0, n_bp = 0;
  int  n_err = 0, inflight = 0, max_inflight = 0;
  logic bp_en = 1;

  host_word_t stream[$];

  task automatic add_read(read_id_t id, read_seq_t rd, cal_t cals[$], logic strands[$]);
    host_word_t w;
    logic [READ_WORDS*HOST_W-1:0] flat;
    w = '0; w[HOST_W-1 -: 2] = HK_READ; w[31:0] = id; stream.push_back(w);
    flat = '0; flat[2*READ_LEN-1:0] = rd;
    for (int k = 0; k < READ_WORDS; k++) stream.push_back(flat[k*HOST_W +: HOST_W]);
    foreach (cals[c]) begin
      logic two;
      seg_seq_t sg;
      int best, bcol;
      key_t key;
      sg = section(cals[c], two);
      sw_model(cfg, rd, strands[c], sg, two ? SEG_BASES : BASES_PER_WORD, best, bcol);
      key = {id, strands[c], cals[c]};
      exp_score[key] = best;
      exp_pos[key]   = int'((cals[c] & ~32'(BASES_PER_WORD - 1)) + 32'(bcol));
      n_expected++;
      if (two) n_two++; else n_one++;
      if (strands[c]) n_rev++;
      w = '0; w[HOST_W-1 -: 2] = HK_CAL; w[32] = strands[c]; w[31:0] = cals[c];
      stream.push_back(w);
    end
  endtask

  // ------------------------------------------------------------ monitors
  always @(negedge clk) host_out_ready = bp_en ? ($urandom_range(4) != 0) : 1'b1;

  always @(posedge clk) if (rst_n) begin
    if (proto_err) n_err++;
    if (ev_reuse) n_reuse++;
    if (mem_req_valid && !mem_req_ready) n_dram_stall++;
    if (host_out_valid && !host_out_ready) n_bp++;
    inflight = inflight + ((mem_req_valid && mem_req_ready) ? 1 : 0) - (mem_rsp_valid ? 1 : 0);
    if (inflight > max_inflight) max_inflight = inflight;
    if (host_out_valid && host_out_ready) begin
      key_t key;
      key = {host_out_data[31:0], host_out_data[108], host_out_data[63:32]};
      n_got++;
      if (!exp_score.exists(key)) check("result for a CAL that was sent", 0);
      else begin
        check("score", int'(host_out_data[96 +: SCORE_W]) == exp_score[key]);
        check("best position", int'(host_out_data[95:64]) == exp_pos[key]);
        exp_score.delete(key);
      end
    end
  end

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send_stream();
    while (stream.size() != 0) begin
      @(negedge clk);
      host_in_valid = ($urandom_range(7) != 0);
      host_in_data  = stream[0];
      @(posedge clk);
      if (host_in_valid && host_in_ready) void'(stream.pop_front());
    end
    @(negedge clk); host_in_valid = 0;
  endtask

  task automatic drain();
    while (n_got < n_expected) @(posedge clk);
    repeat (10) @(posedge clk);
  endtask

  function automatic read_seq_t cut_read(int unsigned pos, logic rev, int nsub, int indel);
    read_seq_t r;
    int unsigned src = pos;
    for (int i = 0; i < READ_LEN; i++) begin
      if (indel == 1 && i == 50) src++;                 // deletion from the read
      r[2*i +: 2] = ref_base(src);
      if (!(indel == 2 && i == 50)) src++;             // insertion into the read
    end
    for (int n = 0; n < nsub; n++) begin
      int p = $urandom_range(READ_LEN - 1);
      r[2*p +: 2] = r[2*p +: 2] ^ 2'd1;
    end
    if (rev) begin
      read_seq_t o;
      for (int i = 0; i < READ_LEN; i++) o[2*i +: 2] = ~r[2*(READ_LEN-1-i) +: 2];
      r = o;
    end
    return r;
  endfunction

  initial begin
    read_seq_t rd;
    cal_t cals[$];
    logic strands[$];
    longint t0, t1;
    int ncal2;
    cfg = '{match: 4'd1, mismatch: 4'd3, gap_open: 5'd7, gap_ext: 4'd2};
    host_in_valid = 0; host_in_data = '0;
    for (int i = 0; i < 2**AW; i++)
      for (int k = 0; k < 8; k++) u_dram.mem[i][32*k +: 32] = $urandom;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge sw_clk);
    sw_rst_n = 1;

    // ---- phase 1: mixed reads, correctness
    for (int r = 0; r < 30; r++) begin
      int unsigned pos;
      logic rev;
      pos = $urandom_range(2**AW * BASES_PER_WORD - 400);
      if (r % 3 == 0) pos = pos - pos % BASES_PER_WORD + $urandom_range(20);  // one-word CAL
      rev = (r % 2 == 1);
      rd = (r % 10 == 9) ? cut_read($urandom_range(20000), 0, 40, 0)
                         : cut_read(pos, rev, $urandom_range(3), $urandom_range(2));
      cals.delete(); strands.delete();
      cals.push_back(cal_t'(pos)); strands.push_back(rev);
      for (int d = 0; d < $urandom_range(0, 3); d++) begin
        cals.push_back(cal_t'($urandom_range(2**AW * BASES_PER_WORD - 1)));
        strands.push_back(logic'($urandom_range(1)));
      end
      add_read(read_id_t'(r), rd, cals, strands);
      if (r == 10) stream.push_back({2'b11, 126'd0});   // malformed word
    end
    send_stream();
    drain();

    // ---- phase 2: one read, many CALs, full rate
    bp_en = 0;
    ncal2 = 120;
    rd = cut_read(5000, 0, 2, 0);
    cals.delete(); strands.delete();
    for (int c = 0; c < ncal2; c++) begin
      cals.push_back(cal_t'(c * BASES_PER_WORD + 60));   // two-word sections
      strands.push_back(1'b0);
    end
    add_read(read_id_t'(1000), rd, cals, strands);
    t0 = swcyc;
    send_stream();
    drain();
    t1 = swcyc;
    $display("phase 2: %0d CALs in %0d array cycles, %0d array cycles per CAL per unit", ncal2, t1 - t0,
             (t1 - t0) * 6 / ncal2);
    check("sustained rate within 256 + READ_LEN cycles per section per unit",
          (t1 - t0) * 6 <= ncal2 * (SEG_BASES + READ_LEN));

    check("every result returned", n_got == n_expected && exp_score.size() == 0);
    $display("results %0d: one-word %0d two-word %0d reverse %0d reuse %0d", n_got, n_one,
             n_two, n_rev, n_reuse);
    $display("DRAM stalls %0d, max DRAM reads in flight %0d, host back-pressure %0d, protocol errors %0d",
             n_dram_stall, max_inflight, n_bp, n_err);
    check("one-word sections occurred", n_one > 0);
    check("two-word sections occurred", n_two > 0);
    check("reverse-strand CALs occurred", n_rev > 0);
    check("reuse of a loaded read occurred", n_reuse > 0);
    check("DRAM stalls occurred", n_dram_stall > 0);
    check("several DRAM reads in flight", max_inflight >= 2);
    check("result back-pressure occurred", n_bp > 0);
    // one unit alone would need ncal2 * SEG_BASES cycles
    check("six units working in parallel", (t1 - t0) * 5 < ncal2 * SEG_BASES);
    check("protocol error flagged once", n_err == 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
