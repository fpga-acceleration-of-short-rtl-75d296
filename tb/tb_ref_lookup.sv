// tb_ref_lookup -- self-checking testbench of the reference lookup.
//
// A DRAM model filled with random reference words answers the lookup's reads
// after a fixed latency and stalls its request port at random. Jobs come with
// random CALs (so both one-word and two-word sections occur) and read ids that
// repeat for a few CALs in a row. Six modelled S-W units take jobs at random
// and remember the read of the last job they took, as the real units do.
// Checks, for every dispatched job: the section words, section start, one- or
// two-word choice and the pass-through fields; that sw_valid is one-hot and
// goes to a ready unit; that a ready unit holding the same read is preferred;
// and that several DRAM reads were in flight at once.
module tb_ref_lookup;
  import sra_pkg::*;

  localparam int unsigned NUM_SW = 6;
  localparam int unsigned AW = 8;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic       in_valid, in_ready;
  cal_job_t   in_job;
  logic       mem_req_valid, mem_req_ready, mem_rsp_valid;
  dram_addr_t mem_req_addr;
  dram_word_t mem_rsp_data;
  logic [NUM_SW-1:0] sw_valid, sw_ready, tag_v, tag_strand;
  sw_job_t    sw_job;
  read_id_t   tag_id [NUM_SW];
  logic       ev_two_words, ev_reuse;

  ref_lookup #(.NUM_SW(NUM_SW), .OUTSTANDING(4)) dut (.*);

  dram_model #(.AW(AW), .LATENCY(24)) u_dram (
    .clk, .rst_n, .req_valid(mem_req_valid), .req_ready(mem_req_ready),
    .req_addr(mem_req_addr), .rsp_valid(mem_rsp_valid), .rsp_data(mem_rsp_data));

  cal_job_t exp_q[$];
  int n_two = 0, n_one = 0, n_reuse = 0, n_pref_opportunity = 0, ndisp = 0;
  int max_inflight = 0, inflight = 0;

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (job %0d)", what, ndisp); end
  endtask

  always @(negedge clk) sw_ready = NUM_SW'($urandom);

  // DRAM reads in flight
  always @(posedge clk) if (rst_n) begin
    inflight = inflight + ((mem_req_valid && mem_req_ready) ? 1 : 0) - (mem_rsp_valid ? 1 : 0);
    if (inflight > max_inflight) max_inflight = inflight;
  end

  always @(posedge clk) if (rst_n) begin
    check("one-hot", $onehot0(sw_valid));
    check("to a ready unit", (sw_valid & ~sw_ready) == '0);
    if (sw_valid != '0) begin
      cal_job_t e;
      logic two;
      int unsigned w0;
      logic [NUM_SW-1:0] holders;
      ndisp++;
      holders = '0;
      for (int i = 0; i < NUM_SW; i++)
        holders[i] = sw_ready[i] && tag_v[i] && tag_id[i] == sw_job.read_id &&
                     tag_strand[i] == sw_job.strand;
      if (holders != '0) begin
        n_pref_opportunity++;
        check("prefers a unit holding the read", (sw_valid & holders) != '0);
      end
      if ((sw_valid & holders) != '0) n_reuse++;
      e = exp_q.pop_front();
      two = (e.cal % 128) + READ_LEN > 128;
      w0 = e.cal / 128;
      if (two) n_two++; else n_one++;
      check("pass-through", sw_job.read_id == e.read_id && sw_job.strand == e.strand &&
                            sw_job.cal == e.cal && sw_job.read == e.read);
      check("two_words", sw_job.two_words == two);
      check("seg_start", sw_job.seg_start == (e.cal & ~32'd127));
      check("word 0", sw_job.seg[255:0] == u_dram.mem[w0 % (2**AW)]);
      check("word 1", two ? sw_job.seg[511:256] == u_dram.mem[(w0 + 1) % (2**AW)]
                          : sw_job.seg[511:256] == '0);
      for (int i = 0; i < NUM_SW; i++) if (sw_valid[i]) begin
        tag_v[i] <= 1'b1; tag_id[i] <= sw_job.read_id; tag_strand[i] <= sw_job.strand;
      end
    end
  end

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cal_job_t j;
    tag_v = '0; tag_strand = '0;
    for (int i = 0; i < NUM_SW; i++) tag_id[i] = '0;
    for (int i = 0; i < 2**AW; i++)
      for (int k = 0; k < 8; k++) u_dram.mem[i][32*k +: 32] = $urandom;
    in_valid = 0; in_job = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    j = '0;
    for (int n = 0; n < 400; n++) begin
      if (n % 4 == 0) begin
        j.read_id = $urandom; j.strand = logic'($urandom_range(1));
        for (int k = 0; k < READ_LEN; k++) j.read[2*k +: 2] = base_t'($urandom_range(3));
      end
      j.cal = $urandom;
      exp_q.push_back(j);
      @(negedge clk);
      in_valid = 1; in_job = j;
      do @(posedge clk); while (!in_ready);
      @(negedge clk);
      in_valid = 0;
    end
    while (exp_q.size() != 0) @(posedge clk);
    repeat (5) @(posedge clk);
    check("all dispatched", ndisp == 400);
    check("both section sizes seen", n_two > 0 && n_one > 0);
    check("reuse of a loaded read seen", n_reuse > 0);
    check("DRAM reads pipelined", max_inflight >= 3);
    $display("one-word %0d two-word %0d reuse %0d max in flight %0d", n_one, n_two, n_reuse,
             max_inflight);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
