// tb_host_rx -- self-checking testbench of the host stream parser.
//
// Sends a stream of reads, each followed by a random number of CALs on either
// strand, with idle words, malformed words and a CAL before any read mixed in,
// while the job consumer applies random back-pressure. Checks every job
// (read id, strand, CAL and all READ_LEN bases) against a list built while
// the stream was generated, and counts the protocol-error pulses.
module tb_host_rx;
  import sra_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic       in_valid, in_ready, job_valid, job_ready, proto_err;
  host_word_t in_data;
  cal_job_t   job;

  host_rx dut (.*);

  cal_job_t   exp_q[$];
  host_word_t words[$];
  int         exp_err = 0, got_err = 0, njobs = 0;

  always @(negedge clk) job_ready = ($urandom_range(2) != 0);

  always @(posedge clk) if (rst_n) begin
    if (proto_err) got_err++;
    if (job_valid && job_ready) begin
      cal_job_t e;
      checks++;
      njobs++;
      if (exp_q.size() == 0) begin failures++; $display("FAIL unexpected job"); end
      else begin
        e = exp_q.pop_front();
        if (job !== e) begin
          failures++;
          $display("FAIL job %0d: id %0d/%0d cal %0h/%0h", njobs, job.read_id, e.read_id,
                   job.cal, e.cal);
        end
      end
    end
  end

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    host_word_t w;
    read_seq_t  rd;
    logic [READ_WORDS*HOST_W-1:0] flat;
    in_valid = 0; in_data = '0;
    // a CAL before any read is an error
    w = '0; w[HOST_W-1 -: 2] = HK_CAL; words.push_back(w); exp_err++;
    for (int r = 0; r < 40; r++) begin
      int ncal;
      for (int k = 0; k < READ_LEN; k++) rd[2*k +: 2] = base_t'($urandom_range(3));
      w = '0; w[HOST_W-1 -: 2] = HK_READ; w[31:0] = 32'(1000 + r); words.push_back(w);
      flat = '0; flat[2*READ_LEN-1:0] = rd;
      for (int k = 0; k < READ_WORDS; k++) words.push_back(flat[k*HOST_W +: HOST_W]);
      ncal = $urandom_range(0, 5);
      for (int c = 0; c < ncal; c++) begin
        cal_job_t e;
        e.read_id = 32'(1000 + r); e.strand = logic'($urandom_range(1));
        e.cal = $urandom; e.read = rd;
        w = '0; w[HOST_W-1 -: 2] = HK_CAL; w[32] = e.strand; w[31:0] = e.cal;
        words.push_back(w); exp_q.push_back(e);
        if ($urandom_range(5) == 0) begin words.push_back('0); end      // idle word
        if ($urandom_range(9) == 0) begin                                // bad kind
          w = '1; words.push_back(w); exp_err++;
        end
      end
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    while (words.size() != 0) begin
      @(negedge clk);
      in_valid = ($urandom_range(3) != 0);
      in_data  = words[0];
      @(posedge clk);
      if (in_valid && in_ready) void'(words.pop_front());
    end
    @(negedge clk); in_valid = 0;
    repeat (20) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL %0d jobs missing", exp_q.size()); end
    checks++;
    if (got_err != exp_err) begin
      failures++; $display("FAIL proto_err %0d expected %0d", got_err, exp_err);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
