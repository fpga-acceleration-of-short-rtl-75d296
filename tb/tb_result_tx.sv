// tb_result_tx -- self-checking testbench of the result merger.
//
// Six result sources each hold a queue of results and offer them with random
// gaps, keeping a result stable until it is taken; the host side applies random
// back-pressure. Checks that each output word unpacks to a result that was
// offered, that every source's results arrive in that source's order, that no
// result is lost or duplicated, and that a source that stays valid is served
// within NUM_SW words (round-robin fairness).
module tb_result_tx;
  import sra_pkg::*;

  localparam int unsigned NUM_SW = 6;
  localparam int unsigned PER    = 50;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [NUM_SW-1:0] res_valid, res_ready;
  sw_result_t        res [NUM_SW];
  logic              out_valid, out_ready;
  host_word_t        out_data;

  result_tx #(.NUM_SW(NUM_SW)) dut (.*);

  sw_result_t src_q [NUM_SW][$];
  int         got = 0;
  int         wait_words [NUM_SW];
  int         worst_wait = 0;

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // sources
  for (genvar g = 0; g < NUM_SW; g++) begin : g_src
    always @(posedge clk) if (rst_n) begin
      if (res_valid[g] && res_ready[g]) begin
        void'(src_q[g].pop_front());
        res_valid[g] <= 1'b0;
      end else if (!res_valid[g] && src_q[g].size() != 0 && $urandom_range(3) == 0) begin
        res_valid[g] <= 1'b1;
      end
    end
    assign res[g] = (src_q[g].size() != 0) ? src_q[g][0] : '0;
  end

  // sink: the id encodes source and sequence number
  int next_seq [NUM_SW];
  always @(negedge clk) out_ready = ($urandom_range(3) != 0);
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    int s, q;
    s = int'(out_data[31:24]);
    q = int'(out_data[23:0]);
    got++;
    check("source in range", s < NUM_SW);
    if (s < NUM_SW) begin
      check("in order per source", q == next_seq[s]);
      next_seq[s] = q + 1;
      check("fields", out_data[63:32] == 32'(q * 77 + s) && out_data[95:64] == 32'(q + 5) &&
                      out_data[107:96] == 12'(q + s) && out_data[108] == q[0] &&
                      out_data[127:109] == '0);
    end
    // fairness: count words sent while a source waits
    for (int i = 0; i < NUM_SW; i++) begin
      if (res_valid[i] && !res_ready[i]) wait_words[i]++;
      else wait_words[i] = 0;
      if (wait_words[i] > worst_wait) worst_wait = wait_words[i];
    end
  end

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    res_valid = '0;
    for (int i = 0; i < NUM_SW; i++) begin
      next_seq[i] = 0; wait_words[i] = 0;
      for (int q = 0; q < PER; q++) begin
        sw_result_t r;
        r.read_id = {8'(i), 24'(q)}; r.cal = 32'(q * 77 + i); r.best_pos = 32'(q + 5);
        r.score = 12'(q + i); r.strand = q[0];
        src_q[i].push_back(r);
      end
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    while (got < NUM_SW * PER) @(posedge clk);
    repeat (10) @(posedge clk);
    check("nothing lost or extra", got == NUM_SW * PER);
    check("round-robin fairness", worst_wait < NUM_SW);
    $display("worst wait %0d words", worst_wait);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
