// ref_lookup -- reference retrieval and dispatch to the Smith-Waterman units.
//
// For each read-CAL job this module works out which 256-bit DRAM words of the
// 2-bit-per-base reference the alignment needs, reads them from the board's
// DRAM, and hands the read together with that reference section to one of the
// Smith-Waterman units.
//
// Word selection: the CAL is the reference position of the read's first base.
// The word holding it is always read; when the read, placed at the CAL, runs
// past the end of that word (CAL mod 128 + READ_LEN > 128) the next word is
// read as well, giving a 256-base section. The section starts at the first
// word's boundary, so the alignment may end anywhere within it.
//
// Memory side: up to OUTSTANDING jobs (and twice as many words) are in flight
// at once. Requests go out in order on a valid/ready request port; the memory
// returns words in request order, one per mem_rsp_valid, with no back-pressure,
// so a credit counter makes sure every returning word has room in the response
// FIFO. Job descriptors wait in a second FIFO until their words are back.
//
// Dispatch: a finished section waits in an output register. It goes to a ready
// unit that already holds the same read (same id and strand) if there is one,
// because that unit needs no read load and no lead-in; otherwise to the next
// ready unit in round-robin order. All units share one job bus; sw_valid is
// one-hot.
//
// Follows the paper: the reference is fetched in 256-bit DRAM words, one or two
// per CAL depending on where the CAL falls relative to a word boundary, and the
// Ref Lookup block feeds several S-W units. Own choices: pipelining of the DRAM
// reads (the paper notes that the first design's unpipelined accesses were its
// bottleneck), the memory port protocol, and the dispatch policy.
module ref_lookup
  import sra_pkg::*;
#(
  parameter int unsigned NUM_SW      = 6,
  parameter int unsigned OUTSTANDING = 4
) (
  input  logic       clk,
  input  logic       rst_n,
  // jobs from the host stream parser
  input  logic       in_valid,
  output logic       in_ready,
  input  cal_job_t   in_job,
  // DRAM read port
  output logic       mem_req_valid,
  input  logic       mem_req_ready,
  output dram_addr_t mem_req_addr,
  input  logic       mem_rsp_valid,
  input  dram_word_t mem_rsp_data,
  // Smith-Waterman units
  output logic [NUM_SW-1:0] sw_valid,
  input  logic [NUM_SW-1:0] sw_ready,
  output sw_job_t           sw_job,
  input  logic [NUM_SW-1:0] tag_v,
  input  read_id_t          tag_id     [NUM_SW],
  input  logic [NUM_SW-1:0] tag_strand,
  // event pulses, for monitoring
  output logic       ev_two_words,
  output logic       ev_reuse
);

  localparam int unsigned RSP_DEPTH = 2 * OUTSTANDING;
  localparam int unsigned CRED_W    = $clog2(RSP_DEPTH + 1);
  localparam int unsigned SEL_W     = (NUM_SW > 1) ? $clog2(NUM_SW) : 1;

  typedef struct packed {
    cal_job_t job;
    logic     two_words;
  } meta_t;

  // ------------------------------------------------------------ requests
  logic     rq_v, rq_sent, rq_two;
  cal_job_t rq;
  logic     meta_push, meta_pop, meta_full, meta_empty;
  meta_t    meta_in, meta_out;
  logic [CRED_W-1:0] credits;   // words requested and not yet taken from rsp FIFO
  logic     req_fire, rsp_pop;

  assign in_ready      = !rq_v;
  assign rq_two        = (32'(rq.cal[WOFS_W-1:0]) + READ_LEN) > BASES_PER_WORD;
  assign mem_req_valid = rq_v && (credits < CRED_W'(RSP_DEPTH)) && !meta_full;
  assign mem_req_addr  = dram_addr_t'(rq.cal[CAL_W-1:WOFS_W]) + dram_addr_t'(rq_sent);
  assign req_fire      = mem_req_valid && mem_req_ready;
  assign meta_push     = req_fire && (rq_sent || !rq_two);
  assign meta_in       = '{job: rq, two_words: rq_two};
  assign ev_two_words  = meta_push && rq_two;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rq_v    <= 1'b0;
      rq_sent <= 1'b0;
      rq      <= '0;
    end else begin
      if (in_valid && in_ready) begin
        rq_v    <= 1'b1;
        rq_sent <= 1'b0;
        rq      <= in_job;
      end else if (req_fire) begin
        if (meta_push) rq_v <= 1'b0;
        else           rq_sent <= 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) credits <= '0;
    else credits <= credits + {{(CRED_W-1){1'b0}}, req_fire} - {{(CRED_W-1){1'b0}}, rsp_pop};
  end

  sync_fifo #(.T(meta_t), .DEPTH(OUTSTANDING)) u_meta (
    .clk, .rst_n,
    .push (meta_push), .din (meta_in),
    .pop  (meta_pop),  .dout(meta_out),
    .full (meta_full), .empty(meta_empty), .count()
  );

  // ------------------------------------------------------------ responses
  logic       rsp_full, rsp_empty;
  dram_word_t rsp_word, low_q;
  logic       asm_half;      // first word of a two-word section is held

  sync_fifo #(.T(dram_word_t), .DEPTH(RSP_DEPTH)) u_rsp (
    .clk, .rst_n,
    .push (mem_rsp_valid), .din (mem_rsp_data),
    .pop  (rsp_pop),       .dout(rsp_word),
    .full (rsp_full),      .empty(rsp_empty), .count()
  );

  logic    out_v, out_take, asm_go;
  sw_job_t out_q;

  assign asm_go   = !rsp_empty && !meta_empty && (!out_v || out_take);
  assign rsp_pop  = asm_go;
  assign meta_pop = asm_go && (asm_half || !meta_out.two_words);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      asm_half <= 1'b0;
      low_q    <= '0;
      out_v    <= 1'b0;
      out_q    <= '0;
    end else begin
      if (out_take) out_v <= 1'b0;
      if (asm_go) begin
        if (meta_pop) begin
          asm_half        <= 1'b0;
          out_v           <= 1'b1;
          out_q.read_id   <= meta_out.job.read_id;
          out_q.strand    <= meta_out.job.strand;
          out_q.cal       <= meta_out.job.cal;
          out_q.read      <= meta_out.job.read;
          out_q.seg_start <= {meta_out.job.cal[CAL_W-1:WOFS_W], WOFS_W'(0)};
          out_q.two_words <= meta_out.two_words;
          out_q.seg       <= meta_out.two_words ? {rsp_word, low_q}
                                                : {{WORD_BITS{1'b0}}, rsp_word};
        end else begin
          asm_half <= 1'b1;
          low_q    <= rsp_word;
        end
      end
    end
  end

  // ------------------------------------------------------------ dispatch
  logic [NUM_SW-1:0] match, sel;
  logic [SEL_W-1:0]  rr;
  logic              any_match;

  always_comb begin
    int u;
    u = 0;
    for (int i = 0; i < NUM_SW; i++)
      match[i] = sw_ready[i] && tag_v[i] && (tag_id[i] == out_q.read_id) &&
                 (tag_strand[i] == out_q.strand);
    any_match = |match;
    sel = '0;
    if (any_match) begin
      for (int i = NUM_SW - 1; i >= 0; i--) if (match[i]) sel = NUM_SW'(1) << i;
    end else begin
      for (int k = NUM_SW - 1; k >= 0; k--) begin
        u = (int'(rr) + k) % NUM_SW;
        if (sw_ready[u]) sel = NUM_SW'(1) << u;
      end
    end
  end

  assign sw_valid = out_v ? sel : '0;
  assign sw_job   = out_q;
  assign out_take = out_v && (|sel);
  assign ev_reuse = out_take && any_match;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rr <= '0;
    else if (out_take && !any_match) begin
      for (int i = 0; i < NUM_SW; i++)
        if (sel[i]) rr <= (i == NUM_SW - 1) ? '0 : SEL_W'(i + 1);
    end
  end

  a_onehot: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(sw_valid));
  a_no_rsp_overflow: assert property (@(posedge clk) disable iff (!rst_n)
                                      mem_rsp_valid |-> !rsp_full || rsp_pop);

endmodule
