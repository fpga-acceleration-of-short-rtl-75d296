// sw_unit -- one Smith-Waterman aligner: a 1-D systolic array of READ_LEN PEs.
//
// A job is one read with one candidate alignment location (CAL) and the
// reference section around it (128 or 256 bases). The unit loads the read in
// parallel, one base per PE, and then streams the section through the array
// one base per cycle. The last PE produces the final row of the dynamic
// programming table; a tracker keeps the largest cell of that row and its
// column, which is the unit's result: the read's best score at this CAL and
// the reference position where that best alignment ends.
//
// Reads are not pipelined: a job for a different read (or the same read on the
// other strand) waits until the array is empty before its read is loaded, which
// costs a lead-in of about READ_LEN cycles. A job for the read already loaded
// starts streaming on the cycle after the previous section's last base, so
// sections of one read follow each other back to back. For a reverse-strand
// CAL the reverse complement of the read is loaded, which scores the read
// against the reverse complement of the reference.
//
// Interface: job_valid/job_ready takes one sw_job_t (a one-entry buffer, so a
// job can wait while the previous one streams). res_valid/res_ready returns
// one sw_result_t per job, in job order. tag_v/tag_id/tag_strand name the read
// of the last accepted job, for the dispatcher. While a result waits in the
// output register with res_ready low the whole array stalls.
// Timing: new read, section of S bases: res_valid rises S + READ_LEN + 2
// cycles after job_valid is raised to an idle unit (one cycle to take the job,
// one to load the read, S to stream, READ_LEN through the PEs, minus the
// overlap of the last two); same read: one result every S cycles.
//
// Follows the paper: one base per processor, parallel read load, streaming
// reference, best cell of the final row as output, no pipelining between
// reads, lead-in equal to the read length, 1 or 2 DRAM words of reference, a
// strand bit per CAL. Own choices: the job buffer, back-to-back sections of
// one read, reverse-complementing the read instead of the reference, the
// first-maximum tie rule and the result record.
module sw_unit
  import sra_pkg::*;
#(
  parameter int unsigned META_DEPTH = 4
) (
  input  logic       clk,
  input  logic       rst_n,
  input  sw_cfg_t    cfg,
  input  logic       job_valid,
  output logic       job_ready,
  input  sw_job_t    job,
  output logic       tag_v,
  output read_id_t   tag_id,
  output logic       tag_strand,
  output logic       res_valid,
  input  logic       res_ready,
  output sw_result_t res
);

  typedef struct packed {
    read_id_t read_id;
    logic     strand;
    cal_t     cal;
    cal_t     seg_start;
  } meta_t;

  // ---------------------------------------------------------------- control
  logic    en;
  logic    pend_v;
  sw_job_t pend;
  logic    ld_v;            // a read is loaded in the array
  read_id_t ld_id;
  logic    ld_strand;
  base_t   read_q [READ_LEN];

  logic             feed_v;
  seg_seq_t         feed_seg;
  logic [SEG_CNT_W-1:0] feed_cnt, feed_len;
  logic             feed_first, feed_last;

  logic  meta_push, meta_pop, meta_full, meta_empty;
  meta_t meta_in, meta_out;

  logic same_read, feed_free, start, load;

  assign en         = !(res_valid && !res_ready);
  assign job_ready  = !pend_v;
  assign feed_first = (feed_cnt == '0);
  assign feed_last  = (feed_cnt == feed_len - 1'b1);

  assign same_read  = ld_v && (ld_id == pend.read_id) && (ld_strand == pend.strand);
  assign feed_free  = !feed_v || feed_last;
  // Another read may only be loaded once the array has drained.
  assign load       = en && pend_v && !same_read && !feed_v && meta_empty;
  assign start      = en && pend_v && !meta_full &&
                      ((same_read && feed_free) || load);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pend_v     <= 1'b0;
      pend       <= '0;
      tag_v      <= 1'b0;
      tag_id     <= '0;
      tag_strand <= 1'b0;
    end else begin
      if (job_valid && job_ready) begin
        pend       <= job;
        pend_v     <= 1'b1;
        tag_v      <= 1'b1;
        tag_id     <= job.read_id;
        tag_strand <= job.strand;
      end else if (start) begin
        pend_v <= 1'b0;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ld_v      <= 1'b0;
      ld_id     <= '0;
      ld_strand <= 1'b0;
      for (int i = 0; i < READ_LEN; i++) read_q[i] <= '0;
    end else if (load) begin
      ld_v      <= 1'b1;
      ld_id     <= pend.read_id;
      ld_strand <= pend.strand;
      for (int i = 0; i < READ_LEN; i++)
        read_q[i] <= pend.strand ? comp(pend.read[2*(READ_LEN-1-i) +: 2])
                                 : pend.read[2*i +: 2];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      feed_v   <= 1'b0;
      feed_seg <= '0;
      feed_cnt <= '0;
      feed_len <= '0;
    end else if (en) begin
      if (start) begin
        feed_v   <= 1'b1;
        feed_seg <= pend.seg;
        feed_cnt <= '0;
        feed_len <= pend.two_words ? SEG_CNT_W'(SEG_BASES) : SEG_CNT_W'(BASES_PER_WORD);
      end else if (feed_v) begin
        feed_seg <= feed_seg >> 2;
        feed_cnt <= feed_cnt + 1'b1;
        if (feed_last) feed_v <= 1'b0;
      end
    end
  end

  assign meta_push = start;
  assign meta_in   = '{read_id: pend.read_id, strand: pend.strand, cal: pend.cal,
                       seg_start: pend.seg_start};

  sync_fifo #(.T(meta_t), .DEPTH(META_DEPTH)) u_meta (
    .clk, .rst_n,
    .push (meta_push), .din (meta_in),
    .pop  (meta_pop),  .dout(meta_out),
    .full (meta_full), .empty(meta_empty), .count()
  );

  // ---------------------------------------------------------------- array
  logic   vld_c   [READ_LEN+1];
  logic   first_c [READ_LEN+1];
  logic   last_c  [READ_LEN+1];
  base_t  ref_c   [READ_LEN+1];
  score_t h_c     [READ_LEN+1];
  score_t f_c     [READ_LEN+1];

  assign vld_c[0]   = feed_v;
  assign first_c[0] = feed_first;
  assign last_c[0]  = feed_last;
  assign ref_c[0]   = feed_seg[1:0];
  assign h_c[0]     = '0;
  assign f_c[0]     = '0;

  for (genvar g = 0; g < READ_LEN; g++) begin : g_pe
    sw_pe u_pe (
      .clk, .rst_n, .en, .cfg,
      .read_base (read_q[g]),
      .vld_in    (vld_c[g]),   .first_in (first_c[g]), .last_in (last_c[g]),
      .ref_in    (ref_c[g]),   .h_in     (h_c[g]),     .f_in    (f_c[g]),
      .vld_out   (vld_c[g+1]), .first_out(first_c[g+1]), .last_out(last_c[g+1]),
      .ref_out   (ref_c[g+1]), .h_out    (h_c[g+1]),   .f_out   (f_c[g+1])
    );
  end

  // ------------------------------------------------------ final-row tracker
  score_t best_q, best_d, h_last;
  cal_t   col_q, col_d, bcol_q, bcol_d;
  logic   row_v, row_first, row_last;

  assign row_v     = vld_c[READ_LEN];
  assign row_first = first_c[READ_LEN];
  assign row_last  = last_c[READ_LEN];
  assign h_last    = h_c[READ_LEN];

  always_comb begin
    if (row_first) begin
      col_d  = '0;
      best_d = h_last;
      bcol_d = '0;
    end else begin
      col_d  = col_q + 1'b1;
      best_d = best_q;
      bcol_d = bcol_q;
      if (h_last > best_q) begin
        best_d = h_last;
        bcol_d = col_d;
      end
    end
  end

  // The last PE's registers change only on enabled cycles, so each enabled
  // cycle presents a new final-row cell.
  logic row_take;
  assign row_take = en && row_v;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      best_q <= '0;
      col_q  <= '0;
      bcol_q <= '0;
    end else if (row_take) begin
      best_q <= best_d;
      col_q  <= col_d;
      bcol_q <= bcol_d;
    end
  end

  assign meta_pop = row_take && row_last;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      res_valid <= 1'b0;
      res       <= '0;
    end else begin
      if (res_valid && res_ready) res_valid <= 1'b0;
      if (meta_pop) begin
        res_valid    <= 1'b1;
        res.read_id  <= meta_out.read_id;
        res.strand   <= meta_out.strand;
        res.cal      <= meta_out.cal;
        res.score    <= best_d;
        res.best_pos <= meta_out.seg_start + bcol_d;
      end
    end
  end

  a_res_hold: assert property (@(posedge clk) disable iff (!rst_n)
                               res_valid && !res_ready |=> res_valid && $stable(res));

endmodule
