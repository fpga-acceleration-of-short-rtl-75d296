// sw_slot -- one Smith-Waterman unit in its own clock domain.
//
// The arrays do much more work per cycle than the lookup logic and run at half
// its clock (125 against 250 MHz). A slot puts an sw_unit on the array clock
// `sw_clk` and connects it to the lookup clock `clk` through two asynchronous
// FIFOs: one for jobs (read, CAL and reference section) and one for results.
// The read the slot holds, which the dispatcher uses to send further CALs of a
// read to the same unit, is tracked on the lookup side as the read of the last
// job written into the job FIFO, so no tag has to cross clocks.
//
// Interface: the same job, tag and result signals as sw_unit, all on `clk`;
// job_ready means the job FIFO has room. The scoring configuration is static
// while reads are aligned and goes straight to the unit.
// Timing: a job reaches the unit about three array-clock cycles after it is
// written; a result reaches `clk` about three `clk` cycles after the unit
// produces it.
//
// Follows the paper: the S-W processors run at 125 MHz while the other modules
// run at 250 MHz. Own choices: the FIFO crossing, its depths, and tracking the
// held read on the write side.
module sw_slot
  import sra_pkg::*;
#(
  parameter int unsigned JOB_DEPTH = 4,
  parameter int unsigned RES_DEPTH = 4
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       sw_clk,
  input  logic       sw_rst_n,
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

  logic       jf_full, jf_empty, u_job_ready;
  sw_job_t    u_job;
  logic       rf_full, rf_empty, u_res_valid;
  sw_result_t u_res;

  assign job_ready = !jf_full;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tag_v      <= 1'b0;
      tag_id     <= '0;
      tag_strand <= 1'b0;
    end else if (job_valid && job_ready) begin
      tag_v      <= 1'b1;
      tag_id     <= job.read_id;
      tag_strand <= job.strand;
    end
  end

  async_fifo #(.T(sw_job_t), .DEPTH(JOB_DEPTH)) u_jobs (
    .wclk (clk),    .wrst_n (rst_n),    .wr_en (job_valid && job_ready), .wdata (job),
    .full (jf_full),
    .rclk (sw_clk), .rrst_n (sw_rst_n), .rd_en (!jf_empty && u_job_ready), .rdata (u_job),
    .empty (jf_empty)
  );

  sw_unit u_sw (
    .clk (sw_clk), .rst_n (sw_rst_n), .cfg,
    .job_valid (!jf_empty), .job_ready (u_job_ready), .job (u_job),
    .tag_v (), .tag_id (), .tag_strand (),
    .res_valid (u_res_valid), .res_ready (!rf_full), .res (u_res)
  );

  async_fifo #(.T(sw_result_t), .DEPTH(RES_DEPTH)) u_results (
    .wclk (sw_clk), .wrst_n (sw_rst_n), .wr_en (u_res_valid && !rf_full), .wdata (u_res),
    .full (rf_full),
    .rclk (clk),    .rrst_n (rst_n),    .rd_en (!rf_empty && res_ready), .rdata (res),
    .empty (rf_empty)
  );

  assign res_valid = !rf_empty;

endmodule
