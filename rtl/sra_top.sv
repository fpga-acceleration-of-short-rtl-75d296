// sra_top -- FPGA part of the short read aligner.
//
// The host finds candidate alignment locations (CALs) for each read in its
// own memory and sends the read followed by its filtered CALs. On the FPGA,
// host_rx turns the stream into read-CAL jobs, ref_lookup reads the reference
// section of each CAL (one or two 256-bit words) from the board's DRAM and
// hands read and section to one of NUM_SW Smith-Waterman units (sw_slot),
// and result_tx returns each unit's best score and position to the host,
// where the score tracker chooses among a read's CALs.
//
// The arrays run on their own clock, sw_clk, half the rate of clk in the
// published design; each sits in an sw_slot that crosses jobs and results
// between the clocks. The two clocks may also be the same clock.
//
// Interface: a 128-bit host input stream and a 128-bit host output stream
// (valid/ready), a DRAM read port (in-order responses, no response
// back-pressure), and the scoring configuration, set by the host and held
// constant while reads are aligned. The DRAM, its controller and the host
// link are outside this module.
//
// Follows the paper: the host-side CAL finder, filter and score tracker, and
// the FPGA-side chain of reference lookup and parallel S-W units. Own
// choices: a single clock for all blocks (the earlier design clocked the S-W
// units at half the rate of the rest), the stream formats, and the scoring
// configuration port.
module sra_top
  import sra_pkg::*;
#(
  parameter int unsigned NUM_SW      = 6,
  parameter int unsigned OUTSTANDING = 4
) (
  input  logic       clk,        // lookup and stream clock (250 MHz)
  input  logic       rst_n,
  input  logic       sw_clk,     // Smith-Waterman array clock (125 MHz)
  input  logic       sw_rst_n,   // reset, synchronous to sw_clk
  input  sw_cfg_t    cfg,
  // host to FPGA
  input  logic       host_in_valid,
  output logic       host_in_ready,
  input  host_word_t host_in_data,
  // FPGA to host
  output logic       host_out_valid,
  input  logic       host_out_ready,
  output host_word_t host_out_data,
  // DRAM read port
  output logic       mem_req_valid,
  input  logic       mem_req_ready,
  output dram_addr_t mem_req_addr,
  input  logic       mem_rsp_valid,
  input  dram_word_t mem_rsp_data,
  // status and event pulses
  output logic       proto_err,
  output logic       ev_two_words,   // a CAL needed a two-word section
  output logic       ev_reuse        // a job went to a unit already holding its read
);

  logic     job_valid, job_ready;
  cal_job_t job;

  host_rx u_rx (
    .clk, .rst_n,
    .in_valid (host_in_valid), .in_ready (host_in_ready), .in_data (host_in_data),
    .job_valid, .job_ready, .job,
    .proto_err
  );

  logic [NUM_SW-1:0] sw_valid, sw_ready, tag_v, tag_strand;
  read_id_t          tag_id [NUM_SW];
  sw_job_t           sw_job;

  ref_lookup #(.NUM_SW(NUM_SW), .OUTSTANDING(OUTSTANDING)) u_ref (
    .clk, .rst_n,
    .in_valid (job_valid), .in_ready (job_ready), .in_job (job),
    .mem_req_valid, .mem_req_ready, .mem_req_addr, .mem_rsp_valid, .mem_rsp_data,
    .sw_valid, .sw_ready, .sw_job, .tag_v, .tag_id, .tag_strand,
    .ev_two_words, .ev_reuse
  );

  logic [NUM_SW-1:0] res_valid, res_ready;
  sw_result_t        res [NUM_SW];

  for (genvar g = 0; g < NUM_SW; g++) begin : g_sw
    sw_slot u_sw (
      .clk, .rst_n, .sw_clk, .sw_rst_n, .cfg,
      .job_valid (sw_valid[g]), .job_ready (sw_ready[g]), .job (sw_job),
      .tag_v (tag_v[g]), .tag_id (tag_id[g]), .tag_strand (tag_strand[g]),
      .res_valid (res_valid[g]), .res_ready (res_ready[g]), .res (res[g])
    );
  end

  result_tx #(.NUM_SW(NUM_SW)) u_tx (
    .clk, .rst_n,
    .res_valid, .res_ready, .res,
    .out_valid (host_out_valid), .out_ready (host_out_ready), .out_data (host_out_data)
  );

endmodule
