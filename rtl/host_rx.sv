// host_rx -- parser of the host-to-FPGA stream of reads and filtered CALs.
//
// The host looks up every seed of a read in its index, merges nearby candidate
// alignment locations (CALs), and then sends the read followed by its CALs.
// This module turns that stream into one cal_job_t per CAL, each carrying the
// read's bases, so that the downstream units never have to look back at the
// stream.
//
// Stream format (128-bit words, kind in bits [127:126]):
//   READ header  kind 01, [31:0] read id; then READ_WORDS words holding the
//                2*READ_LEN bits of bases, base k at bits [2k+1:2k] of the
//                concatenation (first word least significant)
//   CAL          kind 10, [32] reverse strand, [31:0] CAL (reference position
//                of the read's first base)
//   kind 00 words are ignored (idle filler); kind 11 and a CAL with no read
//   before it are dropped and flagged on proto_err for one cycle.
//
// Interface: in_valid/in_ready and job_valid/job_ready are valid/ready
// handshakes; a job is held in an output register, and no input is taken while
// it waits, so the read register never changes under a pending job.
// Timing: one input word per cycle; a CAL becomes a job one cycle later.
//
// Follows the paper: the host sends the short read followed by the filtered
// CALs for that read, each CAL with a bit for the strand. Own choices: the word
// format, the read identifier and the error flag.
module host_rx
  import sra_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       in_valid,
  output logic       in_ready,
  input  host_word_t in_data,
  output logic       job_valid,
  input  logic       job_ready,
  output cal_job_t   job,
  output logic       proto_err
);

  typedef enum logic {ST_HDR, ST_BASES} state_e;

  localparam int unsigned WCNT_W = (READ_WORDS > 1) ? $clog2(READ_WORDS) : 1;

  state_e                        state;
  logic [WCNT_W-1:0]             widx;
  logic [READ_WORDS*HOST_W-1:0]  bases_q;   // bits above 2*READ_LEN are padding
  read_id_t                      read_id_q;
  logic                          have_read;
  host_kind_e                    kind;

  assign in_ready = !job_valid;
  assign kind     = host_kind_e'(in_data[HOST_W-1 -: 2]);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= ST_HDR;
      widx      <= '0;
      bases_q   <= '0;
      read_id_q <= '0;
      have_read <= 1'b0;
      job_valid <= 1'b0;
      job       <= '0;
      proto_err <= 1'b0;
    end else begin
      proto_err <= 1'b0;
      if (job_valid && job_ready) job_valid <= 1'b0;
      if (in_valid && in_ready) begin
        case (state)
          ST_HDR: begin
            case (kind)
              HK_READ: begin
                read_id_q <= in_data[READ_ID_W-1:0];
                have_read <= 1'b0;
                widx      <= '0;
                state     <= ST_BASES;
              end
              HK_CAL: begin
                if (have_read) begin
                  job_valid    <= 1'b1;
                  job.read_id  <= read_id_q;
                  job.strand   <= in_data[CAL_W];
                  job.cal      <= in_data[CAL_W-1:0];
                  job.read     <= bases_q[2*READ_LEN-1:0];
                end else begin
                  proto_err <= 1'b1;
                end
              end
              HK_NONE: ;
              default: proto_err <= 1'b1;
            endcase
          end
          ST_BASES: begin
            bases_q[widx*HOST_W +: HOST_W] <= in_data;
            if (widx == WCNT_W'(READ_WORDS - 1)) begin
              have_read <= 1'b1;
              state     <= ST_HDR;
            end else begin
              widx <= widx + 1'b1;
            end
          end
          default: state <= ST_HDR;
        endcase
      end
    end
  end

  a_job_hold: assert property (@(posedge clk) disable iff (!rst_n)
                               job_valid && !job_ready |=> job_valid && $stable(job));

endmodule
