// result_tx -- merges the Smith-Waterman units' results into the host stream.
//
// Every read-CAL alignment produces one result. The host's score tracker
// picks, per read, the best CAL (or the best few, or all ties) and formats the
// output, so the FPGA returns every result unfiltered. A round-robin arbiter
// takes one result per cycle from the units with a valid result, starting
// after the unit served last, and packs it into one 128-bit word:
//   [31:0] read id   [63:32] CAL   [95:64] best position
//   [95+SCORE_W:96] score          [108] reverse strand   other bits zero
//
// Interface: res_valid/res_ready per unit; out_valid/out_ready towards the
// host, with an output register, so a result leaves one cycle after it is
// taken. One word per cycle at full rate.
//
// Follows the paper: results of all S-W units go to a host thread that does
// the score tracking. Own choices: the word layout and the arbitration.
module result_tx
  import sra_pkg::*;
#(
  parameter int unsigned NUM_SW = 6
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [NUM_SW-1:0] res_valid,
  output logic [NUM_SW-1:0] res_ready,
  input  sw_result_t        res [NUM_SW],
  output logic              out_valid,
  input  logic              out_ready,
  output host_word_t        out_data
);

  localparam int unsigned SEL_W = (NUM_SW > 1) ? $clog2(NUM_SW) : 1;

  logic [SEL_W-1:0]  rr, pick;
  logic              found, take;

  always_comb begin
    found = 1'b0;
    pick  = rr;
    for (int k = NUM_SW - 1; k >= 0; k--) begin
      if (res_valid[(int'(rr) + k) % NUM_SW]) begin
        found = 1'b1;
        pick  = SEL_W'((int'(rr) + k) % NUM_SW);
      end
    end
  end

  assign take = found && (!out_valid || out_ready);

  always_comb begin
    res_ready = '0;
    if (take) res_ready[pick] = 1'b1;
  end

  function automatic host_word_t pack(sw_result_t r);
    host_word_t w;
    w = '0;
    w[31:0]            = r.read_id;
    w[63:32]           = r.cal;
    w[95:64]           = r.best_pos;
    w[96 +: SCORE_W]   = r.score;
    w[108]             = r.strand;
    return w;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
      rr        <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (take) begin
        out_valid <= 1'b1;
        out_data  <= pack(res[pick]);
        rr        <= (pick == SEL_W'(NUM_SW - 1)) ? '0 : SEL_W'(pick + 1'b1);
      end
    end
  end

  a_out_hold: assert property (@(posedge clk) disable iff (!rst_n)
                               out_valid && !out_ready |=> out_valid && $stable(out_data));

endmodule
