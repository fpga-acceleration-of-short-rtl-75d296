// dram_model -- behavioural model of the board DRAM and its controller, for
// testbenches only (not synthesizable logic).
//
// Holds 2**AW 256-bit words of 2-bit-coded reference in `mem`, which a
// testbench fills directly. Read requests are taken on a valid/ready port (the
// ready is withheld at random when STALL is set, to mimic refresh and bank
// conflicts) and answered in order LATENCY cycles later, one word per
// rsp_valid pulse. Addresses wrap modulo the array size.
module dram_model
  import sra_pkg::*;
#(
  parameter int unsigned AW      = 8,
  parameter int unsigned LATENCY = 20,
  parameter bit          STALL   = 1'b1
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       req_valid,
  output logic       req_ready,
  input  dram_addr_t req_addr,
  output logic       rsp_valid,
  output dram_word_t rsp_data
);

  dram_word_t mem [2**AW];
  longint     now = 0;
  longint     due_q  [$];
  dram_word_t data_q [$];
  int         nreq = 0;

  always @(posedge clk) now <= now + 1;

  always @(negedge clk) req_ready <= STALL ? ($urandom_range(4) != 0) : 1'b1;

  always @(posedge clk) begin
    rsp_valid <= 1'b0;
    if (rst_n) begin
      if (req_valid && req_ready) begin
        due_q.push_back(now + LATENCY);
        data_q.push_back(mem[req_addr[AW-1:0]]);
        nreq++;
      end
      if (due_q.size() != 0 && due_q[0] <= now) begin
        void'(due_q.pop_front());
        rsp_valid <= 1'b1;
        rsp_data  <= data_q.pop_front();
      end
    end
  end

  initial begin
    req_ready = 1'b0;
    rsp_valid = 1'b0;
    rsp_data  = '0;
  end

endmodule
