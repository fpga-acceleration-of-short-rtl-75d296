// async_fifo -- first-in first-out buffer between two unrelated clocks.
//
// Carries records from the write clock domain to the read clock domain, as
// between the 250 MHz lookup logic and the 125 MHz Smith-Waterman arrays. The
// classic Gray-code scheme: each side keeps a binary pointer one bit wider
// than the address, sends its Gray-coded copy through a two-flop synchronizer
// to the other side, and compares against the synchronized pointer. `full` and
// `empty` are therefore pessimistic for two cycles of the other clock, never
// wrong. The storage is a register array written on the write clock and read
// combinationally at the read pointer (first-word fall-through).
//
// Interface: wr_en when !full, rd_en when !empty; each side has its own reset,
// both asserted together at start-up. DEPTH must be a power of two, at least 4.
module async_fifo #(
  parameter type         T     = logic [7:0],
  parameter int unsigned DEPTH = 4
) (
  input  logic wclk,
  input  logic wrst_n,
  input  logic wr_en,
  input  T     wdata,
  output logic full,
  input  logic rclk,
  input  logic rrst_n,
  input  logic rd_en,
  output T     rdata,
  output logic empty
);

  localparam int unsigned AW = $clog2(DEPTH);

  T            mem [DEPTH];
  logic [AW:0] wbin, wgray, rbin, rgray;
  logic [AW:0] wq1_rgray, wq2_rgray, rq1_wgray, rq2_wgray;
  logic [AW:0] wbin_n, rbin_n;

  function automatic logic [AW:0] bin2gray(logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction

  // ---- write side
  assign wbin_n = wbin + {{AW{1'b0}}, (wr_en && !full)};
  assign full   = (wgray == {~wq2_rgray[AW:AW-1], wq2_rgray[AW-2:0]});

  always_ff @(posedge wclk or negedge wrst_n) begin
    if (!wrst_n) begin
      wbin      <= '0;
      wgray     <= '0;
      wq1_rgray <= '0;
      wq2_rgray <= '0;
    end else begin
      wbin      <= wbin_n;
      wgray     <= bin2gray(wbin_n);
      wq1_rgray <= rgray;
      wq2_rgray <= wq1_rgray;
    end
  end

  always_ff @(posedge wclk) begin
    if (wr_en && !full) mem[wbin[AW-1:0]] <= wdata;
  end

  // ---- read side
  assign rbin_n = rbin + {{AW{1'b0}}, (rd_en && !empty)};
  assign empty  = (rgray == rq2_wgray);
  assign rdata  = mem[rbin[AW-1:0]];

  always_ff @(posedge rclk or negedge rrst_n) begin
    if (!rrst_n) begin
      rbin      <= '0;
      rgray     <= '0;
      rq1_wgray <= '0;
      rq2_wgray <= '0;
    end else begin
      rbin      <= rbin_n;
      rgray     <= bin2gray(rbin_n);
      rq1_wgray <= wgray;
      rq2_wgray <= rq1_wgray;
    end
  end

  a_no_overflow:  assert property (@(posedge wclk) disable iff (!wrst_n) wr_en |-> !full);
  a_no_underflow: assert property (@(posedge rclk) disable iff (!rrst_n) rd_en |-> !empty);

endmodule
