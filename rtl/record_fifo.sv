// record_fifo -- output buffer between the TDC and the readout.
//
// Holds measurement records until the readout takes them. Because the TDC
// produces one record per integrator pulse, the data rate follows the loss
// level (the paper calls the scheme self zero-suppressed); the buffer absorbs
// bursts such as the pulse trains during an RF gate. A plain synchronous
// first-in first-out memory with show-ahead output; depth and width are this
// design's choices (the paper does not describe the readout path).
//
// Interface: wr_en writes wr_data when not full (a write while full is
// ignored; the caller counts it). rd_valid/rd_ready is a valid/ready
// handshake, rd_data is the oldest entry while rd_valid is high.
// Timing: a written entry is visible on rd_data the next cycle.
module record_fifo #(
  parameter int unsigned WIDTH = 8,
  parameter int unsigned DEPTH = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             wr_en,
  input  logic [WIDTH-1:0] wr_data,
  output logic             full,
  output logic             rd_valid,
  input  logic             rd_ready,
  output logic [WIDTH-1:0] rd_data,
  output logic [$clog2(DEPTH+1)-1:0] level
);

  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int unsigned LW = $clog2(DEPTH+1);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wr_ptr, rd_ptr;
  logic             do_wr, do_rd;

  assign full     = (level == ($clog2(DEPTH+1))'(DEPTH));
  assign rd_valid = (level != '0);
  assign rd_data  = mem[rd_ptr];
  assign do_wr    = wr_en && !full;
  assign do_rd    = rd_valid && rd_ready;

  function automatic logic [AW-1:0] incr(input logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (do_wr) mem[wr_ptr] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      level  <= '0;
    end else begin
      if (do_wr) wr_ptr <= incr(wr_ptr);
      if (do_rd) rd_ptr <= incr(rd_ptr);
      level <= level + LW'(do_wr) - LW'(do_rd);
    end
  end

  // The level never exceeds the depth (writes while full are refused).
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
                                  level <= ($clog2(DEPTH+1))'(DEPTH));

  // Valid/ready rule: an offered record stays offered, unchanged, until taken.
  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
                           rd_valid && !rd_ready |=> rd_valid && $stable(rd_data));

endmodule
