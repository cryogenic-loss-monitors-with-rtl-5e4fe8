// clm_tdc_top -- FPGA time-to-digital converter for a cryogenic loss monitor.
//
// The loss monitor's recycling integrator emits one fixed-charge pulse each
// time its capacitor fills, so the time between pulses is inversely
// proportional to the ionization current. This top measures that time to
// 1 ns and turns every pulse into a current sample:
//
//   pulse_in -> tdc_phase_sampler (4 phases of 250 MHz) -> tdc_encoder
//            -> tdc_interval_meter (dt, width) -> current_calc (Q/dt)
//            -> record_fifo -> readout (valid/ready)
//
// The four-phase sampler, encoder, 1 ns resolution and the Q/dt evaluation
// follow the paper; the record format, the divider, the output buffer and
// the drop counters are this design's own. The clock phases come from an
// FPGA clock manager and pulse_in from the LVDS input buffer, neither of
// which is part of this RTL.
//
// Interface: c0..c270 are 250 MHz clocks 90 degrees apart; everything after
// the sampler runs on c0. rst_n is active low, synchronous to c0. wcorr_en
// selects the width-corrected charge (see current_calc). out_* is a
// valid/ready stream of record_t. busy_drops counts measurements lost because
// the divider was still busy (only when pulses come less than about 200 ns
// apart); fifo_drops counts records lost because the buffer was full. Both
// saturate. fifo_level is the number of records waiting.
// Timing: a record is readable NUM_W + 5 = 53 c0 cycles after the c0 edge
// that captured the leading edge.
module clm_tdc_top
  import clm_pkg::*;
#(
  parameter int unsigned CHARGE_FC    = 1630,
  parameter int unsigned NOM_WIDTH_NS = 1200,
  parameter int unsigned AGE_LIMIT    = (1 << COARSE_W) - 1,
  parameter int unsigned FIFO_DEPTH   = 16
) (
  input  logic    c0,
  input  logic    c90,
  input  logic    c180,
  input  logic    c270,
  input  logic    rst_n,
  input  logic    pulse_in,
  input  logic    wcorr_en,
  output logic    out_valid,
  input  logic    out_ready,
  output record_t out_rec,
  output logic [15:0] busy_drops,
  output logic [15:0] fifo_drops,
  output logic [$clog2(FIFO_DEPTH+1)-1:0] fifo_level
);

  logic [NPHASE-1:0] word;
  edges_t            edges;
  logic              iv_valid, calc_ready, rec_valid, fifo_full;
  interval_t         iv;
  record_t           rec;

  tdc_phase_sampler u_sampler (
    .c0, .c90, .c180, .c270, .rst_n, .pulse_in, .word
  );

  tdc_encoder u_encoder (
    .clk(c0), .rst_n, .word, .edges
  );

  tdc_interval_meter #(.AGE_LIMIT(AGE_LIMIT)) u_meter (
    .clk(c0), .rst_n, .edges, .iv_valid, .iv
  );

  current_calc #(.CHARGE_FC(CHARGE_FC), .NOM_WIDTH_NS(NOM_WIDTH_NS)) u_calc (
    .clk(c0), .rst_n, .wcorr_en,
    .in_valid(iv_valid), .in_ready(calc_ready), .in(iv),
    .out_valid(rec_valid), .out(rec)
  );

  record_fifo #(.WIDTH($bits(record_t)), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk(c0), .rst_n,
    .wr_en(rec_valid), .wr_data(rec), .full(fifo_full),
    .rd_valid(out_valid), .rd_ready(out_ready), .rd_data(out_rec),
    .level(fifo_level)
  );

  always_ff @(posedge c0) begin
    if (!rst_n) begin
      busy_drops <= '0;
      fifo_drops <= '0;
    end else begin
      if (iv_valid && !calc_ready && busy_drops != '1) busy_drops <= busy_drops + 1'b1;
      if (rec_valid && fifo_full && fifo_drops != '1) fifo_drops <= fifo_drops + 1'b1;
    end
  end

endmodule
