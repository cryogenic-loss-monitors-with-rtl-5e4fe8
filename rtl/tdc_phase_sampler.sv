// tdc_phase_sampler -- four-phase multi-sampling front end of the TDC.
//
// The received integrator pulse is sampled by four flip-flops clocked by the
// four phases c0, c90, c180 and c270 of the 250 MHz system clock, so the input
// is looked at every 1 ns. A second rank of flip-flops, all on c0, brings the
// four samples into the c0 domain as one 4-bit word. At a c0 rising edge at
// time T the word holds the samples taken at T-4, T-3, T-2 and T-1 ns, with
// bit 0 the earliest. The four sampling flip-flops per phase follow the
// paper's Fig. 2(b); the retiming rank into c0 (which also serves as the
// metastability stage) and its reset value are this design's own choices.
//
// Interface: pulse_in is asynchronous. rst_n is active low, synchronous to c0;
// during reset the word reads all ones so that an input already high when
// reset is released is not taken for a leading edge.
// Timing: word is valid one c0 cycle after the last sample it holds.
module tdc_phase_sampler
  import clm_pkg::*;
(
  input  logic              c0,
  input  logic              c90,
  input  logic              c180,
  input  logic              c270,
  input  logic              rst_n,
  input  logic              pulse_in,
  output logic [NPHASE-1:0] word
);

  logic s0, s90, s180, s270;

  // First rank: one sampling flip-flop per clock phase.
  always_ff @(posedge c0)   s0   <= pulse_in;
  always_ff @(posedge c90)  s90  <= pulse_in;
  always_ff @(posedge c180) s180 <= pulse_in;
  always_ff @(posedge c270) s270 <= pulse_in;

  // Second rank: retime into the c0 domain, earliest sample in bit 0.
  always_ff @(posedge c0) begin
    if (!rst_n) word <= '1;
    else        word <= {s270, s180, s90, s0};
  end

endmodule
