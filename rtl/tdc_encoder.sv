// tdc_encoder -- finds pulse edges in the sampled words and encodes their
// fine time.
//
// Each c0 cycle the encoder receives a word of four samples (bit 0 earliest).
// It prepends the last sample of the previous word, so that an edge falling
// between two words is also seen, and looks for the first 0->1 (leading edge)
// and the first 1->0 (trailing edge) transition. The fine time of an edge is
// the index 0..3 of the first sample on the new level. Combined with the cycle
// count this gives a 1 ns timestamp.
//
// The paper's Fig. 2(b) shows the four samples feeding a clocked encoder; the
// use of the previous word's last sample and the first-transition rule are
// this design's own. Pulses narrower than one word (4 ns) are outside the
// signal's range (the integrator pulses are 1.2 us wide); if several
// transitions of one kind occur in one word, only the first is reported.
//
// Interface: word from tdc_phase_sampler, edges registered. Latency: one c0
// cycle. Reset: previous sample reads 1 (no spurious leading edge).
module tdc_encoder
  import clm_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic [NPHASE-1:0] word,
  output edges_t            edges
);

  logic              prev;
  logic [NPHASE:0]   pat;
  edges_t            enc;

  assign pat = {word, prev};

  always_comb begin
    enc = '0;
    for (int k = NPHASE - 1; k >= 0; k--) begin
      if (!pat[k] && pat[k+1]) begin
        enc.lead      = 1'b1;
        enc.lead_fine = FINE_W'(k);
      end
      if (pat[k] && !pat[k+1]) begin
        enc.trail      = 1'b1;
        enc.trail_fine = FINE_W'(k);
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      prev  <= 1'b1;
      edges <= '0;
    end else begin
      prev  <= word[NPHASE-1];
      edges <= enc;
    end
  end

endmodule
