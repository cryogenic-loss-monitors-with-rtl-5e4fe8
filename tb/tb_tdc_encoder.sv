// tb_tdc_encoder -- self-checking test of the edge encoder.
//
// Random 4-bit sample words (and runs of constant words, as a real pulse
// gives) are applied on c0. For each word the expected edges are worked out
// from the stream of samples: the sample before the word is the previous
// word's bit 3, the fine time of an edge is the index of the first sample on
// the new level. The encoder output is compared one cycle later.
module tb_tdc_encoder;
  import clm_pkg::*;

  logic clk = 1'b0, rst_n;
  logic [NPHASE-1:0] word;
  edges_t edges;
  int checks = 0, failures = 0;
  int n_lead = 0, n_trail = 0, n_both = 0, n_bound = 0;

  tdc_encoder dut (.clk, .rst_n, .word, .edges);

  always #2ns clk = ~clk;

  initial begin
    #100us;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit last;           // last sample of the previous word
    edges_t exp_e;
    rst_n = 1'b0;
    word  = '0;
    repeat (3) @(posedge clk);
    #1ns;
    checks++;
    if (edges !== '0) begin failures++; $display("edges not cleared in reset"); end
    // The word present during reset is all zeros and reset sets the stored
    // sample to one, so the first word after reset starts from "high".
    rst_n = 1'b1;
    last  = 1'b1;
    for (int i = 0; i < 5000; i++) begin
      logic [NPHASE-1:0] w;
      if (i % 50 < 25) w = NPHASE'($urandom());
      else             w = ((i / 7) % 2) ? '1 : ((i % 7 == 3) ? 4'b0011 : '0);
      word = w;
      // Expected edges: walk the samples in time order.
      exp_e = '0;
      begin
        bit prev_s;
        prev_s = last;
        for (int k = 0; k < NPHASE; k++) begin
          if (!prev_s && w[k] && !exp_e.lead)  begin exp_e.lead = 1'b1;  exp_e.lead_fine  = FINE_W'(k); end
          if (prev_s && !w[k] && !exp_e.trail) begin exp_e.trail = 1'b1; exp_e.trail_fine = FINE_W'(k); end
          prev_s = w[k];
        end
      end
      last = w[NPHASE-1];
      @(posedge clk);
      #1ns;
      checks++;
      if (edges !== exp_e) begin
        failures++;
        if (failures < 10) $display("i=%0d word %b got %p expected %p", i, w, edges, exp_e);
      end
      n_lead  += int'(exp_e.lead);
      n_trail += int'(exp_e.trail);
      n_both  += int'(exp_e.lead && exp_e.trail);
      n_bound += int'(exp_e.lead && exp_e.lead_fine == 0);
    end
    checks++;
    if (n_lead == 0 || n_trail == 0 || n_both == 0 || n_bound == 0) begin
      failures++; $display("coverage hole lead=%0d trail=%0d both=%0d boundary=%0d", n_lead, n_trail, n_both, n_bound);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
