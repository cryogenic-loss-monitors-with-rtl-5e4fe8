// tb_tdc_phase_sampler -- self-checking test of the four-phase sampler.
//
// The input is changed only at half-nanosecond times: during (k+0.5, k+1.5) ns
// it holds bits[k], so the sample taken at k ns reads bits[k-1]. After the c0
// edge at 4n ns the word must hold the samples of 4n-4 .. 4n-1 ns, i.e.
// bits[4n-5 .. 4n-2] with the earliest in bit 0. Random input patterns and
// single long pulses are both applied.
module tb_tdc_phase_sampler;
  import clm_pkg::*;

  logic c0, c90, c180, c270, rst_n, pulse_in;
  logic [NPHASE-1:0] word;
  int checks = 0, failures = 0;
  localparam int N = 4000;
  bit bits [N];

  clm_clkgen u_clk (.c0, .c90, .c180, .c270);
  tdc_phase_sampler dut (.c0, .c90, .c180, .c270, .rst_n, .pulse_in, .word);

  initial begin
    #20us;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Stimulus: first half random, second half long pulses.
  initial begin
    for (int k = 0; k < N; k++)
      bits[k] = (k < N/2) ? bit'($urandom_range(0, 1)) : bit'((k / 37) % 2);
    pulse_in = 1'b1;
    #0.5ns;
    for (int k = 0; k < N; k++) begin
      pulse_in = bits[k];
      #1ns;
    end
  end

  initial begin
    rst_n = 1'b0;
    #0.2ns;
    // During reset the word reads all ones.
    repeat (3) begin
      #4ns;
      checks++;
      if (word !== '1) begin failures++; $display("reset word %b", word); end
    end
    rst_n = 1'b1;   // changes at 12.2 ns, seen by the c0 edge at 16 ns
    #4ns;           // now 16.2 ns
    for (int n = 4; n < N / 4 - 2; n++) begin
      logic [NPHASE-1:0] exp_w;
      // time is 4n + 0.2 ns
      for (int p = 0; p < NPHASE; p++) exp_w[p] = bits[4*n - 5 + p];
      checks++;
      if (word !== exp_w) begin
        failures++;
        if (failures < 10) $display("t=%0t n=%0d word %b expected %b", $realtime, n, word, exp_w);
      end
      #4ns;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
