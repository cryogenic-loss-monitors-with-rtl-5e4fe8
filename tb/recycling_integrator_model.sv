// recycling_integrator_model -- behavioural (non-synthesizable) model of the
// loss monitor's analog recycling integrator, for simulation only.
//
// The real part is a charge amplifier with a 0.5 pF feedback capacitor and a
// discriminator: when the integrated ionization charge reaches the threshold
// the discriminator fires a fixed-width discharge pulse that removes a fixed
// charge. Here the input current (in pA) is integrated in 1 ns steps; when
// the accumulated charge reaches CHARGE_FC the output goes high for WIDTH_NS
// and CHARGE_FC is removed. The edges are placed EDGE_OFS ns after a whole
// nanosecond so that they never coincide with a TDC sampling instant.
// Output polarity is active high, as seen after the NIM-to-LVDS conversion.
module recycling_integrator_model #(
  parameter int  CHARGE_FC = 1630,   // charge per pulse, fC (1.63 pC)
  parameter int  WIDTH_NS  = 1200,   // discharge pulse width, ns (1.2 us)
  parameter real EDGE_OFS  = 0.37    // sub-ns offset of the pulse edges
) (
  input  int   current_pa,
  output logic pulse_out
);
  real charge_fc = 0.0;
  int  pulse_left = 0;

  initial begin
    pulse_out = 1'b0;
    #(EDGE_OFS * 1ns);
    forever begin
      #1ns;
      charge_fc = charge_fc + real'(current_pa) * 1.0e-6;   // 1 pA x 1 ns = 1e-6 fC
      if (pulse_left > 0) begin
        pulse_left--;
        if (pulse_left == 0) pulse_out = 1'b0;
      end else if (charge_fc >= real'(CHARGE_FC)) begin
        charge_fc  = charge_fc - real'(CHARGE_FC);
        pulse_out  = 1'b1;
        pulse_left = WIDTH_NS;
      end
    end
  end
endmodule
