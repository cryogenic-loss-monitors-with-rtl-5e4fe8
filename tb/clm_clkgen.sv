// clm_clkgen -- simulation source of the four 250 MHz clock phases.
//
// c0 rises at 0, 4, 8 ... ns; c90, c180 and c270 follow 1, 2 and 3 ns later,
// each with a 50 % duty cycle. In hardware these come from the FPGA clock
// manager. Sample k of the TDC is therefore taken at exactly k ns.
module clm_clkgen (
  output logic c0,
  output logic c90,
  output logic c180,
  output logic c270
);
  initial begin
    c0 = 1'b0; c90 = 1'b0; c180 = 1'b1; c270 = 1'b1;
    forever begin
      c0   = 1'b1; c180 = 1'b0; #1ns;
      c90  = 1'b1; c270 = 1'b0; #1ns;
      c180 = 1'b1; c0   = 1'b0; #1ns;
      c270 = 1'b1; c90  = 1'b0; #1ns;
    end
  end
endmodule
