// tb_current_calc -- self-checking test of the Q/dt current calculation.
//
// Random intervals (1 ns to 4 s) and widths are fed with and without width
// correction. The expected current is computed in 64-bit integer arithmetic:
//   plain:     floor(1630e6 / dt) pA
//   corrected: floor(1630e6 * width / (dt * 1200)) pA, saturated to 32 bits.
// Measurements flagged first or dt_ovf must give cur_valid = 0. The result
// must appear exactly 50 cycles (48 division steps + 2) after the input is
// accepted, in_ready must be low meanwhile, and the interval fields must be
// passed through unchanged.
module tb_current_calc;
  import clm_pkg::*;

  localparam longint QS = 64'd1630 * 64'd1000000;

  logic clk = 1'b0, rst_n, wcorr_en, in_valid, in_ready, out_valid;
  interval_t in;
  record_t out;
  int checks = 0, failures = 0;
  int n_sat = 0, n_skip = 0, n_corr = 0;

  current_calc dut (.clk, .rst_n, .wcorr_en, .in_valid, .in_ready, .in, .out_valid, .out);

  always #2ns clk = ~clk;

  initial begin
    #2ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 1'b0; in_valid = 1'b0; in = '0; wcorr_en = 1'b0;
    repeat (3) @(posedge clk);
    #1ns;
    rst_n = 1'b1;
    for (int i = 0; i < 600; i++) begin
      interval_t v;
      record_t   e;
      longint    q;
      int        lat, expect_lat;
      v = '0;
      v.t_lead = $urandom();
      case (i % 6)
        0: v.dt = ts_t'($urandom_range(1, 100));
        1: v.dt = ts_t'($urandom_range(1200, 20000));
        2: v.dt = ts_t'($urandom());
        default: v.dt = ts_t'($urandom_range(100, 2000000));
      endcase
      v.width   = (i % 5 == 0) ? wid_t'($urandom()) : wid_t'($urandom_range(1100, 1400));
      if (i % 30 == 15) begin v.dt = ts_t'($urandom_range(1, 20)); v.width = '1; end
      v.first   = (i % 37 == 5);
      v.dt_ovf  = (i % 41 == 7);
      if (v.dt_ovf) v.dt = '1;
      if (v.first)  v.dt = '0;
      wcorr_en  = (i % 2 == 1);
      // Reference.
      e = '0;
      e.iv = v;
      if (v.first || v.dt_ovf) begin
        n_skip++;
      end else begin
        if (wcorr_en) begin
          q = (QS * longint'(v.width)) / (longint'(v.dt) * 1200);
          n_corr++;
        end else begin
          q = QS / longint'(v.dt);
        end
        e.cur_valid = 1'b1;
        if (q > longint'(32'hFFFF_FFFF)) begin
          e.cur_sat = 1'b1; e.current_pa = '1; n_sat++;
        end else begin
          e.current_pa = cur_t'(q);
        end
      end
      expect_lat = e.cur_valid ? 50 : 2;
      checks++;
      if (!in_ready) begin failures++; $display("not ready when idle"); end
      in = v; in_valid = 1'b1;
      @(posedge clk); #1ns;
      in_valid = 1'b0;
      lat = 1;
      while (!out_valid && lat < 200) begin
        checks++;
        if (in_ready) begin failures++; $display("ready while busy"); end
        @(posedge clk); #1ns;
        lat++;
      end
      checks++;
      if (out !== e) begin
        failures++;
        if (failures < 10) $display("i=%0d dt=%0d w=%0d corr=%b got %0d (v%b s%b) expected %0d (v%b s%b)", i, v.dt, v.width, wcorr_en,
                                    out.current_pa, out.cur_valid, out.cur_sat, e.current_pa, e.cur_valid, e.cur_sat);
      end
      checks++;
      if (lat != expect_lat) begin failures++; $display("latency %0d expected %0d", lat, expect_lat); end
      @(posedge clk); #1ns;
    end
    checks++;
    if (n_sat == 0 || n_skip == 0 || n_corr == 0) begin
      failures++; $display("coverage hole sat=%0d skip=%0d corr=%0d", n_sat, n_skip, n_corr);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
