// tb_clm_full -- the TDC at its default parameters, driven by a behavioural
// recycling integrator with the paper-style signal profiles.
//
// Workload 1, bench test: the input current ramps from 0 to 200 nA in 80 us,
// stays there for 400 us and ramps back to 0 in 240 us (the shape of the
// bench measurement). Width correction off.
// Workload 2, dark current: a 40 us RF gate during which about 400 nA flows,
// on a small background. Width correction on.
// For every record the dt and current are checked against values computed
// from the pulse edges the model actually produced (sample index = ceil of
// the edge time in ns). In addition the measured current on the 200 nA
// plateau and inside the RF gate must lie within 0.5 % / 5 % of the applied
// current (intervals wholly inside the gate), and no record may be lost.
module tb_clm_full;
  import clm_pkg::*;

  localparam longint QS = 64'd1630 * 64'd1000000;

  logic c0, c90, c180, c270, rst_n, pulse_in, wcorr_en, out_valid, out_ready;
  record_t out_rec;
  logic [15:0] busy_drops, fifo_drops;
  logic [4:0] fifo_level;
  int current_pa;
  int checks = 0, failures = 0;

  clm_clkgen u_clk (.c0, .c90, .c180, .c270);
  recycling_integrator_model u_ri (.current_pa, .pulse_out(pulse_in));

  clm_tdc_top dut (
    .c0, .c90, .c180, .c270, .rst_n, .pulse_in, .wcorr_en,
    .out_valid, .out_ready, .out_rec, .busy_drops, .fifo_drops, .fifo_level
  );

  initial begin
    #2ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint sidx(real t);
    longint s;
    s = longint'($floor(t));
    return (real'(s) < t) ? s + 1 : s;
  endfunction

  // Edges as the model produced them.
  longint lead_s [$];
  longint trail_s [$];
  bit     corr_at [$];
  always @(posedge pulse_in) begin lead_s.push_back(sidx($realtime / 1ns)); corr_at.push_back(wcorr_en); end
  always @(negedge pulse_in) if (rst_n) trail_s.push_back(sidx($realtime / 1ns));

  // Received records: time of arrival and measured current.
  longint offset;
  bit     have_offset = 0;
  int     n_rec = 0;
  real    plateau_sum = 0.0, gate_sum = 0.0;
  int     plateau_n = 0, gate_n = 0;
  real    gate_start_ns, gate_end_ns;

  always @(posedge c0) begin
    if (rst_n && out_valid && out_ready) begin
      record_t r;
      longint sl, e_dt, e_w, q;
      int n;
      real t_ns;
      r = out_rec;
      if (!have_offset) begin offset = longint'(r.iv.t_lead) - lead_s[0]; have_offset = 1; end
      sl = longint'(r.iv.t_lead) - offset;
      n = -1;
      foreach (lead_s[k]) if (lead_s[k] == sl) n = k;
      checks++;
      if (n < 0) begin
        failures++; $display("record with unknown t_lead");
      end else if (n > 0) begin
        e_dt = lead_s[n] - lead_s[n-1];
        e_w  = trail_s[n-1] - lead_s[n-1];
        q    = corr_at[n] ? (QS * e_w) / (e_dt * 1200) : QS / e_dt;
        if (r.iv.dt !== ts_t'(e_dt) || r.iv.width !== wid_t'(e_w) || !r.cur_valid ||
            r.current_pa !== cur_t'(q)) begin
          failures++;
          if (failures < 10) $display("pulse %0d: dt %0d/%0d width %0d/%0d I %0d/%0d", n, r.iv.dt, e_dt,
                                      r.iv.width, e_w, r.current_pa, q);
        end
        t_ns = real'(lead_s[n]);
        if (t_ns > 200000.0 && t_ns < 520000.0) begin plateau_sum += real'(r.current_pa); plateau_n++; end
        if (real'(lead_s[n-1]) > gate_start_ns && t_ns <= gate_end_ns) begin gate_sum += real'(r.current_pa); gate_n++; end
      end else begin
        if (!r.iv.first || r.cur_valid) begin failures++; $display("first record not flagged"); end
      end
      n_rec++;
    end
  end

  initial begin
    rst_n = 1'b0; wcorr_en = 1'b0; out_ready = 1'b1; current_pa = 0;
    gate_start_ns = 1.0e12; gate_end_ns = 0.0;
    #40.5ns;
    rst_n = 1'b1;
    // Workload 1: bench-test current profile (1 us steps).
    #20us;
    for (int us = 0; us < 80; us++)  begin current_pa = 200000 * us / 80; #1us; end
    current_pa = 200000;
    #400us;
    for (int us = 0; us < 240; us++) begin current_pa = 200000 - 200000 * us / 240; #1us; end
    current_pa = 0;
    #20us;
    // Workload 2: dark current in a 40 us RF gate on a 5 nA background.
    wcorr_en = 1'b1;
    current_pa = 5000;
    #40us;
    gate_start_ns = $realtime / 1ns;
    gate_end_ns   = gate_start_ns + 40000.0;
    current_pa = 400000;
    #40us;
    current_pa = 5000;
    #60us;
    current_pa = 0;
    #5us;
    checks++;
    if (plateau_n < 30 || (plateau_sum / plateau_n) < 199000.0 || (plateau_sum / plateau_n) > 201000.0) begin
      failures++; $display("plateau: %0d samples, mean %f pA", plateau_n, plateau_sum / plateau_n);
    end
    checks++;
    if (gate_n < 5 || (gate_sum / gate_n) < 380000.0 || (gate_sum / gate_n) > 420000.0) begin
      failures++; $display("RF gate: %0d samples, mean %f pA", gate_n, gate_sum / gate_n);
    end
    checks++;
    if (n_rec != lead_s.size() || busy_drops != 0 || fifo_drops != 0) begin
      failures++; $display("records %0d of %0d pulses, drops %0d/%0d", n_rec, lead_s.size(), busy_drops, fifo_drops);
    end
    $display("workloads: %0d pulses, plateau mean %0.1f nA over %0d samples, RF-gate mean %0.1f nA over %0d samples",
             lead_s.size(), plateau_sum / plateau_n / 1000.0, plateau_n, gate_sum / gate_n / 1000.0, gate_n);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
