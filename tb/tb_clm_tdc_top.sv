// tb_clm_tdc_top -- end-to-end test of the loss-monitor TDC.
//
// The testbench drives pulse_in with pulses whose edges fall at known,
// non-integer nanosecond times. Sample k of the TDC is taken at k ns, so an
// edge at time te is first seen by sample ceil(te); from these indices the
// expected dt, width and current of every record are computed independently
// of the design and compared with what the readout receives. Records lost on
// purpose (divider busy, buffer full) must match the drop counters; each
// received record is identified by its leading-edge timestamp.
//
// Phases: (1) normal pulses, width correction off, checking also the 53-cycle
// latency; (2) width correction on with varying pulse widths; (3) readout
// stalled so that the 4-entry buffer fills and drops; (4) a burst of short
// pulses closer than the divider time; (5) a gap beyond the age limit.
// AGE_LIMIT is 3000 cycles (12 us) and FIFO_DEPTH 4 to reach these cases
// quickly. Each mechanism is counted and must occur at least once.
module tb_clm_tdc_top;
  import clm_pkg::*;

  localparam int unsigned AGE = 3000;
  localparam longint QS = 64'd1630 * 64'd1000000;

  logic c0, c90, c180, c270, rst_n, pulse_in, wcorr_en, out_valid, out_ready;
  record_t out_rec;
  logic [15:0] busy_drops, fifo_drops;
  logic [2:0] fifo_level;
  int checks = 0, failures = 0;

  clm_clkgen u_clk (.c0, .c90, .c180, .c270);

  clm_tdc_top #(.AGE_LIMIT(AGE), .FIFO_DEPTH(4)) dut (
    .c0, .c90, .c180, .c270, .rst_n, .pulse_in, .wcorr_en,
    .out_valid, .out_ready, .out_rec, .busy_drops, .fifo_drops, .fifo_level
  );

  initial begin
    #3ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Pulse list built by the stimulus: sample index of each edge, and the
  // correction mode in force when the leading edge was sent.
  longint lead_s [$];
  longint trail_s [$];
  bit     corr_at [$];

  // Mechanism counters.
  int n_rec = 0, n_first = 0, n_ovf = 0, n_corr = 0, n_plain = 0, n_stall = 0;
  int n_fine [4] = '{0, 0, 0, 0};
  int n_lat = 0;

  function automatic longint sidx(real t);
    longint s;
    s = longint'($floor(t));
    return (real'(s) < t) ? s + 1 : s;
  endfunction

  // Drive one pulse: lead after gap ns, trail after width ns.
  task automatic pulse(real gap, real width);
    #(gap * 1ns);
    pulse_in = 1'b1;
    lead_s.push_back(sidx($realtime / 1ns));
    corr_at.push_back(wcorr_en);
    #(width * 1ns);
    pulse_in = 1'b0;
    trail_s.push_back(sidx($realtime / 1ns));
  endtask

  function automatic real frac(int i);
    real f [4] = '{0.13, 0.37, 0.61, 0.89};
    return f[i % 4];
  endfunction

  // Scoreboard: runs at every c0 edge.
  longint offset = 0;
  bit     have_offset = 0;
  bit     prev_valid = 0;
  bit     check_latency = 0;
  always @(posedge c0) begin
    if (rst_n && out_valid && !out_ready) n_stall++;
    if (rst_n && out_valid && out_ready) begin
      record_t r;
      longint  sl;
      int      n;
      r = out_rec;
      if (!have_offset) begin
        offset = longint'(r.iv.t_lead) - lead_s[0];
        have_offset = 1;
      end
      sl = longint'(r.iv.t_lead) - offset;
      n = -1;
      foreach (lead_s[k]) if (lead_s[k] == sl) n = k;
      checks++;
      if (n < 0) begin
        failures++; $display("record with unknown t_lead %0d", sl);
      end else begin
        bit      e_first, e_ovf, e_cv, e_sat;
        longint  e_dt, e_w, q;
        cur_t    e_cur;
        e_first = (n == 0);
        e_ovf   = !e_first && ((lead_s[n] / 4 - lead_s[n-1] / 4 - 1) >= AGE);
        e_dt    = e_first ? 0 : (e_ovf ? longint'(32'hFFFF_FFFF) : lead_s[n] - lead_s[n-1]);
        e_w     = e_first ? 0 : trail_s[n-1] - lead_s[n-1];
        e_cv    = !e_first && !e_ovf;
        e_sat   = 1'b0;
        e_cur   = '0;
        if (e_cv) begin
          q = corr_at[n] ? (QS * e_w) / (e_dt * 1200) : QS / e_dt;
          e_sat = q > longint'(32'hFFFF_FFFF);
          e_cur = e_sat ? '1 : cur_t'(q);
        end
        if (r.iv.dt !== ts_t'(e_dt) || r.iv.width !== wid_t'(e_w) || r.iv.first !== e_first ||
            r.iv.dt_ovf !== e_ovf || r.iv.wid_ovf !== 1'b0 || r.cur_valid !== e_cv ||
            r.cur_sat !== e_sat || r.current_pa !== e_cur) begin
          failures++;
          if (failures < 10) $display("pulse %0d: got dt=%0d w=%0d I=%0d f=%b o=%b v=%b, expected dt=%0d w=%0d I=%0d f=%b o=%b v=%b",
                                      n, r.iv.dt, r.iv.width, r.current_pa, r.iv.first, r.iv.dt_ovf, r.cur_valid,
                                      e_dt, e_w, e_cur, e_first, e_ovf, e_cv);
        end
        n_rec++;
        if (e_first) n_first++;
        if (e_ovf) n_ovf++;
        if (e_cv && corr_at[n]) n_corr++;
        if (e_cv && !corr_at[n]) n_plain++;
        n_fine[sl % 4]++;
        // Latency: a record arriving in an empty buffer becomes valid at the
        // 53rd c0 edge after the edge that captured its leading edge, and is
        // therefore taken at the 54th.
        if (check_latency && !prev_valid && e_cv) begin
          longint cap_edge_ns;
          cap_edge_ns = 4 * (sl / 4 + 1);
          checks++;
          n_lat++;
          if (longint'($realtime / 1ns) != cap_edge_ns + 4 * 54) begin
            failures++;
            $display("latency: record at %0t, capture edge %0d ns", $realtime, cap_edge_ns);
          end
        end
      end
    end
    prev_valid <= out_valid;
  end

  initial begin
    rst_n = 1'b0; pulse_in = 1'b0; wcorr_en = 1'b0; out_ready = 1'b1;
    #40.5ns;
    rst_n = 1'b1;
    // (1) Plain Q/dt, pulses 1.2 us wide, intervals 1.6 .. 10 us.
    check_latency = 1;
    for (int i = 0; i < 12; i++)
      pulse(real'($urandom_range(400, 9000)) + frac(i), 1200.0 + frac(i + 1));
    check_latency = 0;
    // (2) Width correction on, widths 1.0 .. 1.6 us.
    wcorr_en = 1'b1;
    for (int i = 0; i < 12; i++)
      pulse(real'($urandom_range(400, 6000)) + frac(i + 2), real'($urandom_range(1000, 1600)) + frac(i + 3));
    wcorr_en = 1'b0;
    // (3) Readout stalled: more records than the buffer holds.
    out_ready = 1'b0;
    for (int i = 0; i < 8; i++)
      pulse(500.0 + frac(i), 1200.0 + frac(i + 1));
    #2us;
    out_ready = 1'b1;
    // (4) Burst of short pulses 50 ns apart: the divider cannot keep up.
    for (int i = 0; i < 10; i++)
      pulse(30.0 + frac(i), 20.0 + frac(i + 2));
    // (5) A gap longer than AGE_LIMIT cycles, then two normal pulses.
    pulse(14000.0 + frac(1), 1200.0 + frac(3));
    pulse(3000.0 + frac(2), 1200.0 + frac(0));
    #3us;
    // Every pulse is either received or counted as dropped.
    checks++;
    if (n_rec + int'(busy_drops) + int'(fifo_drops) != lead_s.size()) begin
      failures++;
      $display("records %0d + drops %0d/%0d != pulses %0d", n_rec, busy_drops, fifo_drops, lead_s.size());
    end
    $display("mechanisms: records=%0d first=%0d dt_ovf=%0d plain=%0d corrected=%0d stall_cycles=%0d fifo_drops=%0d busy_drops=%0d fine=%0d/%0d/%0d/%0d latency_checks=%0d",
             n_rec, n_first, n_ovf, n_plain, n_corr, n_stall, fifo_drops, busy_drops,
             n_fine[0], n_fine[1], n_fine[2], n_fine[3], n_lat);
    checks++;
    if (n_first != 1 || n_ovf == 0 || n_plain == 0 || n_corr == 0 || n_stall == 0 ||
        fifo_drops == 0 || busy_drops == 0 || n_fine[0] == 0 || n_fine[1] == 0 ||
        n_fine[2] == 0 || n_fine[3] == 0 || n_lat == 0) begin
      failures++;
      $display("a mechanism was never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
