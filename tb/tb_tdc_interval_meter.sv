// tb_tdc_interval_meter -- self-checking test of the interval/width meter.
//
// A random pulse train is laid out in 1 ns units (widths and gaps of 2 ns
// upward, so that both edge orders within one 4 ns word occur, plus a few
// intervals beyond the age limit and one pulse wider than the width field),
// converted to per-cycle edge events and applied directly. For every leading
// edge the expected dt (difference of the two leading-edge times), the width
// of the previous pulse and the first/dt_ovf/wid_ovf flags are worked out from
// the layout and compared with the emitted measurement, which must appear
// exactly one cycle after its edge. AGE_LIMIT is reduced to 200 cycles.
module tb_tdc_interval_meter;
  import clm_pkg::*;

  localparam int unsigned LIMIT = 200;
  localparam int NP = 400;

  logic clk = 1'b0, rst_n;
  edges_t edges;
  logic iv_valid;
  interval_t iv;
  int checks = 0, failures = 0;
  int n_first = 0, n_ovf = 0, n_wovf = 0, n_same = 0;

  tdc_interval_meter #(.AGE_LIMIT(LIMIT)) dut (.clk, .rst_n, .edges, .iv_valid, .iv);

  always #2ns clk = ~clk;

  initial begin
    #2ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint lead_t [NP+1];
  longint trail_t [NP];
  interval_t exp_q [$];
  int exp_cyc [$];
  int cyc = 0;

  // Compare every measurement with the expectation, including its cycle.
  always @(posedge clk) begin
    cyc <= rst_n ? cyc + 1 : 0;
    if (rst_n && iv_valid) begin
      interval_t e;
      checks++;
      if (exp_q.size() == 0) begin
        failures++; $display("unexpected measurement %p", iv);
      end else begin
        e = exp_q.pop_front();
        if (iv.dt !== e.dt || iv.width !== e.width || iv.first !== e.first ||
            iv.dt_ovf !== e.dt_ovf || iv.wid_ovf !== e.wid_ovf ||
            iv.t_lead[1:0] !== e.t_lead[1:0]) begin
          failures++;
          if (failures < 10) $display("at cycle %0d left %0d: got dt=%0d w=%0d f=%b%b%b expected dt=%0d w=%0d f=%b%b%b", cyc, exp_q.size(), iv.dt, iv.width, iv.first, iv.dt_ovf, iv.wid_ovf, e.dt, e.width, e.first, e.dt_ovf, e.wid_ovf);
        end
        checks++;
        if (cyc != exp_cyc.pop_front() + 1) begin
          failures++; $display("measurement latency wrong at cycle %0d", cyc);
        end
      end
    end
  end

  initial begin
    longint t;
    int c;
    // Layout: times in ns from the start of cycle 10.
    t = 40 + 1;
    for (int n = 0; n < NP; n++) begin
      longint w, g;
      w = (n % 9 == 4) ? longint'($urandom_range(2, 3)) : longint'($urandom_range(2, 300));
      if (n == 100) w = 70000;                         // wider than 16 bits
      g = (n % 7 == 3) ? longint'($urandom_range(2, 3)) : longint'($urandom_range(2, 500));
      if (n % 50 == 25) g = 4 * LIMIT + 300;           // beyond the age limit
      lead_t[n]  = t;
      trail_t[n] = t + w;
      t = t + w + g;
    end
    lead_t[NP] = t;
    // Expected measurements.
    for (int n = 0; n <= NP; n++) begin
      interval_t e;
      longint wprev;
      e = '0;
      e.t_lead = ts_t'(lead_t[n]);
      e.first  = (n == 0);
      if (n > 0) begin
        e.dt_ovf = (lead_t[n] / 4 - lead_t[n-1] / 4 - 1) >= LIMIT;
        e.dt     = e.dt_ovf ? '1 : ts_t'(lead_t[n] - lead_t[n-1]);
        wprev    = trail_t[n-1] - lead_t[n-1];
        e.wid_ovf = wprev >= 65536;
        e.width   = e.wid_ovf ? '1 : wid_t'(wprev);
        if (e.dt_ovf) n_ovf++;
        if (e.wid_ovf) n_wovf++;
        if (lead_t[n] / 4 == trail_t[n-1] / 4) n_same++;
      end
      if (e.first) n_first++;
      exp_q.push_back(e);
      exp_cyc.push_back(int'(lead_t[n] / 4));
    end
    // Drive.
    rst_n = 1'b0;
    edges = '0;
    repeat (3) @(posedge clk);
    #1ns;
    rst_n = 1'b1;
    // cyc counts posedges; the edge events of cycle c are applied before
    // the posedge that makes cyc == c + 1.
    c = 0;
    while (c <= int'(lead_t[NP] / 4) + 3) begin
      edges_t e;
      e = '0;
      for (int n = 0; n <= NP; n++) begin
        if (lead_t[n] / 4 == c)  begin e.lead = 1'b1;  e.lead_fine  = FINE_W'(lead_t[n] % 4); end
        if (n < NP && trail_t[n] / 4 == c) begin e.trail = 1'b1; e.trail_fine = FINE_W'(trail_t[n] % 4); end
      end
      wait (cyc == c);
      edges = e;
      @(posedge clk);
      #1ns;
      c++;
    end
    // Two more leading edges with no trailing edge: the pulse never ended,
    // so the width is unknown and must be flagged.
    for (int k = 0; k < 2; k++) begin
      interval_t e;
      longint tl;
      tl = 4 * longint'(c) + 1;
      e = '0;
      e.t_lead  = ts_t'(tl);
      e.dt      = ts_t'(tl - lead_t[NP]);
      e.width   = '1;
      e.wid_ovf = 1'b1;
      exp_q.push_back(e);
      exp_cyc.push_back(c);
      lead_t[NP] = tl;
      wait (cyc == c);
      edges = '{lead: 1'b1, lead_fine: 2'd1, trail: 1'b0, trail_fine: 2'd0};
      @(posedge clk); #1ns;
      edges = '0;
      c += 6;
    end
    repeat (10) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("%0d measurements missing", exp_q.size()); end
    checks++;
    if (n_first != 1 || n_ovf == 0 || n_wovf == 0 || n_same == 0) begin
      failures++; $display("coverage hole first=%0d ovf=%0d wovf=%0d same=%0d", n_first, n_ovf, n_wovf, n_same);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
