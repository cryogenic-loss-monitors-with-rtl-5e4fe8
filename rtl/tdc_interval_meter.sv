// tdc_interval_meter -- turns edge events into pulse intervals and widths.
//
// A free-running coarse counter on c0 supplies the upper bits of every
// timestamp; the encoder's fine time supplies the lower two bits, giving 1 ns
// units. At each leading edge the meter emits one measurement:
//   dt    = t_lead(n) - t_lead(n-1)   (the paper's "dt" between leading edges)
//   width = t_trail(n-1) - t_lead(n-1) (width of the pulse before it)
// The paper relates dt to the average current, <I> = Q/dt, and the width to
// the charge the integrator stored in the previous cycle; both measurements
// therefore belong to the same interval. Emitting at the leading edge gives
// the fastest possible response to a rising loss.
//
// Design choices (not from the paper): an age counter counts cycles since the
// last leading edge and saturates at AGE_LIMIT; an interval at or beyond it is
// flagged dt_ovf and dt reads all ones. Widths that exceed WID_W bits, or a
// pulse whose trailing edge was never seen, are flagged wid_ovf and saturate.
// The first leading edge after reset is flagged first. When a trailing and a
// leading edge fall in the same 4 ns word, they are handled in time order.
//
// Interface: edges from tdc_encoder; iv_valid is a one-cycle strobe with iv.
// No back-pressure: a leading edge always produces a measurement. Latency:
// one cycle from edges to iv.
module tdc_interval_meter
  import clm_pkg::*;
#(
  // Saturation point of the age counter, in c0 cycles. The default keeps dt
  // inside the 32-bit timestamp range (2^32 ns).
  parameter int unsigned AGE_LIMIT = (1 << COARSE_W) - 1
) (
  input  logic      clk,
  input  logic      rst_n,
  input  edges_t    edges,
  output logic      iv_valid,
  output interval_t iv
);

  logic [COARSE_W-1:0] coarse;
  logic [COARSE_W-1:0] age;
  logic                have_lead, in_pulse;
  ts_t                 t_prev;        // last leading edge
  wid_t                w_last;        // width of the last completed pulse
  logic                w_last_ovf;

  // Next-state values.
  logic                have_lead_n, in_pulse_n, w_last_ovf_n, age_clr;
  ts_t                 t_prev_n;
  wid_t                w_last_n;
  logic                iv_valid_n;
  interval_t           iv_n;
  ts_t                 t_lead, t_trail, wdiff;

  assign t_lead  = {coarse, edges.lead_fine};
  assign t_trail = {coarse, edges.trail_fine};
  assign wdiff   = t_trail - t_prev;

  always_comb begin
    have_lead_n  = have_lead;
    in_pulse_n   = in_pulse;
    t_prev_n     = t_prev;
    w_last_n     = w_last;
    w_last_ovf_n = w_last_ovf;
    iv_valid_n   = 1'b0;
    iv_n         = '0;
    age_clr      = 1'b0;

    // A trailing edge earlier in the word than the leading edge ends the
    // previous pulse before the new one starts.
    if (edges.trail && in_pulse && (!edges.lead || edges.trail_fine < edges.lead_fine)) begin
      in_pulse_n   = 1'b0;
      w_last_ovf_n = (wdiff >> WID_W) != '0;
      w_last_n     = w_last_ovf_n ? '1 : wid_t'(wdiff);
    end

    if (edges.lead) begin
      iv_valid_n      = 1'b1;
      iv_n.t_lead     = t_lead;
      iv_n.first      = !have_lead;
      iv_n.dt_ovf     = have_lead && (age >= COARSE_W'(AGE_LIMIT));
      iv_n.dt         = !have_lead ? '0 : (iv_n.dt_ovf ? '1 : t_lead - t_prev);
      // A new pulse while the last one never ended: its width is unknown.
      iv_n.wid_ovf    = in_pulse_n ? 1'b1 : w_last_ovf_n;
      iv_n.width      = in_pulse_n ? '1   : w_last_n;
      have_lead_n     = 1'b1;
      in_pulse_n      = 1'b1;
      t_prev_n        = t_lead;
      age_clr         = 1'b1;
      // A trailing edge later in the same word ends the new pulse at once.
      if (edges.trail && edges.trail_fine > edges.lead_fine) begin
        in_pulse_n   = 1'b0;
        w_last_ovf_n = 1'b0;
        w_last_n     = wid_t'(t_trail - t_lead);
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      coarse     <= '0;
      age        <= '0;
      have_lead  <= 1'b0;
      in_pulse   <= 1'b0;
      t_prev     <= '0;
      w_last     <= '0;
      w_last_ovf <= 1'b0;
      iv_valid   <= 1'b0;
      iv         <= '0;
    end else begin
      coarse     <= coarse + 1'b1;
      if (age_clr)                          age <= '0;
      else if (age < COARSE_W'(AGE_LIMIT))  age <= age + 1'b1;
      have_lead  <= have_lead_n;
      in_pulse   <= in_pulse_n;
      t_prev     <= t_prev_n;
      w_last     <= w_last_n;
      w_last_ovf <= w_last_ovf_n;
      iv_valid   <= iv_valid_n;
      iv         <= iv_n;
    end
  end

endmodule
