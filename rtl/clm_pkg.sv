// clm_pkg -- shared constants and record types of the loss-monitor TDC.
//
// The TDC measures pulse edges in units of one quarter of the 250 MHz system
// clock (1 ns): a timestamp is {coarse cycle count, 2-bit fine phase}. The
// 250 MHz clock, the four phases and the 1 ns least significant bit follow the
// paper. The 32-bit timestamp, 16-bit pulse width, 32-bit current word and the
// record layouts below are this design's own choices.
package clm_pkg;

  // Clock phases sampled per system-clock cycle (c0, c90, c180, c270).
  localparam int unsigned NPHASE   = 4;
  localparam int unsigned FINE_W   = $clog2(NPHASE);
  // Timestamp / interval width in 1 ns units (2^32 ns = 4.29 s of range).
  localparam int unsigned TS_W     = 32;
  localparam int unsigned COARSE_W = TS_W - FINE_W;
  // Pulse width field (1 ns units, saturating at 65.5 us).
  localparam int unsigned WID_W    = 16;
  // Current result in pA.
  localparam int unsigned CUR_W    = 32;

  typedef logic [TS_W-1:0]  ts_t;
  typedef logic [WID_W-1:0] wid_t;
  typedef logic [CUR_W-1:0] cur_t;

  // Edges found by the encoder in one word of four samples.
  typedef struct packed {
    logic              lead;         // a 0->1 transition is in this word
    logic [FINE_W-1:0] lead_fine;    // index of the first sample that is 1
    logic              trail;        // a 1->0 transition is in this word
    logic [FINE_W-1:0] trail_fine;   // index of the first sample that is 0
  } edges_t;

  // One interval measurement, produced at every leading edge.
  typedef struct packed {
    ts_t  t_lead;   // timestamp of this leading edge
    ts_t  dt;       // time since the previous leading edge (ns)
    wid_t width;    // width of the previous pulse (ns)
    logic first;    // no previous leading edge since reset: dt reads 0
    logic dt_ovf;   // interval exceeded the timestamp range: dt saturated
    logic wid_ovf;  // previous pulse width saturated or unknown
  } interval_t;

  // Output record: the interval plus the current computed from it.
  typedef struct packed {
    interval_t iv;
    cur_t      current_pa;  // <I> = Q/dt in pA (0 when cur_valid is low)
    logic      cur_valid;   // current could be computed (not first, no dt overflow)
    logic      cur_sat;     // quotient exceeded CUR_W bits and was saturated
  } record_t;

endpackage
