// current_calc -- computes the average input current <I> = Q/dt for each
// interval measurement.
//
// The recycling integrator releases a fixed charge Q per pulse, so the mean
// current over the interval dt between two leading edges is Q/dt (the paper's
// formula). With CHARGE_FC = 1630 (1.63 pC) and dt in ns, the current in pA is
//     I = CHARGE_FC * 10^6 / dt.
// The paper also notes that at high current the integrator's pulse grows wider
// and stores proportionally more charge. When wcorr_en is set, the charge is
// scaled by the measured width of the pulse that began the interval relative
// to the nominal NOM_WIDTH_NS (1.2 us):
//     I = CHARGE_FC * 10^6 * width / (dt * NOM_WIDTH_NS).
// Both are computed exactly (floor) by one sequential restoring divider that
// retires one quotient bit per cycle. The divider, the pA unit, the
// saturation to CUR_W bits and the correction switch are this design's own;
// the paper leaves open where Q/dt is evaluated.
//
// Interface: in_valid/in_ready handshake (in_ready is low while dividing);
// out_valid is a one-cycle strobe with out. A measurement flagged first or
// dt_ovf (or with dt = 0) gives cur_valid = 0 without dividing, as does a
// width-corrected one whose width is saturated (wid_ovf).
// Timing: NUM_W + 2 cycles from accepted input to out_valid for a division,
// 2 cycles otherwise.
module current_calc
  import clm_pkg::*;
#(
  parameter int unsigned CHARGE_FC    = 1630,  // charge per pulse, fC
  parameter int unsigned NOM_WIDTH_NS = 1200   // nominal pulse width, ns
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      wcorr_en,
  input  logic      in_valid,
  output logic      in_ready,
  input  interval_t in,
  output logic      out_valid,
  output record_t   out
);

  localparam int unsigned NUM_W = 48;
  localparam int unsigned DEN_W = 48;
  localparam longint unsigned QSCALE = longint'(CHARGE_FC) * 64'd1000000;

  typedef enum logic [1:0] {IDLE, DIV, DONE} state_t;
  state_t state;

  logic [NUM_W-1:0]        num, quo;
  logic [DEN_W-1:0]        den;
  logic [DEN_W-1:0]        rem;
  logic [DEN_W:0]          rem_sh;
  logic [$clog2(NUM_W)-1:0] step;
  interval_t               held;
  logic                    skip;
  logic                    can_div;

  assign in_ready = (state == IDLE);
  assign can_div  = !in.first && !in.dt_ovf && (in.dt != '0) && !(wcorr_en && in.wid_ovf);
  assign rem_sh   = {rem[DEN_W-1:0], num[NUM_W-1]};

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state     <= IDLE;
      num       <= '0;
      den       <= '0;
      rem       <= '0;
      quo       <= '0;
      step      <= '0;
      held      <= '0;
      skip      <= 1'b0;
      out_valid <= 1'b0;
      out       <= '0;
    end else begin
      out_valid <= 1'b0;
      case (state)
        IDLE: if (in_valid) begin
          held <= in;
          skip <= !can_div;
          rem  <= '0;
          quo  <= '0;
          step <= '0;
          if (wcorr_en) begin
            num <= NUM_W'(QSCALE * 64'(in.width));
            den <= DEN_W'(64'(in.dt) * 64'(NOM_WIDTH_NS));
          end else begin
            num <= NUM_W'(QSCALE);
            den <= DEN_W'(in.dt);
          end
          state <= can_div ? DIV : DONE;
        end
        DIV: begin
          // One restoring-division step: shift in the next numerator bit.
          if (rem_sh >= {1'b0, den}) begin
            rem <= DEN_W'(rem_sh - {1'b0, den});
            quo <= {quo[NUM_W-2:0], 1'b1};
          end else begin
            rem <= DEN_W'(rem_sh);
            quo <= {quo[NUM_W-2:0], 1'b0};
          end
          num  <= {num[NUM_W-2:0], 1'b0};
          step <= step + 1'b1;
          if (step == $clog2(NUM_W)'(NUM_W - 1)) state <= DONE;
        end
        DONE: begin
          out_valid     <= 1'b1;
          out.iv        <= held;
          out.cur_valid <= !skip;
          out.cur_sat   <= !skip && ((quo >> CUR_W) != '0);
          if (skip)                    out.current_pa <= '0;
          else if ((quo >> CUR_W) != '0) out.current_pa <= '1;
          else                         out.current_pa <= cur_t'(quo);
          state         <= IDLE;
        end
        default: state <= IDLE;
      endcase
    end
  end

endmodule
