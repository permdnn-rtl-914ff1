// act_unit: activation unit (ActU), reconfigurable as ReLU or tanh.
//
// Converts one ACC_W-bit accumulator (FRAC fractional bits) into a Q-bit
// activation with the same number of fractional bits, saturating to the Q-bit
// range. ReLU clamps negatives to zero. tanh uses a three-segment
// piecewise-linear curve that needs only shifts and adds:
//     |a| < 0.5        : |a|
//     0.5 <= |a| < 1.5 : 0.25 + |a|/2
//     |a| >= 1.5       : 1.0
// with the sign of a restored (maximum error about 0.1 near |a| = 1.5).
// Purely combinational. That an ActU can be switched between ReLU and tanh
// is from the paper; the tanh approximation and number format are this
// design's own choices, since the paper does not give them.
module act_unit
  import permdnn_pkg::*;
(
  input  act_fn_e fn,
  input  acc_t    a,
  output act_t    y
);
  localparam acc_t HALF     = acc_t'(1) <<< (FRAC - 1);
  localparam acc_t ONE_HALF = acc_t'(3) <<< (FRAC - 1);
  localparam acc_t ONE      = acc_t'(1) <<< FRAC;
  localparam acc_t QUARTER  = acc_t'(1) <<< (FRAC - 2);
  localparam acc_t QMAX     = acc_t'((1 << (Q - 1)) - 1);

  acc_t mag, t;

  always_comb begin
    mag = a[ACC_W-1] ? -a : a;
    if (mag < HALF)          t = mag;
    else if (mag < ONE_HALF) t = QUARTER + (mag >>> 1);
    else                     t = ONE;
    unique case (fn)
      ACT_RELU: begin
        if (a[ACC_W-1])   y = '0;
        else if (a > QMAX) y = act_t'(QMAX);
        else              y = act_t'(a);
      end
      ACT_TANH: y = a[ACC_W-1] ? act_t'(-t) : act_t'(t);
      default:  y = '0;
    endcase
  end
endmodule
