// tb_pbm_ref_pkg: reference arithmetic for the modulator testbenches.
//
// The functions here recompute the expected behaviour from first principles
// rather than from the RTL's structure: symbol amplitudes come from real
// cos/sin of the ideal carrier phase, and filter outputs from a direct-form
// convolution with the full 25-tap impulse response (no polyphase split, no
// DA tables, no folding of symmetric taps in the loop itself).
package tb_pbm_ref_pkg;
  import pbm_pkg::*;

  localparam real PI = 3.14159265358979323846;

  // amplitude code of an ideal real amplitude in {0, +-0.707, +-1}
  function automatic lvl_e code_of(real v);
    if (v > 0.9)       return LVL_P1;
    else if (v > 0.5)  return LVL_P707;
    else if (v < -0.9) return LVL_N1;
    else if (v < -0.5) return LVL_N707;
    else               return LVL_ZERO;
  endfunction

  // symbol for a carrier phase given in radians
  function automatic iq_sym_t sym_of_angle(real th);
    iq_sym_t s;
    s.i = code_of($cos(th));
    s.q = code_of($sin(th));
    return s;
  endfunction

  // product of a tap c (scaled by 4096) and an amplitude; 0.707 is taken as
  // 2896/4096 and the product rounded half up, the design's number format
  function automatic int prod(int c, lvl_e l);
    int h;
    h = (c * 2896 + 2048) >>> 12;
    case (l)
      LVL_P1:   return c;
      LVL_N1:   return -c;
      LVL_P707: return h;
      LVL_N707: return -h;
      default:  return 0;
    endcase
  endfunction

  // tap n (0..24) of the 25-tap impulse response of roll-off flt
  function automatic int h_full(int flt, int n);
    if (n < 0 || n > 24) return 0;
    return RRC_COEF[flt][(n <= 12) ? n : 24 - n];
  endfunction

  // direct-form interpolating FIR: output sample p of the symbol whose
  // newest input is hist[0]; hist[j] is the symbol j periods older.
  // y[4m+p] = sum_n h[n] * u[4m+p-n], u = zero-stuffed symbol stream.
  function automatic int fir_ref(int flt, lvl_e hist [7], int p);
    int acc;
    acc = 0;
    for (int n = 0; n < 25; n++) begin
      // u[4m+p-n] is non-zero only when (p-n) is a multiple of 4
      if (((p - n) % 4 + 4) % 4 == 0) begin
        int j;
        j = (n - p) / 4;
        if (j >= 0 && j < 7) acc += prod(h_full(flt, n), hist[j]);
      end
    end
    return acc;
  endfunction

  // Symbol-level model of the four mappers. The differential modes keep
  // their state per object and advance only when called in their own mode,
  // as the hardware does.
  class mapper_model;
    real theta = 0.0;        // pi/4 DQPSK phase, radians
    int  pr = 1, pim = 1;    // DQPSK previous encoded point
    real qtab [4] = '{0.0, PI / 2.0, PI, 3.0 * PI / 2.0};
    real step [4] = '{PI / 4.0, 3.0 * PI / 4.0, 5.0 * PI / 4.0, 7.0 * PI / 4.0};

    function iq_sym_t map(mod_sel_e mode, bit bi, bit bq);
      iq_sym_t s;
      int a, b, x, y, er, ei;
      case (mode)
        MOD_QPSK: s = sym_of_angle(qtab[{bi, bq}]);
        MOD_PI4DQPSK: begin
          theta += step[{bi, bq}];
          s = sym_of_angle(theta);
        end
        MOD_DQPSK: begin
          // (a + jb)(pr + j pim)(1 - j)/2: rotate the input point by the
          // previous encoded phase minus pi/4
          a = 1 - 2 * int'(bi);
          b = 1 - 2 * int'(bq);
          x = a * pr - b * pim;
          y = a * pim + b * pr;
          er = (x + y) / 2;
          ei = (y - x) / 2;
          pr = er;
          pim = ei;
          s.i = (er > 0) ? LVL_P1 : LVL_N1;
          s.q = (ei > 0) ? LVL_P1 : LVL_N1;
        end
        default: begin
          s.i = bi ? LVL_N707 : LVL_P707;
          s.q = bq ? LVL_N707 : LVL_P707;
        end
      endcase
      return s;
    endfunction
  endclass

endpackage
