// pulse_pkg: constants and helpers shared by the PULSE layer engine.
//
// Membrane potentials, weights and biases are Q3.29 fixed point: bit 31 is
// the sign, bits 30..29 the integer part, bits 28..0 the fraction, so 1.0 is
// 2**29. The firing threshold is the constant 1.0. Because of that, the spike
// test needs only the three top bits: a non-negative value with bit 30 or bit
// 29 set is at least 1.0. The leak factor beta defaults to 0.15, the value the
// networks were trained with.
package pulse_pkg;

  localparam int unsigned FRAC_BITS = 29;
  typedef logic signed [31:0] q3_29_t;

  // 1.0 in Q3.29: the firing threshold theta.
  localparam q3_29_t Q_ONE = 32'sh2000_0000;
  // 0.15 in Q3.29 (round(0.15 * 2**29) = 80530637).
  localparam q3_29_t BETA_0_15 = 32'sh04CC_CCCD;

  // Three-bit threshold test: sign bit clear and an integer bit set.
  function automatic logic fires(input q3_29_t v);
    return ~v[31] & (v[30] | v[29]);
  endfunction

  // Leak: v * beta, rescaled to Q3.29 (arithmetic shift, truncating).
  function automatic q3_29_t leak(input q3_29_t v, input q3_29_t beta);
    logic signed [63:0] p;
    p = 64'(v) * 64'(beta);
    return q3_29_t'(p >>> FRAC_BITS);
  endfunction

  // Operation the controller broadcasts to all neural cores.
  typedef enum logic [1:0] {
    NC_NOP = 2'd0,  // nothing
    NC_ACC = 2'd1,  // u[n] += w[waddr]            (accumulation phase)
    NC_ACT = 2'd2,  // bias, threshold, reset, leak (activation phase)
    NC_CLR = 2'd3   // u[n] = 0                     (before a new channel group)
  } nc_op_e;

  // Ceiling division for sizing parameters.
  function automatic int unsigned cdiv(input int unsigned a, input int unsigned b);
    return (a + b - 1) / b;
  endfunction

  // Address width for a memory of n words (at least one bit).
  function automatic int unsigned aw(input int unsigned n);
    return (n <= 2) ? 1 : $clog2(n);
  endfunction

endpackage
