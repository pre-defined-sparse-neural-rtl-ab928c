// spnn_pkg: number format and arithmetic shared by every datapath unit of the
// pre-defined sparse network accelerator.
//
// All network parameters (activations, deltas, weights, biases) are signed
// fixed-point words of DW bits with FRAC fractional bits. The arithmetic of the
// edge units is defined here once so that the feedforward (FF), backpropagation
// (BP) and update (UP) units, and any reference model, round identically:
//   mulq(a,b)  full product, arithmetic-shifted right by FRAC (rounds toward -inf)
//   sat(x)     clamps a wide accumulator to the DW-bit range
// The learning rate is eta = 2^-ETA_SHIFT, so the update needs no multiplier.
// The number format and the power-of-two learning rate are this design's own
// choices; the architecture it implements leaves both open.
package spnn_pkg;

  localparam int DW        = 16;  // word width of every stored network parameter
  localparam int FRAC      = 8;   // fractional bits
  localparam int ACCW      = 40;  // accumulator width (sum of up to 2^8 full products)
  localparam int ETA_SHIFT = 4;   // learning rate eta = 2^-ETA_SHIFT

  typedef logic signed [DW-1:0]   data_t;
  typedef logic signed [ACCW-1:0] acc_t;

  localparam acc_t DMAX = acc_t'((1 <<< (DW-1)) - 1);
  localparam acc_t DMIN = -acc_t'(1 <<< (DW-1));

  // Product of two fixed-point words, rescaled to FRAC fractional bits.
  function automatic acc_t mulq(data_t a, data_t b);
    acc_t p;
    p = acc_t'(a) * acc_t'(b);
    return p >>> FRAC;
  endfunction

  // Saturate a wide value to a DW-bit word.
  function automatic data_t sat(acc_t x);
    if (x > DMAX) return data_t'(DMAX);
    if (x < DMIN) return data_t'(DMIN);
    return data_t'(x);
  endfunction

  // Weight step eta * a * delta of the UP unit.
  function automatic acc_t wstep(data_t a, data_t d);
    acc_t p;
    p = acc_t'(a) * acc_t'(d);
    return p >>> (FRAC + ETA_SHIFT);
  endfunction

  // Integer helpers for elaboration-time sizes.
  function automatic int imax(int a, int b);
    return (a > b) ? a : b;
  endfunction

  function automatic int imin(int a, int b);
    return (a < b) ? a : b;
  endfunction

  function automatic int cdiv(int a, int b);
    return (a + b - 1) / b;
  endfunction

endpackage
