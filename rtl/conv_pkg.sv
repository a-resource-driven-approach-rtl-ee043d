// conv_pkg -- constants and helper functions shared by the convolution IP library.
//
// The library computes KxK convolutions in signed fixed point. A convolution
// result is the exact sum of K*K products, so its width is the operand widths
// plus the bits needed to add K*K products without overflow (acc_width below).
// The default sizes (3x3 kernel, 8-bit data and coefficients) are the ones the
// library was characterised with. The DSP widths describe the 27x18-bit
// multiplier with 27-bit pre-adder and 48-bit accumulator of the UltraScale+
// DSP slice; the packing shift of the two-in-one-DSP IP follows from them.
// A latency L means: if edge n samples the last coefficient of a window,
// res_valid is high in the clock cycle between edges n+L-1 and n+L, so a
// register after the IP captures the result at edge n+L (L register stages).
package conv_pkg;

  // Characterisation sizes
  localparam int unsigned K_DEFAULT      = 3;
  localparam int unsigned DATA_W_DEFAULT = 8;
  localparam int unsigned COEF_W_DEFAULT = 8;

  // DSP slice port widths (UltraScale+ DSP48E2)
  localparam int unsigned DSP_A_W = 27;   // pre-adder / multiplier A input
  localparam int unsigned DSP_B_W = 18;   // multiplier B input
  localparam int unsigned DSP_P_W = 48;   // accumulator

  // Bit position of the upper operand when two operands share one DSP input
  localparam int unsigned PACK_SHIFT = 18;

  // Pipeline latencies of the four IPs (register stages, see above)
  localparam int unsigned DSP_LATENCY   = 3;
  localparam int unsigned CONV1_LATENCY = 2;
  localparam int unsigned CONV2_LATENCY = DSP_LATENCY;
  localparam int unsigned CONV3_LATENCY = DSP_LATENCY + 1;
  localparam int unsigned CONV4_LATENCY = DSP_LATENCY;

  // Width of an exact sum of taps products of data_w x coef_w signed operands
  function automatic int unsigned acc_width(int unsigned data_w, int unsigned coef_w,
                                            int unsigned taps);
    return data_w + coef_w + $clog2(taps);
  endfunction

  // Width of the tap counter for a kernel of taps coefficients
  function automatic int unsigned tap_width(int unsigned taps);
    return (taps > 1) ? $clog2(taps) : 1;
  endfunction

endpackage
