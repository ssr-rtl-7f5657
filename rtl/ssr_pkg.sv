// ssr_pkg -- types and constants shared by the SSR spatial-sequential accelerator RTL.
//
// Data on the AIE side is INT8 (the paper deploys INT8-quantised transformers);
// matrix-multiply results leave the AIE arrays as 32-bit accumulators.  The
// widths of accumulators and the fixed-point formats of the nonlinear units are
// choices of this RTL, not numbers from the paper.
package ssr_pkg;

  typedef logic signed [7:0]  i8_t;    // activation / weight element
  typedef logic signed [31:0] acc_t;   // MM accumulator and HCE internal word

  // Post-processing selected in the first HCE (Fig. 6 lists LayerNorm and GELU
  // among the HCE units).  POST_NONE bypasses both.
  typedef enum logic [1:0] {
    POST_NONE = 2'd0,
    POST_LN   = 2'd1,
    POST_GELU = 2'd2
  } post_op_e;

  // 2^(-k/8) in unsigned Q0.16 for k = 0..7 (rounded; entry 0 saturates to
  // 65535).  Used by the softmax exponent: exp2(-d/8) = frac[d%8] >> (d/8).
  function automatic logic [15:0] exp2_frac_q16(input logic [2:0] k);
    case (k)
      3'd0: return 16'd65535;
      3'd1: return 16'd60097;
      3'd2: return 16'd55109;
      3'd3: return 16'd50535;
      3'd4: return 16'd46341;
      3'd5: return 16'd42495;
      3'd6: return 16'd38968;
      default: return 16'd35734;
    endcase
  endfunction

  // Smallest multiple of both a and b (used to size force partitions).
  function automatic int lcm(input int a, input int b);
    int x, y, t;
    x = a; y = b;
    while (y != 0) begin t = x % y; x = y; y = t; end
    return (a / x) * b;
  endfunction

endpackage
