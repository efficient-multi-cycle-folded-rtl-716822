// mcim_pkg: constants and helpers shared by the multi-cycle folded integer
// multipliers (MCIMs).
//
// Holds the default operand width and cycle times of the bank, and the
// ceiling-division used to size operand slices when the operand width is not
// a multiple of the cycle time. The paper's largest evaluated size is
// 128 x 128 with cycle times 2 (feedforward) and 3 (feedback; the Karatsuba unit
// always takes 3);
// those are the defaults here.
package mcim_pkg;

  // Operand width of the main configuration (128 x 128 multiplies).
  localparam int unsigned DEFAULT_W = 128;
  // Cycle times (CT = cycles per multiplication, throughput 1/CT).
  localparam int unsigned FB_CT_DEFAULT = 3;
  localparam int unsigned FF_CT_DEFAULT = 2;

  // Ceiling of a / b for positive a and b.
  function automatic int unsigned cdiv(int unsigned a, int unsigned b);
    return (a + b - 1) / b;
  endfunction

endpackage
