// fir_pkg: sizes and coefficients shared by the TMR FIR filter.
//
// The filter is an 11-tap low-pass FIR on 9-bit samples. Its coefficients are
// the low-pass design values multiplied by 512: 1, -1, -9, 6,
// 73, 120, mirrored around the centre tap. Products are 18 bits wide and are
// summed by a chain of 18-bit adders. All of these numbers follow the paper.
// The two's-complement encoding of samples and coefficients and the 9-bit
// coefficient width are this design's choice (the coefficients include
// negative values and 120 fits in 9 signed bits).
package fir_pkg;

  localparam int DATA_W = 9;   // sample width
  localparam int COEF_W = 9;   // coefficient width
  localparam int ACC_W  = 18;  // product and adder width
  localparam int NTAPS  = 11;  // filter taps

  // Tap k multiplies x(n-k). Symmetric: C1 C2 C3 C4 C5 C6 C5 C4 C3 C2 C1.
  localparam logic signed [COEF_W-1:0] COEF [NTAPS] = '{
    9'sd1, -9'sd1, -9'sd9, 9'sd6, 9'sd73, 9'sd120,
    9'sd73, 9'sd6, -9'sd9, -9'sd1, 9'sd1
  };

endpackage
