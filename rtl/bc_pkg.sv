// bc_pkg: number formats and constants shared by the block-circulant LSTM
// datapath.
//
// Every activation, weight, bias and state value is a 12-bit two's-complement
// fixed-point number (the 12-bit word length follows the paper); the split
// into 4 integer and 8 fraction bits (Q4.8, range -8 .. +7.996) is this
// design's choice. Spectra (FFT outputs and the pre-stored weight spectra)
// carry SPEC_W = 16 bits per real/imaginary part in the same Q.8 scaling, so
// that a 16-point FFT of 12-bit data cannot overflow. The element-wise
// products, the inverse FFT and the accumulator keep 4 more fraction bits
// (Q.12, PROD_W = 28 bits) and round to Q.8 only once, at the end of a block
// row: rounding every block to Q.8 would add a bias that grows with the
// number of blocks summed. Twiddle factors are
// Q1.14. The twiddle table holds cos/sin(2*pi*m/16), m = 0..7, rounded to
// Q1.14; smaller power-of-two FFT sizes index it with a stride of 16/K.
package bc_pkg;

  localparam int DATA_W = 12;   // word length of all stored values
  localparam int FRAC   = 8;    // fraction bits of DATA_W and SPEC_W values
  localparam int SPEC_W = 16;   // real/imag part of a spectrum element
  localparam int PROD_W = 28;   // real/imag part after the element-wise product
  localparam int PROD_FRAC = 12; // fraction bits of products, IFFT and accumulator
  localparam int ACC_W  = 32;   // accumulator width
  localparam int TW_W   = 16;   // twiddle width
  localparam int TW_FRAC = 14;  // twiddle fraction bits
  localparam int K_MAX  = 16;   // largest supported block (FFT) size

  typedef logic signed [DATA_W-1:0] data_t;

  // round(16384*cos(2*pi*m/16)) and round(16384*sin(2*pi*m/16)), m = 0..7
  localparam logic signed [TW_W-1:0] COS16 [8] = '{
    16'sd16384, 16'sd15137, 16'sd11585, 16'sd6270,
    16'sd0, -16'sd6270, -16'sd11585, -16'sd15137};
  localparam logic signed [TW_W-1:0] SIN16 [8] = '{
    16'sd0, 16'sd6270, 16'sd11585, 16'sd15137,
    16'sd16384, 16'sd15137, 16'sd11585, 16'sd6270};

  // Saturate a wide signed value to the 12-bit data format.
  function automatic data_t sat_data(input logic signed [47:0] v);
    if (v > 48'sd2047)       return 12'sh7ff;
    else if (v < -48'sd2048) return 12'sh800;
    else                     return v[DATA_W-1:0];
  endfunction

  // Fixed-point product of two Q.8 values, rounded, result in Q.8.
  function automatic logic signed [47:0] qmul(input logic signed [23:0] a,
                                              input logic signed [23:0] b);
    logic signed [47:0] p;
    p = a * b;
    return (p + 48'sd128) >>> FRAC;
  endfunction

endpackage
