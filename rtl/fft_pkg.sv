// fft_pkg: word formats and arithmetic helpers shared by the 8-point
// radix-2^2 single-path delay-feedback (SDF) FFT.
//
// Data are 16-bit two's complement fixed point with 15 fraction bits
// (Q1.15), as in the paper. Twiddle factors are kept in a 10-bit ROM word:
// the Q1.15 constant arithmetically shifted right by 6 (Q1.9), which is the
// storage format the paper gives for the digit-slicing multiplier.
// The complex sample struct, the rounding halver used by every butterfly
// (divide by 2 with round-half-up, this design's reading of "divide by 2 ...
// rounding off") and the 16-bit saturation used at the multiplier output
// (this design's choice; the paper does not say how overflow is handled)
// live here so that all stages agree on them.
package fft_pkg;

  localparam int unsigned DATA_W = 16;  // data word, Q1.15
  localparam int unsigned TW_W   = 10;  // twiddle ROM word: Q1.15 constant >>> 6 (Q1.9)
  localparam int unsigned LOG2N  = 3;

  // Pipeline timing (clock cycles). Sample x[n] enters when the frame
  // counter reads n; every stage's control is the counter minus the offset
  // at which that stage sees element 0 of its own input stream.
  localparam int unsigned BF_LAT   = 1;  // butterfly output register
  localparam int unsigned CMUL_LAT = 4;  // complex multiplier pipeline
  localparam int unsigned ROM_LAT  = 1;  // synchronous twiddle ROM
  localparam int unsigned OFF_BF2  = 4 + BF_LAT;             // 5
  localparam int unsigned OFF_MUL  = OFF_BF2 + 2 + BF_LAT;   // 8
  localparam int unsigned OFF_ROM  = OFF_MUL - ROM_LAT;      // 7
  localparam int unsigned OFF_BF3  = OFF_MUL + CMUL_LAT;     // 12
  localparam int unsigned OFF_OUT  = OFF_BF3 + 1 + BF_LAT;   // 14

  typedef logic signed [DATA_W-1:0] sample_t;

  typedef struct packed {
    sample_t re;
    sample_t im;
  } cplx_t;

  typedef struct packed {
    logic signed [TW_W-1:0] re;
    logic signed [TW_W-1:0] im;
  } twiddle_t;

  // (a + b) / 2 and (a - b) / 2, rounded half up. The only result that does
  // not fit 16 bits is (32767 - (-32768) + 1) / 2 = 32768, which is clipped
  // to 32767.
  function automatic sample_t half_add(sample_t a, sample_t b);
    logic signed [DATA_W+1:0] s;
    s = (DATA_W+2)'(a) + (DATA_W+2)'(b) + (DATA_W+2)'(1);
    return sample_t'(s >>> 1);
  endfunction

  function automatic sample_t half_sub(sample_t a, sample_t b);
    logic signed [DATA_W+1:0] s;
    s = ((DATA_W+2)'(a) - (DATA_W+2)'(b) + (DATA_W+2)'(1)) >>> 1;
    if (s > (DATA_W+2)'(32767)) return sample_t'(16'sh7FFF);
    return sample_t'(s);
  endfunction

  // Clamp a wide signed value to the 16-bit data range.
  function automatic sample_t sat16(logic signed [31:0] v);
    if (v > 32'sd32767)       return sample_t'(16'sh7FFF);
    else if (v < -32'sd32768) return sample_t'(16'sh8000);
    else                      return sample_t'(v[DATA_W-1:0]);
  endfunction

  // Bit reversal of a 3-bit index (output order of the SDF pipeline).
  function automatic logic [LOG2N-1:0] bitrev3(logic [LOG2N-1:0] i);
    return {i[0], i[1], i[2]};
  endfunction

endpackage
