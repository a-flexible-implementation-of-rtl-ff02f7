// fft_pkg: types and constants shared by the 16-point DFT/DHT engine.
//
// Number format: every sample and every output component is a signed 16-bit
// fixed-point word with 7 fraction bits (Q8.7, range -256 .. +255.9921875).
// The block length N = 16 and the 7-bit fraction come from the design's
// specification; the Q8.7 reading of the input word is this design's choice.
//
// The output memory word is 32 bits.  For the DFT, bits 31:16 hold the real
// part and bits 15:0 the imaginary part.  For the DHT, bits 15:0 hold H_k and
// bits 31:16 are zero.
package fft_pkg;

  localparam int unsigned N         = 16;   // block length
  localparam int unsigned DATA_W    = 16;   // sample / component width
  localparam int unsigned FRAC_BITS = 7;    // fraction bits of the fixed-point format
  localparam int unsigned OUT_W     = 32;   // output memory word
  localparam int unsigned ADDR_W    = $clog2(N);

  typedef logic signed [DATA_W-1:0] sample_t;
  typedef logic [ADDR_W-1:0]        addr_t;
  typedef logic [OUT_W-1:0]         out_word_t;

  // The single selection bit chooses the transform.
  typedef enum logic {
    MODE_DFT = 1'b0,
    MODE_DHT = 1'b1
  } mode_e;

  // Saturate a wide signed value to DATA_W bits, symmetrically (-32767 ..
  // +32767) so that a saturated value can be negated without wrapping.  The
  // caller compares input and result to detect clipping.
  localparam int unsigned WIDE_W = 48;
  typedef logic signed [WIDE_W-1:0] wide_t;

  function automatic sample_t sat16(input wide_t v);
    localparam wide_t MAXV = wide_t'(32767);
    localparam wide_t MINV = -wide_t'(32767);
    if (v > MAXV)      return sample_t'(16'sh7fff);
    else if (v < MINV) return sample_t'(16'sh8001);
    else               return sample_t'(v[DATA_W-1:0]);
  endfunction

  // Pack one output-memory word in the layout described above.
  function automatic out_word_t pack_word(input mode_e mode,
                                          input sample_t re,
                                          input sample_t im,
                                          input sample_t h);
    if (mode == MODE_DFT) return {re, im};
    else                  return {{DATA_W{1'b0}}, h};
  endfunction

endpackage
