// tb_ref_pkg: reference model for the testbenches.
//
// The reference computes the DFT straight from its definition,
//   V_k = sum_n x_n exp(-j 2 pi k n / 16),
// with each twiddle cos/sin quantised to 7 fraction bits (round to nearest,
// halves away from zero), the products summed exactly in integers, the sum
// rounded half-up to 7 fraction bits and saturated to +-32767.  It does not
// use the Laurent-series grouping of the RTL, so agreement checks that
// grouping.  Also holds the 16-sample test vector of the design's published
// results and the output words printed in its DFT and DHT simulation traces.
package tb_ref_pkg;

  typedef logic signed [15:0] s16_t;
  typedef s16_t frame_t [16];

  function automatic longint qtw(input real r);   // round(128 * r)
    real s;
    s = r * 128.0;
    if (s >= 0.0) return longint'($floor(s + 0.5));
    else          return -longint'($floor(-s + 0.5));
  endfunction

  function automatic s16_t sat(input longint v, output bit clipped);
    clipped = 1'b0;
    if (v > 32767)  begin clipped = 1'b1; return 16'sh7fff; end
    if (v < -32767) begin clipped = 1'b1; return 16'sh8001; end
    return s16_t'(v);
  endfunction

  function automatic longint rnd7(input longint v);  // floor((v + 64) / 128)
    longint t;
    t = v + 64;
    return (t >= 0) ? (t / 128) : -((-t + 127) / 128);
  endfunction

  // re[k], im[k] of the quantised DFT; returns 1 if anything saturated.
  // Bins 0..8 come from the definition; bins 9..15 are the conjugates of
  // bins 7..1, as for any real input (the rounded imaginary part is negated).
  function automatic bit ref_dft(input frame_t x, output frame_t re, output frame_t im);
    localparam real PI = 3.14159265358979323846;
    bit any, c;
    longint rr [9];
    longint ri [9];
    any = 1'b0;
    for (int k = 0; k <= 8; k++) begin
      longint ar, ai;
      ar = 0; ai = 0;
      for (int n = 0; n < 16; n++) begin
        int l;
        l  = (k * n) % 16;
        ar += longint'(x[n]) * qtw($cos(2.0 * PI * l / 16.0));
        ai -= longint'(x[n]) * qtw($sin(2.0 * PI * l / 16.0));
      end
      rr[k] = rnd7(ar);
      ri[k] = rnd7(ai);
    end
    for (int k = 0; k < 16; k++) begin
      if (k <= 8) begin
        re[k] = sat(rr[k], c);      any |= c;
        im[k] = sat(ri[k], c);      any |= c;
      end else begin
        re[k] = sat(rr[16-k], c);
        im[k] = sat(-ri[16-k], c);
      end
    end
    return any;
  endfunction

  // DHT from the rounded DFT parts: H_k = Re V_k - Im V_k, saturated.
  function automatic s16_t ref_dht(input s16_t re, input s16_t im, output bit clipped);
    return sat(longint'(re) - longint'(im), clipped);
  endfunction

  // Published test vector {0 1 2 3 4 5 6 7 0 1 2 3 4 5 6 7} in Q8.7.
  function automatic frame_t table1_input();
    frame_t x;
    for (int n = 0; n < 16; n++) x[n] = s16_t'((n % 8) * 128);
    return x;
  endfunction

  // Output-memory words printed in the DFT trace (k = 0..15).
  function automatic logic [31:0] fig_dft_word(input int k);
    case (k)
      0:  return 32'h1C000000;
      2:  return 32'hFC0009B0;
      4:  return 32'hFC000400;
      6:  return 32'hFC0001B0;
      8:  return 32'hFC000000;
      10: return 32'hFC00FE50;
      12: return 32'hFC00FC00;
      14: return 32'hFC00F650;
      default: return 32'h00000000;
    endcase
  endfunction

  // Output-memory words printed in the DHT trace (k = 0..15).
  function automatic logic [31:0] fig_dht_word(input int k);
    case (k)
      0:  return 32'h00001C00;
      2:  return 32'h0000F250;
      4:  return 32'h0000F800;
      6:  return 32'h0000FA50;
      8:  return 32'h0000FC00;
      10: return 32'h0000FDB0;
      12: return 32'h00000000;
      14: return 32'h000005B0;
      default: return 32'h00000000;
    endcase
  endfunction

endpackage
