// dft_computer: combinational 16-point DFT of a real sequence, computed with
// the matrix Laurent series of the DFT matrix and 12 constant multiplications.
//
// How it works.  Entry (k,n) of the DFT matrix is W^l with W = exp(-j*2pi/16)
// and l = k*n mod 16.  The bit-selection operator chi_l marks the entries whose
// exponent is l.  Grouping the exponents by their residue m modulo N/4 = 4,
// l = m + 4q, gives W^l = W^m * (-j)^q, so
//     DFT = M_0 + W^1 M_1 + W^-1 M_-1 + W^2 M_2,
//     M_m = sum_q (-j)^q chi_(m+4q),
// where every M_m has entries 0, +-1 and +-j only.  Applying M_m to the input
// needs additions and subtractions only: the sample is added to the real or
// imaginary sum, with a sign, according to q.  Each bin k is then
//     Re V_k = Re(M_0 v) + T0 + T1 + T2,   Im V_k = Im(M_0 v) + T3 + T4 + T5
//     T0 = C1 Re(M_1+M_-1)v    T1 = S1 Im(M_1-M_-1)v    T2 = C2 (Re M_2 v + Im M_2 v)
//     T3 = C1 Im(M_1+M_-1)v    T4 = -S1 Re(M_1-M_-1)v   T5 = C2 (Im M_2 v - Re M_2 v)
// with C1 = cos(pi/8), S1 = sin(pi/8), C2 = cos(pi/4), each quantised to
// 7 fraction bits.  The class m = 2 term exists because N/4 = 4 is even.
//
// Sharing.  Each term T is a constant times a signed sum of samples (its
// "form").  Across bins many forms are equal up to sign: bins 1 and 7, 3 and
// 5, 2 and 6 share theirs, and the C2 forms of all odd bins are the same.
// At elaboration, owner_of() compares the forms, computed from the chi
// functions, and gives every term the first earlier term with the same
// constant and the same form up to sign.  Only owners get an adder tree and
// a multiplier; the others take the owner's product with a sign.  For N = 16
// this leaves 12 multiplications (4 by C1, 4 by S1, 4 by C2), counted in
// N_MULT and checked at elaboration.  Bins 0..8 are computed; as the input is real,
// V_(16-k) = conj(V_k) gives bins 9..15.  Bins 0 and 8 are real, so im[0]
// and im[8] are constant zero by construction.
//
// Arithmetic: the exact sum (Q.14 after multiplication) is rounded half-up to
// 7 fraction bits once, then saturated symmetrically to +-32767; ovf is high if
// any output was clipped.  The Laurent decomposition, the 7-bit fraction and
// the count of 12 multiplications follow the published design; the sharing
// rule, rounding, saturation and the conjugate mirror are this design's own
// way of reaching them.
//
// Interface: x[n] in, re[k] and im[k] out, all signed Q8.7; purely
// combinational, no clock.
module dft_computer
  import fft_pkg::*;
#(
  parameter int unsigned COEF_FRAC = fft_pkg::FRAC_BITS,  // fraction bits of C1, S1, C2
  parameter int          C1 = 118,  // round(2^7 * cos(pi/8))
  parameter int          S1 = 49,   // round(2^7 * sin(pi/8))
  parameter int          C2 = 91    // round(2^7 * cos(pi/4))
) (
  input  sample_t [N-1:0] x,
  output sample_t [N-1:0] re,
  output sample_t [N-1:0] im,
  output logic            ovf
);

  typedef wide_t acc_t;   // 48-bit signed accumulator (fft_pkg)

  localparam int NB = N/2 + 1;   // bins computed: 0..8
  localparam int NT = 6;         // terms per bin, T0..T5

  // Class of exponent l = k*n mod 16: 0 -> m=0, 1 -> m=1, 2 -> m=2, 3 -> m=-1.
  function automatic int chi_class(input int k, input int n);
    return ((k * n) % N) % 4;
  endfunction

  // Power q of (-j) for exponent l = m + 4q.
  function automatic int chi_q(input int k, input int n);
    int l, c, m;
    l = (k * n) % N;
    c = l % 4;
    m = (c == 3) ? -1 : c;
    return ((l - m) / 4) % 4;
  endfunction

  // Contribution (-1, 0, +1) of sample n to Re and Im of M_c v in bin k.
  function automatic int chi_re(input int k, input int n);
    int q;
    q = chi_q(k, n);
    return (q == 0) ? 1 : (q == 2) ? -1 : 0;
  endfunction

  function automatic int chi_im(input int k, input int n);
    int q;
    q = chi_q(k, n);
    return (q == 3) ? 1 : (q == 1) ? -1 : 0;
  endfunction

  // Coefficient of sample n in the form of term t of bin k.
  function automatic int form_coef(input int k, input int t, input int n);
    int c, r, i;
    c = chi_class(k, n);
    r = chi_re(k, n);
    i = chi_im(k, n);
    case (t)
      0: return (c == 1 || c == 3) ? r : 0;
      1: return (c == 1) ? i : (c == 3) ? -i : 0;
      2: return (c == 2) ? r + i : 0;
      3: return (c == 1 || c == 3) ? i : 0;
      4: return (c == 1) ? -r : (c == 3) ? r : 0;
      default: return (c == 2) ? i - r : 0;
    endcase
  endfunction

  function automatic bit form_zero(input int k, input int t);
    for (int n = 0; n < N; n++) if (form_coef(k, t, n) != 0) return 1'b0;
    return 1'b1;
  endfunction

  // +1 if the forms are equal, -1 if opposite, 0 otherwise.
  function automatic int form_match(input int k1, input int t1, input int k2, input int t2);
    bit same, opp;
    same = 1'b1;
    opp  = 1'b1;
    for (int n = 0; n < N; n++) begin
      if (form_coef(k1, t1, n) !=  form_coef(k2, t2, n)) same = 1'b0;
      if (form_coef(k1, t1, n) != -form_coef(k2, t2, n)) opp  = 1'b0;
    end
    return same ? 1 : opp ? -1 : 0;
  endfunction

  // Owner of term (k,t): encoded as (bin*NT + term)*2 + negate.  A term that
  // owns itself returns its own index with negate = 0.
  function automatic int owner_of(input int k, input int t);
    for (int k2 = 0; k2 <= k; k2++) begin
      for (int t2 = 0; t2 < NT; t2++) begin
        if ((k2 < k || t2 < t) && (t2 % 3) == (t % 3) && !form_zero(k2, t2)) begin
          int s;
          s = form_match(k, t, k2, t2);
          if (s != 0) return ((k2 * NT + t2) * 2) + ((s < 0) ? 1 : 0);
        end
      end
    end
    return (k * NT + t) * 2;
  endfunction

  function automatic int count_mults();
    int cnt;
    cnt = 0;
    for (int k = 0; k < NB; k++)
      for (int t = 0; t < NT; t++)
        if (!form_zero(k, t) && owner_of(k, t) == (k * NT + t) * 2) cnt++;
    return cnt;
  endfunction

  // Number of constant multipliers built: 12 for N = 16, whatever the
  // coefficient values, since it depends only on the forms.
  localparam int N_MULT = count_mults();

  if (N_MULT != 12) begin : g_mult_count_check
    $error("dft_computer: %0d multipliers instead of 12", N_MULT);
  end

  acc_t    m0_re  [NB];       // Re(M_0 v) per bin
  acc_t    m0_im  [NB];
  acc_t    owned  [NB][NT];   // products of owner terms, Q.14 (0 elsewhere)
  acc_t    prod   [NB][NT];   // T0..T5 per bin, Q.14
  acc_t    acc_re [NB];
  acc_t    acc_im [NB];
  acc_t    rnd_re [NB];       // rounded to 7 fraction bits
  acc_t    rnd_im [NB];
  sample_t r_k    [NB];
  sample_t i_k    [NB];
  logic [NB-1:0] clip;

  // Class 0: the part of the DFT that needs no multiplication.
  always_comb begin
    for (int k = 0; k < NB; k++) begin
      m0_re[k] = '0;
      m0_im[k] = '0;
      for (int n = 0; n < N; n++) begin
        if (chi_class(k, n) == 0) begin
          m0_re[k] += acc_t'(chi_re(k, n)) * acc_t'(x[n]);
          m0_im[k] += acc_t'(chi_im(k, n)) * acc_t'(x[n]);
        end
      end
    end
  end

  // Terms: owners sum their form and multiply; the rest reuse a product.
  for (genvar k = 0; k < NB; k++) begin : g_bin
    for (genvar t = 0; t < NT; t++) begin : g_term
      localparam int OWN   = owner_of(k, t);
      localparam int OWN_K = (OWN / 2) / NT;
      localparam int OWN_T = (OWN / 2) % NT;
      localparam int COEF  = (t % 3 == 0) ? C1 : (t % 3 == 1) ? S1 : C2;
      if (form_zero(k, t)) begin : g_none
        assign owned[k][t] = '0;
        assign prod[k][t]  = '0;
      end else if (OWN == (k * NT + t) * 2) begin : g_mult
        acc_t form;
        always_comb begin
          form = '0;
          for (int n = 0; n < N; n++)
            form += acc_t'(form_coef(k, t, n)) * acc_t'(x[n]);
        end
        assign owned[k][t] = acc_t'(COEF) * form;
        assign prod[k][t]  = owned[k][t];
      end else if (OWN % 2 == 1) begin : g_neg
        assign owned[k][t] = '0;
        assign prod[k][t]  = -owned[OWN_K][OWN_T];
      end else begin : g_same
        assign owned[k][t] = '0;
        assign prod[k][t]  = owned[OWN_K][OWN_T];
      end
    end
  end

  // Sum, rounding and saturation.
  always_comb begin
    for (int k = 0; k < NB; k++) begin
      acc_re[k] = (m0_re[k] <<< COEF_FRAC) + prod[k][0] + prod[k][1] + prod[k][2];
      acc_im[k] = (m0_im[k] <<< COEF_FRAC) + prod[k][3] + prod[k][4] + prod[k][5];
      rnd_re[k] = (acc_re[k] + (acc_t'(1) <<< (COEF_FRAC - 1))) >>> COEF_FRAC;
      rnd_im[k] = (acc_im[k] + (acc_t'(1) <<< (COEF_FRAC - 1))) >>> COEF_FRAC;
      r_k[k]    = sat16(rnd_re[k]);
      i_k[k]    = sat16(rnd_im[k]);
      clip[k]   = (acc_t'(r_k[k]) != rnd_re[k]) || (acc_t'(i_k[k]) != rnd_im[k]);
    end
  end

  // Conjugate symmetry of a real input's spectrum.
  always_comb begin
    for (int k = 0; k < N; k++) begin
      if (k < NB) begin
        re[k] = r_k[k];
        im[k] = i_k[k];
      end else begin
        re[k] = r_k[N-k];
        im[k] = sat16(-rnd_im[N-k]);
      end
    end
    ovf = |clip;
  end

endmodule
