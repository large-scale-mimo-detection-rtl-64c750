// mimo_pkg: word lengths, complex fixed-point types and arithmetic helpers
// shared by all units of the large-scale MIMO soft-output detector.
//
// Word lengths follow the published fixed-point design: 15-bit channel,
// receive-vector, noise and inversion words; 22-bit multiply-accumulate
// registers; 12-bit equalized symbols, SINR values and IFFT data; 8-bit LLRs.
// All widths refer to one real or imaginary part.  The positions of the binary
// points are this design's own choice:
//   15-bit words  : Q2.12 (FB = 12)  - H, y, y^MF/B, G/B, A^-1*B, D^-1*B
//   Gram/MF MACs  : 10 fraction bits (GFB) in 22 bits, room for B*|h|^2
//   12-bit symbols: Q2.9  (SFB = 9)  - s_hat, x_hat
//   rho^2         : unsigned, 4 fraction bits; 1/mu: unsigned, 8 fraction bits
//   LLR           : signed 8 bit, 2 fraction bits, saturating
// Arithmetic right shifts truncate (round towards minus infinity); every
// narrowing step saturates.
package mimo_pkg;

  localparam int DW     = 15;  // inversion-side word length
  localparam int FB     = 12;  // fraction bits of DW words
  localparam int ACC_W  = 22;  // MAC register width
  localparam int GFB    = 10;  // fraction bits of the Gram / MF accumulators
  localparam int SW     = 12;  // symbol / SINR word length
  localparam int SFB    = 9;   // fraction bits of symbols
  localparam int RHO_FB = 4;   // fraction bits of rho^2
  localparam int MUI_FB = 8;   // fraction bits of 1/mu
  localparam int LLRW   = 8;   // LLR word length
  localparam int LLR_FB = 2;   // fraction bits of LLRs
  localparam int PW     = 2*DW + 1;  // complex product width

  typedef struct packed {
    logic signed [DW-1:0] re;
    logic signed [DW-1:0] im;
  } cplx_t;

  typedef struct packed {
    logic signed [SW-1:0] re;
    logic signed [SW-1:0] im;
  } csym_t;

  typedef struct packed {
    logic signed [ACC_W-1:0] re;
    logic signed [ACC_W-1:0] im;
  } cacc_t;

  typedef struct packed {
    logic signed [PW-1:0] re;
    logic signed [PW-1:0] im;
  } cprod_t;

  // modulation selector of the LLR unit (LTE Gray mappings)
  typedef enum logic [1:0] {
    MOD_QPSK  = 2'd0,
    MOD_QAM16 = 2'd1,
    MOD_QAM64 = 2'd2
  } mod_e;

  function automatic logic signed [DW-1:0] sat_dw(input logic signed [47:0] v);
    if (v > 48'sd16383)       return 15'sd16383;
    else if (v < -48'sd16384) return -15'sd16384;
    else                      return v[DW-1:0];
  endfunction

  function automatic logic signed [ACC_W-1:0] sat_acc(input logic signed [47:0] v);
    if (v > 48'sd2097151)       return 22'sd2097151;
    else if (v < -48'sd2097152) return -22'sd2097152;
    else                        return v[ACC_W-1:0];
  endfunction

  function automatic logic signed [SW-1:0] sat_sw(input logic signed [47:0] v);
    if (v > 48'sd2047)       return 12'sd2047;
    else if (v < -48'sd2048) return -12'sd2048;
    else                     return v[SW-1:0];
  endfunction

  function automatic logic [SW-1:0] sat_usw(input logic signed [47:0] v);
    if (v > 48'sd4095)   return 12'd4095;
    else if (v < 48'sd0) return 12'd0;
    else                 return v[SW-1:0];
  endfunction

  function automatic logic signed [LLRW-1:0] sat_llr(input logic signed [47:0] v);
    if (v > 48'sd127)       return 8'sd127;
    else if (v < -48'sd128) return -8'sd128;
    else                    return v[LLRW-1:0];
  endfunction

  // a * b
  function automatic cprod_t cmul(input cplx_t a, input cplx_t b);
    logic signed [PW-1:0] rr, ii, ri, ir;
    cprod_t p;
    rr = a.re * b.re;  ii = a.im * b.im;
    ri = a.re * b.im;  ir = a.im * b.re;
    p.re = rr - ii;
    p.im = ri + ir;
    return p;
  endfunction

  // conj(a) * b
  function automatic cprod_t cmulc(input cplx_t a, input cplx_t b);
    logic signed [PW-1:0] rr, ii, ri, ir;
    cprod_t p;
    rr = a.re * b.re;  ii = a.im * b.im;
    ri = a.re * b.im;  ir = a.im * b.re;
    p.re = rr + ii;
    p.im = ri - ir;
    return p;
  endfunction

  // real r times complex b
  function automatic cprod_t rmul(input logic signed [DW-1:0] r, input cplx_t b);
    cprod_t p;
    p.re = r * b.re;
    p.im = r * b.im;
    return p;
  endfunction

  // product with 2*FB fraction bits back to a saturated Q2.12 word
  function automatic cplx_t prod_to_dw(input cprod_t p);
    cplx_t c;
    c.re = sat_dw(48'(p.re >>> FB));
    c.im = sat_dw(48'(p.im >>> FB));
    return c;
  endfunction

  function automatic cplx_t conj_c(input cplx_t a);
    cplx_t c;
    c.re = a.re;
    c.im = sat_dw(-48'(a.im));
    return c;
  endfunction

  function automatic cplx_t neg_c(input cplx_t a);
    cplx_t c;
    c.re = sat_dw(-48'(a.re));
    c.im = sat_dw(-48'(a.im));
    return c;
  endfunction

endpackage
