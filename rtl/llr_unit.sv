// llr_unit: max-log LLRs of one time-domain symbol estimate per clock.
//
// With Gray-mapped QAM the max-log LLR of bit b separates into a real-axis
// or imaginary-axis term: L(b) = rho^2 * (min_{a in O_b^0} |x - a|^2 -
// min_{a in O_b^1} |x - a|^2), x = x_hat / mu.  Since |x - a|^2 = x^2 - 2ax +
// a^2 and x^2 cancels, each minimum is taken over the lines a^2 - 2ax, whose
// slopes 2a are small constants; the difference is the piecewise-linear
// function lambda_b(x), evaluated here with constant shifts and additions
// only.  Pipeline:
//   stage 1: x_hat * (1/mu)                      (one multiplier per axis)
//   stage 2: * sqrt(N) to unit spacing of the PAM levels (+-1, +-3, ...),
//            rho^2 * 1/N  (N = 2, 10, 42 for QPSK, 16-QAM, 64-QAM)
//   stage 3: lambda_b for every bit, times rho^2/N, saturated to 8 bits.
// The LTE Gray mapping (TS 36.211) puts bits b0, b2, b4 on the real axis and
// b1, b3, b5 on the imaginary axis; b0 = 0 means a positive real part.
// The max-log formulation, scaling by 1/mu then by rho^2, the shift-and-add
// evaluation, 12-bit inputs and 8-bit outputs follow the published design;
// the pipeline split, the internal formats and the LLR format (8 bit, 2
// fraction bits, saturating; positive favours bit 1) are this design's own.
//
// Interface: in_valid with x_hat (Q2.9), rho2 (unsigned, 4 fraction bits),
// mu_inv (unsigned, 8 fraction bits) and mod; in_user/in_last are carried
// along.  Timing: fully pipelined, one symbol per clock, out_valid three
// clocks after in_valid.  llr[k] is the LLR of bit b_k; for QPSK only
// llr[0..1], for 16-QAM llr[0..3] are meaningful (the rest are zero).
module llr_unit
  import mimo_pkg::*;
#(
  parameter int UB = 3   // width of the user tag
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  input  csym_t                  x_hat,
  input  logic [SW-1:0]          rho2,
  input  logic [SW-1:0]          mu_inv,
  input  mod_e                   mod,
  input  logic [UB-1:0]          in_user,
  input  logic                   in_last,
  output logic                   out_valid,
  output logic [UB-1:0]          out_user,
  output logic                   out_last,
  output logic signed [LLRW-1:0] llr [6]
);

  localparam int XF = 8;    // fraction bits of x after stage 2
  localparam int XW = 20;

  // sqrt(N) with 10 fraction bits, 1/N with 16 fraction bits
  function automatic logic [12:0] sqrt_n(input mod_e m);
    unique case (m)
      MOD_QPSK:  return 13'd1448;   // sqrt(2)  * 1024
      MOD_QAM16: return 13'd3238;   // sqrt(10) * 1024
      default:   return 13'd6636;   // sqrt(42) * 1024
    endcase
  endfunction

  function automatic logic [16:0] inv_n(input mod_e m);
    unique case (m)
      MOD_QPSK:  return 17'd32768;  // 2^16 / 2
      MOD_QAM16: return 17'd6554;   // 2^16 / 10
      default:   return 17'd1560;   // 2^16 / 42
    endcase
  endfunction

  // PAM level (odd integer) of a Gray label on one axis:
  // label = {b0, b2, b4} (64-QAM), {b0, b2} (16-QAM), {b0} (QPSK)
  function automatic int level(input mod_e m, input int lab);
    unique case (m)
      MOD_QPSK: return (lab == 0) ? 1 : -1;
      MOD_QAM16: begin
        int mag;
        mag = (lab[0]) ? 3 : 1;
        return lab[1] ? -mag : mag;
      end
      default: begin
        int mag;
        unique case (lab[1:0])
          2'b00: mag = 3;
          2'b01: mag = 1;
          2'b10: mag = 5;
          default: mag = 7;
        endcase
        return lab[2] ? -mag : mag;
      end
    endcase
  endfunction

  // lambda for the (up to) three bits of one axis, XF fraction bits
  typedef logic signed [XW+8-1:0] lam_t;
  typedef lam_t lam3_t [3];

  function automatic lam3_t axis_lambda(input logic signed [XW-1:0] x, input mod_e m);
    lam3_t lam;
    int nb;
    lam_t best0 [3];
    lam_t best1 [3];
    nb = (m == MOD_QPSK) ? 1 : (m == MOD_QAM16) ? 2 : 3;
    for (int k = 0; k < 3; k++) begin
      best0[k] = {1'b0, {(XW+7){1'b1}}};
      best1[k] = {1'b0, {(XW+7){1'b1}}};
    end
    for (int lab = 0; lab < 8; lab++) begin
      if (lab < (1 << nb)) begin
        int a;
        lam_t f;
        a = level(m, lab);
        // a^2 - 2 a x : constant minus constant-times-x (shift and add)
        f = lam_t'(a * a) * lam_t'(1 << XF) - lam_t'(2 * a) * lam_t'(x);
        for (int k = 0; k < 3; k++) begin
          if (k < nb) begin
            // bit k of the axis is label bit nb-1-k (b0 is the MSB)
            if (lab[nb-1-k] == 1'b0) begin
              if (f < best0[k]) best0[k] = f;
            end else begin
              if (f < best1[k]) best1[k] = f;
            end
          end
        end
      end
    end
    for (int k = 0; k < 3; k++) lam[k] = (k < nb) ? best0[k] - best1[k] : '0;
    return lam;
  endfunction

  // ---------------------------------------------------------------- stage 1
  logic                    v1, v2;
  logic signed [SW+SW:0]   x1r, x1i;
  logic [SW-1:0]           r1;
  mod_e                    m1, m2;
  logic [UB-1:0]           u1, u2;
  logic                    l1, l2;
  logic signed [XW-1:0]    x2r, x2i;
  logic [31:0]             r2;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      v1 <= 1'b0; v2 <= 1'b0; out_valid <= 1'b0;
    end else begin
      v1 <= in_valid; v2 <= v1; out_valid <= v2;
    end
  end

  always_ff @(posedge clk) begin
    // stage 1: x_hat / mu, SFB + MUI_FB fraction bits
    x1r <= x_hat.re * $signed({1'b0, mu_inv});
    x1i <= x_hat.im * $signed({1'b0, mu_inv});
    r1  <= rho2;
    m1  <= mod;  u1 <= in_user;  l1 <= in_last;
    // stage 2: to unit PAM spacing, XF fraction bits
    begin
      logic signed [47:0] tr, ti;
      tr = (48'(x1r) * 48'($signed({1'b0, sqrt_n(m1)}))) >>> (SFB + MUI_FB + 10 - XF);
      ti = (48'(x1i) * 48'($signed({1'b0, sqrt_n(m1)}))) >>> (SFB + MUI_FB + 10 - XF);
      x2r <= (tr > 48'sd524287) ? 20'sd524287 : (tr < -48'sd524288) ? -20'sd524288 : XW'(tr);
      x2i <= (ti > 48'sd524287) ? 20'sd524287 : (ti < -48'sd524288) ? -20'sd524288 : XW'(ti);
    end
    r2 <= 32'(r1) * 32'(inv_n(m1));      // rho^2/N, RHO_FB + 16 fraction bits
    m2 <= m1;  u2 <= u1;  l2 <= l1;
    // stage 3: lambda and SINR scaling
    begin
      lam3_t lr, li;
      lr = axis_lambda(x2r, m2);
      li = axis_lambda(x2i, m2);
      for (int k = 0; k < 3; k++) begin
        logic signed [63:0] pr, pi;
        pr = (64'(lr[k]) * 64'(signed'({1'b0, r2}))) >>> (XF + RHO_FB + 16 - LLR_FB);
        pi = (64'(li[k]) * 64'(signed'({1'b0, r2}))) >>> (XF + RHO_FB + 16 - LLR_FB);
        llr[2*k]   <= sat_llr(48'(pr > 64'sd1000 ? 64'sd1000 : pr < -64'sd1000 ? -64'sd1000 : pr));
        llr[2*k+1] <= sat_llr(48'(pi > 64'sd1000 ? 64'sd1000 : pi < -64'sd1000 ? -64'sd1000 : pi));
      end
    end
    out_user <= u2;
    out_last <= l2;
  end

endmodule
