// sinr_unit: effective channel gain, noise-plus-interference variance and
// post-equalization SINR of every user over one SC-FDMA symbol.
//
// Per subcarrier w the unit takes A~^-1_w*B, G_w/B and D_w^-1*B and spends U
// clocks on it.  In clock c each of the U user MACs adds
// Re{(A~^-1 B)_{u,c} (G/B)_{c,u}}, so that after all L subcarriers MAC u
// holds L*mu_u = sum_w w~_{u,w}^H h_{u,w}.  A single further MAC adds, for
// user c, the low-complexity NPI term (D^-1 B)_c (G/B)_{c,c}.  After the last
// subcarrier of the symbol the unit finishes each user in turn (three clocks
// per user):
//     mu    = acc_mu / L
//     nu^2  = acc_npi / L - mu^2                (E_s = 1, clamped to > 0)
//     rho^2 = mu^2 * (1/nu^2),   mu_inv = 1/mu  (two reciprocal tables)
// and emits (user, rho^2, mu_inv).  The U+1 MACs, the NPI approximation and
// the reciprocal units follow the published design.  Dividing the NPI sum by
// L, using rho^2 = mu^2/nu^2 as in the SINR definition, the real part of mu,
// the 32-bit symbol accumulators and all formats are this design's choices.
//
// Interface: in_valid/in_ready take a subcarrier (inputs registered),
// last_sc marks the last subcarrier of a symbol.  out_valid pulses once per
// user with out_user, rho2 (unsigned, 4 fraction bits) and mu_inv (unsigned,
// 8 fraction bits); out_last marks user U-1.  in_ready is low while a
// subcarrier is in progress (except its last clock) and during the 3*U
// clocks of the finishing step.
module sinr_unit
  import mimo_pkg::*;
#(
  parameter int U = 8,
  parameter int L = 1200
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  output logic                   in_ready,
  input  logic                   last_sc,
  input  cplx_t                  ainv [U][U],
  input  cplx_t                  gram [U][U],
  input  logic signed [DW-1:0]   dinv [U],
  output logic                   out_valid,
  output logic                   out_last,
  output logic [$clog2(U)-1:0]   out_user,
  output logic [SW-1:0]          rho2,
  output logic [SW-1:0]          mu_inv
);

  localparam int  UB   = $clog2(U);
  localparam int  CW   = $clog2(U + 1);
  localparam int  AW   = 32;                        // symbol accumulators
  localparam int  LSH  = 24;
  localparam longint INVL = ((longint'(1) << LSH) + longint'(L) / 2) / longint'(L);  // 2^24/L

  typedef enum logic [2:0] {S_IDLE, S_MAC, S_F0, S_F1, S_F2} state_e;
  state_e state;

  cplx_t a_q [U][U];
  cplx_t g_q [U][U];
  logic signed [DW-1:0] d_q [U];
  logic last_q, first_sc;
  logic [CW-1:0] cnt;
  logic [UB-1:0] col, fu;
  logic signed [AW-1:0] acc_mu  [U];
  logic signed [AW-1:0] acc_npi [U];

  logic signed [31:0] mu_q, nu2_q;
  logic [15:0]        mu_in, nu_in;
  logic [23:0]        rnu;
  logic [SW-1:0]      rmu;

  assign col = cnt[UB-1:0];

  wire mac_end = (state == S_MAC) && (cnt == CW'(U - 1));
  assign in_ready = (state == S_IDLE) || (mac_end && !last_q);
  wire take_in = in_valid && in_ready;

  always_ff @(posedge clk) begin
    if (take_in) begin
      a_q    <= ainv;
      g_q    <= gram;
      d_q    <= dinv;
      last_q <= last_sc;
    end
  end

  // ----------------------------------------------------------- controller
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      cnt       <= '0;
      fu        <= '0;
      first_sc  <= 1'b1;
      out_valid <= 1'b0;
      out_last  <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      out_last  <= 1'b0;
      unique case (state)
        S_IDLE: if (take_in) begin state <= S_MAC; cnt <= '0; end
        S_MAC: begin
          if (mac_end) begin
            first_sc <= 1'b0;
            cnt      <= '0;
            if (last_q)       begin state <= S_F0; fu <= '0; end
            else if (!take_in) state <= S_IDLE;
          end else cnt <= cnt + 1'b1;
        end
        S_F0: state <= S_F1;
        S_F1: state <= S_F2;
        S_F2: begin
          out_valid <= 1'b1;
          out_user  <= fu;
          out_last  <= (fu == UB'(U - 1));
          if (fu == UB'(U - 1)) begin
            state    <= S_IDLE;
            first_sc <= 1'b1;
          end else begin
            fu    <= fu + 1'b1;
            state <= S_F0;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // ------------------------------------------------------ U + 1 MAC units
  for (genvar u = 0; u < U; u++) begin : g_mu
    always_ff @(posedge clk) begin
      if (state == S_MAC) begin
        logic signed [PW-1:0] rr, ii;
        logic signed [AW-1:0] base_mu, base_npi;
        rr = a_q[u][col].re * g_q[col][u].re;
        ii = a_q[u][col].im * g_q[col][u].im;
        base_mu  = (first_sc && cnt == '0) ? '0 : acc_mu[u];
        acc_mu[u] <= base_mu + AW'((rr - ii) >>> FB);
        if (col == UB'(u)) begin
          logic signed [PW-1:0] dn;
          dn = d_q[u] * g_q[u][u].re;
          base_npi = first_sc ? '0 : acc_npi[u];
          acc_npi[u] <= base_npi + AW'(dn >>> FB);
        end
      end
    end
  end

  // ------------------------------------------------- per-user final step
  always_ff @(posedge clk) begin
    if (state == S_F0) begin
      logic signed [63:0] m, n, m2;
      m  = (64'(acc_mu[fu])  * 64'(INVL)) >>> LSH;   // mu, 12 fraction bits
      n  = (64'(acc_npi[fu]) * 64'(INVL)) >>> LSH;
      m2 = (m * m) >>> FB;
      mu_q  <= (m < 1) ? 32'sd1 : 32'(m);
      nu2_q <= (n - m2 < 1) ? 32'sd1 : 32'(n - m2);
    end
  end

  assign mu_in = (mu_q > 32'sd65535) ? 16'hFFFF : 16'(mu_q);
  assign nu_in = (nu2_q > 32'sd65535) ? 16'hFFFF : 16'(nu2_q);

  recip_unit #(.IN_W(16), .IN_FB(FB), .OUT_W(24), .OUT_FB(FB)) u_rnu (
    .clk, .in_val(nu_in), .out_val(rnu));
  recip_unit #(.IN_W(16), .IN_FB(FB), .OUT_W(SW), .OUT_FB(MUI_FB)) u_rmu (
    .clk, .in_val(mu_in), .out_val(rmu));

  always_ff @(posedge clk) begin
    if (state == S_F2) begin
      logic signed [63:0] m2, r;
      m2 = (64'(mu_q) * 64'(mu_q)) >>> FB;           // mu^2, 12 fraction bits
      r  = (m2 * 64'(signed'({1'b0, rnu}))) >>> (2*FB - RHO_FB);
      rho2   <= sat_usw(48'(r > 64'sd4095 ? 64'sd4095 : r));
      mu_inv <= rmu;
    end
  end

endmodule
