// gram_inverse: Gram matrix and K-term Neumann-series approximate inverse.
//
// One lower-triangular array of U*(U+1)/2 processing elements computes, per
// subcarrier w, the normalised regularised Gram matrix A_w/B and the K-term
// Neumann approximation A~^-1_{w|K}*B = sum_{n<K} (-D^-1 E)^n D^-1 * B, where
// D is the diagonal and E the off-diagonal part of A_w.  The diagonal
// elements (PE-D) own a reciprocal unit; the off-diagonal ones (PE-OD) do
// not.  The work is split into the four phases of the published architecture:
//   phase 1: B cycles, one row h_b of H_w per cycle: every PE (i,j), i>=j,
//            accumulates conj(h_bi)*h_bj.  Then the MAC result is scaled down
//            by 1/B (G/B), PE-D adds n0_scaled and the Inv unit returns
//            d_i = B / a_ii (three cycles).
//   phase 2: two cycles, P = -D^-1 E: first the lower triangle
//            P_ij = -d_i*g_ij, then the upper one P_ji = -d_j*conj(g_ij).
//   phase 3: one cycle, X = A~^-1_{|2}*B: X_ij = P_ij*d_j (i>j), X_ii = d_i.
//   phase 4: repeated K-2 times, U MAC cycles plus one store cycle:
//            X <- P*X + D^-1*B (lower triangle; X_mj for m<j is conj(X_jm)).
// K = k_terms is taken at the start of each subcarrier; K = 1 yields D^-1*B.
// Only the lower triangle of each Hermitian matrix is kept; the outputs are
// the full matrices, with the upper triangle as the conjugate.
//
// The four phases, the PE split and the 15/22-bit word lengths follow the
// published design.  Broadcasting each H row to all PEs in the same cycle
// (instead of a skewed systolic wavefront), the cycle counts of phases 2-4,
// the formats and the handshake are this design's choices.
//
// Interface: rows are taken when row_valid && row_ready.  Rows of the next
// subcarrier are accepted while the previous results are still held, except
// the last one, which waits until the results are taken (out_valid &&
// out_ready); this keeps a matched filter fed by the same row stream in step.
// Latency from the accepting edge of the last row to the edge that raises
// out_valid: 4 cycles for K = 1, 6 + (K-2)*(U+1) cycles for K >= 2.
module gram_inverse
  import mimo_pkg::*;
#(
  parameter int U = 8,    // users
  parameter int B = 128   // BS antennas (power of two)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [2:0]           k_terms,
  input  logic signed [DW-1:0] n0_scaled,   // N0/Es/B, Q2.12
  input  logic                 row_valid,
  output logic                 row_ready,
  input  cplx_t                h_row [U],
  output logic                 out_valid,
  input  logic                 out_ready,
  output cplx_t                ainv  [U][U],  // A~^-1_{|K} * B
  output cplx_t                gram  [U][U],  // G / B
  output logic signed [DW-1:0] dinv  [U]      // diag(D^-1) * B
);

  localparam int LOG2B = $clog2(B);
  localparam int SHR   = LOG2B - (FB - GFB);  // acc (GFB) / B -> FB
  localparam int CW    = $clog2(B + 1);
  localparam int UW    = $clog2(U + 1);

  initial begin
    assert (B == (1 << LOG2B)) else $error("B must be a power of two");
    assert (SHR >= 0) else $error("B too small for the chosen formats");
  end

  typedef enum logic [3:0] {
    S_ACC, S_SCALE, S_RD, S_INV, S_P2LO, S_P2UP, S_P3, S_P4MAC, S_P4ST
  } state_e;

  state_e state;
  logic [CW-1:0] row_cnt;
  logic [UW-1:0] m_cnt;
  logic [2:0]    iter_left;
  logic [2:0]    k_q;
  logic          have_out;
  logic [$clog2(U)-1:0] m_idx;

  assign m_idx = m_cnt[$clog2(U)-1:0];

  cacc_t                acc [U][U];  // lower triangle used
  cplx_t                g   [U][U];  // G/B, lower triangle
  cplx_t                p   [U][U];  // -D^-1 E, full
  cplx_t                x   [U][U];  // current approximation, lower triangle
  logic signed [DW-1:0] d   [U];
  logic [DW:0]          diag_a [U];  // a_ii/B, input of the Inv units
  logic [DW-1:0]        inv_q  [U];

  wire take_row = row_valid && row_ready;
  wire take_out = have_out && out_ready;

  assign row_ready = (state == S_ACC) &&
                     !((row_cnt == CW'(B - 1)) && have_out && !out_ready);
  assign out_valid = have_out;

  // X_mj for any m, j from the stored lower triangle
  function automatic cplx_t x_at(input int m, input int j);
    if (m >= j) return x[m][j];
    else        return conj_c(x[j][m]);
  endfunction

  // ---------------------------------------------------------------- PE-D Inv
  for (genvar i = 0; i < U; i++) begin : g_inv
    recip_unit #(.IN_W(DW+1), .IN_FB(FB), .OUT_W(DW), .OUT_FB(FB)) u_inv (
      .clk(clk), .in_val(diag_a[i]), .out_val(inv_q[i]));
  end

  // ------------------------------------------------------------- controller
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state     <= S_ACC;
      row_cnt   <= '0;
      m_cnt     <= '0;
      iter_left <= '0;
      k_q       <= 3'd3;
      have_out  <= 1'b0;
    end else begin
      if (take_out) have_out <= 1'b0;
      unique case (state)
        S_ACC: if (take_row) begin
          if (row_cnt == CW'(B - 1)) begin
            row_cnt <= '0;
            state   <= S_SCALE;
            k_q     <= (k_terms == 3'd0) ? 3'd1 : k_terms;
          end else begin
            row_cnt <= row_cnt + 1'b1;
          end
        end
        S_SCALE: state <= S_RD;                  // g, a_ii registered
        S_RD:    state <= S_INV;                 // reciprocal table read
        S_INV:   state <= (k_q == 3'd1) ? S_P3 : S_P2LO;  // d registered
        S_P2LO:  state <= S_P2UP;
        S_P2UP:  state <= S_P3;
        S_P3: begin
          if (k_q <= 3'd2) begin
            state    <= S_ACC;
            have_out <= 1'b1;
          end else begin
            iter_left <= k_q - 3'd2;
            m_cnt     <= '0;
            state     <= S_P4MAC;
          end
        end
        S_P4MAC: begin
          if (m_cnt == UW'(U - 1)) state <= S_P4ST;
          m_cnt <= m_cnt + 1'b1;
        end
        S_P4ST: begin
          m_cnt <= '0;
          if (iter_left == 3'd1) begin
            state    <= S_ACC;
            have_out <= 1'b1;
          end else begin
            iter_left <= iter_left - 1'b1;
            state     <= S_P4MAC;
          end
        end
        default: state <= S_ACC;
      endcase
    end
  end

  // --------------------------------------------------------------- PE array
  for (genvar i = 0; i < U; i++) begin : g_row
    for (genvar j = 0; j <= i; j++) begin : g_col
      if (i == j) begin : pe_d
        // MAC -> scale down (g) -> + N0/Es -> Inv (d)
        always_ff @(posedge clk) begin
          unique case (state)
            S_ACC: if (take_row) begin
              cprod_t pr;
              pr = cmulc(h_row[i], h_row[i]);
              acc[i][i].re <= sat_acc(48'(pr.re >>> (2*FB - GFB)) +
                                      ((row_cnt == '0) ? 48'sd0 : 48'(acc[i][i].re)));
              acc[i][i].im <= '0;
            end
            S_SCALE: begin
              logic signed [DW-1:0] gs;
              logic signed [47:0]   a;
              gs = sat_dw(48'(acc[i][i].re >>> SHR));
              g[i][i].re <= gs;
              g[i][i].im <= '0;
              a = 48'(gs) + 48'(n0_scaled);
              diag_a[i] <= (a <= 0) ? '0 : (DW+1)'(a);
            end
            S_INV: d[i] <= inv_q[i];
            S_P2LO: p[i][i] <= '0;
            S_P3: x[i][i] <= '{re: d[i], im: '0};
            S_P4MAC: begin
              cprod_t pr;
              pr = cmul(p[i][m_idx], x_at(int'(m_cnt), i));
              acc[i][i].re <= sat_acc(48'(pr.re >>> FB) +
                                      ((m_cnt == '0) ? 48'sd0 : 48'(acc[i][i].re)));
              acc[i][i].im <= sat_acc(48'(pr.im >>> FB) +
                                      ((m_cnt == '0) ? 48'sd0 : 48'(acc[i][i].im)));
            end
            S_P4ST: x[i][i] <= '{re: sat_dw(48'(acc[i][i].re) + 48'(d[i])), im: '0};
            default: ;
          endcase
        end
      end else begin : pe_od
        // MAC -> scale down (g) -> od
        always_ff @(posedge clk) begin
          unique case (state)
            S_ACC: if (take_row) begin
              cprod_t pr;
              pr = cmulc(h_row[i], h_row[j]);
              acc[i][j].re <= sat_acc(48'(pr.re >>> (2*FB - GFB)) +
                                      ((row_cnt == '0) ? 48'sd0 : 48'(acc[i][j].re)));
              acc[i][j].im <= sat_acc(48'(pr.im >>> (2*FB - GFB)) +
                                      ((row_cnt == '0) ? 48'sd0 : 48'(acc[i][j].im)));
            end
            S_SCALE: begin
              g[i][j].re <= sat_dw(48'(acc[i][j].re >>> SHR));
              g[i][j].im <= sat_dw(48'(acc[i][j].im >>> SHR));
            end
            S_P2LO: p[i][j] <= neg_c(prod_to_dw(rmul(d[i], g[i][j])));
            S_P2UP: p[j][i] <= neg_c(prod_to_dw(rmul(d[j], conj_c(g[i][j]))));
            S_P3:   x[i][j] <= (k_q == 3'd1) ? '0 : prod_to_dw(rmul(d[j], p[i][j]));
            S_P4MAC: begin
              cprod_t pr;
              pr = cmul(p[i][m_idx], x_at(int'(m_cnt), j));
              acc[i][j].re <= sat_acc(48'(pr.re >>> FB) +
                                      ((m_cnt == '0) ? 48'sd0 : 48'(acc[i][j].re)));
              acc[i][j].im <= sat_acc(48'(pr.im >>> FB) +
                                      ((m_cnt == '0) ? 48'sd0 : 48'(acc[i][j].im)));
            end
            S_P4ST: x[i][j] <= '{re: sat_dw(48'(acc[i][j].re)), im: sat_dw(48'(acc[i][j].im))};
            default: ;
          endcase
        end
      end
    end
  end

  // ---------------------------------------------------------------- outputs
  for (genvar i = 0; i < U; i++) begin : g_out
    assign dinv[i] = d[i];
    for (genvar j = 0; j < U; j++) begin : g_oc
      if (j <= i) begin : lo
        assign ainv[i][j] = x[i][j];
        assign gram[i][j] = g[i][j];
      end else begin : up
        assign ainv[i][j] = conj_c(x[j][i]);
        assign gram[i][j] = conj_c(g[j][i]);
      end
    end
  end

endmodule
