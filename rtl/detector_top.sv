// detector_top: soft-output linear MMSE detector for the SC-FDMA uplink of a
// large-scale MIMO base station (B antennas, U single-antenna users).
//
// Data flow (one SC-FDMA symbol = L subcarriers):
//   preprocessing  NPRE replicated preproc_unit instances.  Subcarrier w is
//                  handled by instance w mod NPRE (w counts subcarriers
//                  continuously across symbols); each reads B rows of H_w and
//                  B samples of y_w and returns y^MF/B, the K-term Neumann
//                  inverse A~^-1*B, G/B and D^-1*B.
//   subcarrier     the results are collected in subcarrier order and given
//   processing     at the same time to the equalizer (s_hat_w, U clocks) and
//                  to the SINR unit (accumulates mu and the NPI over the
//                  symbol; after its last subcarrier returns rho^2 and 1/mu).
//   buffers        the data buffer turns the per-subcarrier symbols into
//                  per-user streams; the SINR buffer keeps rho^2, 1/mu.  A
//                  symbol is released to the IFFT once its SINR values exist.
//   user           the inverse DFT (outside this module: ifft_in_* leaves,
//   processing     ifft_out_* returns, serial, tagged with the user) and the
//                  LLR unit, which reads rho^2 and 1/mu of the tagged user.
// The partition, the replication of the preprocessing, the order of
// operations and the word lengths follow the published architecture.  The
// inverse DFT is a vendor core there and is therefore not part of this
// module.  Handshakes, round-robin assignment and buffer organisation are
// this design's choices.  k_terms and mod are expected to stay constant
// during a symbol; k_terms is sampled per subcarrier.
//
// Timing: a preprocessing instance needs B clocks of input plus 6 + (K-2)*(U+1)
// clocks of computation per subcarrier; subcarrier processing needs U clocks
// per subcarrier; the LLR unit takes one IFFT sample per clock (3-clock
// latency).  The IFFT output stream cannot be stalled; it must deliver each
// symbol before the SINR values of the symbol after next are written.
module detector_top
  import mimo_pkg::*;
#(
  parameter int U    = 8,     // users
  parameter int B    = 128,   // base-station antennas
  parameter int L    = 1200,  // subcarriers per SC-FDMA symbol
  parameter int NPRE = 8      // preprocessing instances
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [2:0]             k_terms,
  input  logic signed [DW-1:0]   n0_scaled,
  input  mod_e                   mod,
  // preprocessing inputs, one stream per instance
  input  logic                   pre_row_valid [NPRE],
  output logic                   pre_row_ready [NPRE],
  input  cplx_t                  pre_h_row     [NPRE][U],
  input  cplx_t                  pre_y         [NPRE],
  // to the inverse DFT
  output logic                   ifft_in_valid,
  input  logic                   ifft_in_ready,
  output csym_t                  ifft_in_data,
  output logic [$clog2(U)-1:0]   ifft_in_user,
  output logic                   ifft_in_first,
  output logic                   ifft_in_last,
  // from the inverse DFT
  input  logic                   ifft_out_valid,
  input  csym_t                  ifft_out_data,
  input  logic [$clog2(U)-1:0]   ifft_out_user,
  input  logic                   ifft_out_last,
  // soft outputs
  output logic                   llr_valid,
  output logic [$clog2(U)-1:0]   llr_user,
  output logic                   llr_last,
  output logic signed [LLRW-1:0] llr [6]
);

  localparam int UB = $clog2(U);
  localparam int PB = (NPRE > 1) ? $clog2(NPRE) : 1;
  localparam int LA = $clog2(L + 1);

  // ---------------------------------------------------------- preprocessing
  logic                 pre_out_valid [NPRE];
  logic                 pre_out_ready [NPRE];
  cplx_t                pre_ymf  [NPRE][U];
  cplx_t                pre_ainv [NPRE][U][U];
  cplx_t                pre_gram [NPRE][U][U];
  logic signed [DW-1:0] pre_dinv [NPRE][U];

  for (genvar k = 0; k < NPRE; k++) begin : g_pre
    preproc_unit #(.U(U), .B(B)) u_pre (
      .clk, .rst_n, .k_terms, .n0_scaled,
      .row_valid(pre_row_valid[k]), .row_ready(pre_row_ready[k]),
      .h_row(pre_h_row[k]), .y_in(pre_y[k]),
      .out_valid(pre_out_valid[k]), .out_ready(pre_out_ready[k]),
      .ymf(pre_ymf[k]), .ainv(pre_ainv[k]), .gram(pre_gram[k]), .dinv(pre_dinv[k]));
  end

  // -------------------------------------------- collection in subcarrier order
  logic [PB-1:0] rr;
  logic [LA-1:0] sc_cnt;
  logic          eq_in_ready, sinr_in_ready, fire;

  assign fire = pre_out_valid[rr] && eq_in_ready && sinr_in_ready;

  always_comb
    for (int k = 0; k < NPRE; k++) pre_out_ready[k] = fire && (rr == PB'(k));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rr     <= '0;
      sc_cnt <= '0;
    end else if (fire) begin
      rr     <= (rr == PB'(NPRE - 1)) ? '0 : rr + 1'b1;
      sc_cnt <= (sc_cnt == LA'(L - 1)) ? '0 : sc_cnt + 1'b1;
    end
  end

  // ------------------------------------------------- subcarrier processing
  logic  eq_out_valid, eq_out_ready;
  csym_t s_hat [U];

  equalizer #(.U(U)) u_eq (
    .clk, .rst_n, .in_valid(fire), .in_ready(eq_in_ready),
    .ainv(pre_ainv[rr]), .ymf(pre_ymf[rr]),
    .out_valid(eq_out_valid), .out_ready(eq_out_ready), .s_hat);

  logic          sinr_valid, sinr_last;
  logic [UB-1:0] sinr_user;
  logic [SW-1:0] sinr_rho2, sinr_mu_inv;

  sinr_unit #(.U(U), .L(L)) u_sinr (
    .clk, .rst_n, .in_valid(fire), .in_ready(sinr_in_ready),
    .last_sc(sc_cnt == LA'(L - 1)),
    .ainv(pre_ainv[rr]), .gram(pre_gram[rr]), .dinv(pre_dinv[rr]),
    .out_valid(sinr_valid), .out_last(sinr_last), .out_user(sinr_user),
    .rho2(sinr_rho2), .mu_inv(sinr_mu_inv));

  // ---------------------------------------------------------------- buffers
  logic [LA-1:0] wr_cnt;
  logic          db_wr_ready;

  assign eq_out_ready = db_wr_ready;

  always_ff @(posedge clk) begin
    if (!rst_n) wr_cnt <= '0;
    else if (eq_out_valid && db_wr_ready)
      wr_cnt <= (wr_cnt == LA'(L - 1)) ? '0 : wr_cnt + 1'b1;
  end

  data_buffer #(.U(U), .L(L)) u_db (
    .clk, .rst_n, .wr_en(eq_out_valid), .wr_ready(db_wr_ready),
    .wr_last(wr_cnt == LA'(L - 1)), .wr_data(s_hat), .commit(sinr_valid && sinr_last),
    .rd_valid(ifft_in_valid), .rd_ready(ifft_in_ready), .rd_data(ifft_in_data),
    .rd_user(ifft_in_user), .rd_first(ifft_in_first), .rd_last(ifft_in_last));

  logic [SW-1:0] buf_rho2, buf_mu_inv;

  sinr_buffer #(.U(U)) u_sb (
    .clk, .rst_n, .wr_en(sinr_valid), .wr_last(sinr_last), .wr_user(sinr_user),
    .wr_rho2(sinr_rho2), .wr_mu_inv(sinr_mu_inv),
    .rd_done(ifft_out_valid && ifft_out_last && ifft_out_user == UB'(U - 1)),
    .rd_user(ifft_out_user), .rd_rho2(buf_rho2), .rd_mu_inv(buf_mu_inv));

  // ------------------------------------------------------------------- LLR
  llr_unit #(.UB(UB)) u_llr (
    .clk, .rst_n, .in_valid(ifft_out_valid), .x_hat(ifft_out_data),
    .rho2(buf_rho2), .mu_inv(buf_mu_inv), .mod,
    .in_user(ifft_out_user), .in_last(ifft_out_last),
    .out_valid(llr_valid), .out_user(llr_user), .out_last(llr_last), .llr);

endmodule
