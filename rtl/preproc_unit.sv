// preproc_unit: one preprocessing instance of the detector (matched filter
// plus Gram-matrix / approximate-inversion array).
//
// Both units read the same stream: per subcarrier, B clock cycles each carry
// one receive-antenna sample y_b and the matching row h_b of H_w.  After the
// stream the matched filter holds y^MF/B and the array computes A~^-1*B, G/B
// and D^-1*B (see gram_inverse).  The four results leave together under a
// valid/ready handshake.  The array accepts the next subcarrier's rows while
// the results are held, except the last row, so the matched-filter register
// is never overwritten before it is taken.  The grouping of the two units
// into one replicated preprocessing instance follows the published block
// diagram; the handshake is this design's choice.
module preproc_unit
  import mimo_pkg::*;
#(
  parameter int U = 8,
  parameter int B = 128
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [2:0]           k_terms,
  input  logic signed [DW-1:0] n0_scaled,
  input  logic                 row_valid,
  output logic                 row_ready,
  input  cplx_t                h_row [U],
  input  cplx_t                y_in,
  output logic                 out_valid,
  input  logic                 out_ready,
  output cplx_t                ymf   [U],
  output cplx_t                ainv  [U][U],
  output cplx_t                gram  [U][U],
  output logic signed [DW-1:0] dinv  [U]
);

  logic take_row, mf_valid;
  assign take_row = row_valid && row_ready;

  matched_filter #(.U(U), .B(B)) u_mf (
    .clk, .rst_n, .in_valid(take_row), .y_in, .h_row,
    .out_valid(mf_valid), .ymf);

  gram_inverse #(.U(U), .B(B)) u_gi (
    .clk, .rst_n, .k_terms, .n0_scaled, .row_valid, .row_ready, .h_row,
    .out_valid, .out_ready, .ainv, .gram, .dinv);

  // the matched filter completes only when the previous results are gone
  always_ff @(posedge clk)
    if (rst_n && mf_valid) assert (!out_valid) else $error("y^MF overwritten before it was taken");

endmodule
