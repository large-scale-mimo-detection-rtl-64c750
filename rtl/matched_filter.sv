// matched_filter: y_w^MF / B = H_w^H y_w / B for one subcarrier.
//
// A linear array of U processing elements, one per row of H_w^H (one per
// user).  Each clock the unit takes one entry y_b of the receive vector and
// row b of H_w; PE u multiplies conj(h_bu) by y_b and adds the product to its
// multiply-accumulate register.  After B entries the sums are normalised by
// 1/B (an arithmetic shift, B a power of two) and stored in the output
// register.  Structure (U MAC PEs, one y entry per clock, 1/B scaling, 15-bit
// input and output) follows the published design; the accumulator format is
// this design's choice (22 bits, 10 fraction bits).
//
// Interface: in_valid marks an accepted (h_row, y_in) pair; an internal counter
// finds the B-th one.  Timing: ymf is updated and out_valid pulses for one
// cycle on the edge that takes the B-th pair; ymf then holds until the next
// subcarrier completes.
module matched_filter
  import mimo_pkg::*;
#(
  parameter int U = 8,
  parameter int B = 128
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  cplx_t y_in,
  input  cplx_t h_row [U],
  output logic  out_valid,
  output cplx_t ymf [U]
);

  localparam int LOG2B = $clog2(B);
  localparam int SHR   = LOG2B - (FB - GFB);
  localparam int CW    = $clog2(B + 1);

  logic [CW-1:0] cnt;
  cacc_t acc [U];
  wire last = (cnt == CW'(B - 1));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cnt       <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= in_valid && last;
      if (in_valid) cnt <= last ? '0 : cnt + 1'b1;
    end
  end

  for (genvar u = 0; u < U; u++) begin : g_pe
    always_ff @(posedge clk) begin
      if (in_valid) begin
        cprod_t pr;
        logic signed [47:0] sr, si;
        pr = cmulc(h_row[u], y_in);
        sr = 48'(pr.re >>> (2*FB - GFB)) + ((cnt == '0) ? 48'sd0 : 48'(acc[u].re));
        si = 48'(pr.im >>> (2*FB - GFB)) + ((cnt == '0) ? 48'sd0 : 48'(acc[u].im));
        acc[u].re <= sat_acc(sr);
        acc[u].im <= sat_acc(si);
        if (last) begin
          ymf[u].re <= sat_dw(48'(sat_acc(sr)) >>> SHR);
          ymf[u].im <= sat_dw(48'(sat_acc(si)) >>> SHR);
        end
      end
    end
  end

endmodule
