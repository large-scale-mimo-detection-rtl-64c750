// equalizer: s_hat_w = A~^-1_w y^MF_w for one subcarrier.
//
// A linear array of U multiply-accumulate units.  In clock c (c = 0..U-1) the
// unit takes column c of the normalised inverse A~^-1*B, multiplies it by the
// entry c of y^MF/B and adds the scaled column to the U accumulators; the
// scaling by B cancels.  After U clocks the sums are quantised to 12-bit
// symbols (Q2.9) and held in the output register.  Structure and word
// lengths (15-bit inputs, 12-bit output) follow the published design; the
// accumulator format and the handshake are this design's choice.
//
// Interface: in_valid/in_ready take a subcarrier (the inputs are registered
// on acceptance), out_valid/out_ready hand the U symbols on.  Timing: a new
// subcarrier can be accepted every U clocks; s_hat appears on the edge that
// ends the U-th MAC cycle, provided the output register is free.
module equalizer
  import mimo_pkg::*;
#(
  parameter int U = 8
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  output logic  in_ready,
  input  cplx_t ainv [U][U],
  input  cplx_t ymf  [U],
  output logic  out_valid,
  input  logic  out_ready,
  output csym_t s_hat [U]
);

  localparam int CW = $clog2(U + 1);

  cplx_t a_q [U][U];
  cplx_t y_q [U];
  cacc_t acc [U];
  logic [CW-1:0] cnt;
  logic [$clog2(U)-1:0] col;
  logic busy;

  assign col = cnt[$clog2(U)-1:0];

  wire out_free  = !out_valid || out_ready;
  wire finishing = busy && (cnt == CW'(U - 1)) && out_free;
  assign in_ready = !busy || finishing;
  wire take_in   = in_valid && in_ready;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      cnt       <= '0;
      out_valid <= 1'b0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (finishing) begin
        out_valid <= 1'b1;
        busy      <= 1'b0;
      end else if (busy && cnt != CW'(U - 1)) begin
        cnt <= cnt + 1'b1;
      end
      if (take_in) begin
        busy <= 1'b1;
        cnt  <= '0;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (take_in) begin
      a_q <= ainv;
      y_q <= ymf;
    end
  end

  for (genvar i = 0; i < U; i++) begin : g_mac
    always_ff @(posedge clk) begin
      if (busy && (cnt != CW'(U - 1) || finishing)) begin
        cprod_t pr;
        logic signed [47:0] sr, si;
        pr = cmul(a_q[i][col], y_q[col]);
        sr = 48'(pr.re >>> FB) + ((cnt == '0) ? 48'sd0 : 48'(acc[i].re));
        si = 48'(pr.im >>> FB) + ((cnt == '0) ? 48'sd0 : 48'(acc[i].im));
        acc[i].re <= sat_acc(sr);
        acc[i].im <= sat_acc(si);
        if (finishing) begin
          s_hat[i].re <= sat_sw(48'(sat_acc(sr)) >>> (FB - SFB));
          s_hat[i].im <= sat_sw(48'(sat_acc(si)) >>> (FB - SFB));
        end
      end
    end
  end

endmodule
