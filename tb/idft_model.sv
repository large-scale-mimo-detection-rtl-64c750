// idft_model: behavioural model of the per-user inverse DFT that turns the
// equalized frequency-domain symbols of one user back into SC-FDMA time
// samples.  In the detector this is a vendor transform core, so the model is
// for simulation only: it uses real arithmetic and is not synthesizable.
//
// Interface: one user block of L frequency samples enters serially under a
// valid/ready handshake (in_first/in_last frame it, in_user tags it).  After
// in_last the model computes x[n] = 1/sqrt(L) * sum_k X[k] exp(+j 2 pi k n / L)
// and, GAP clocks later, streams the L results out one per clock with
// out_user and out_last; the output cannot be stalled.  in_ready is low while
// a block is being sent out, so one block is in flight at a time.
// Results are rounded to the symbol format (SFB fraction bits) and saturated.
module idft_model
  import mimo_pkg::*;
#(
  parameter int U   = 8,
  parameter int L   = 1200,
  parameter int GAP = 4
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  output logic                 in_ready,
  input  csym_t                in_data,
  input  logic [$clog2(U)-1:0] in_user,
  input  logic                 in_first,
  input  logic                 in_last,
  output logic                 out_valid,
  output csym_t                out_data,
  output logic [$clog2(U)-1:0] out_user,
  output logic                 out_last
);
  localparam real PI = 3.14159265358979323846;
  localparam real SC = real'(1 << SFB);

  real xr [L], xi [L], tr [L], ti [L];
  int  wr, rd, wait_cnt;
  logic busy;
  logic [$clog2(U)-1:0] user_q;

  assign in_ready = rst_n && !busy;

  function automatic logic signed [SW-1:0] q(input real v);
    real s = v * SC;
    if (s > real'((1 << (SW - 1)) - 1)) return SW'((1 << (SW - 1)) - 1);
    if (s < -real'(1 << (SW - 1))) return SW'(-(1 << (SW - 1)));
    return SW'($rtoi(s < 0 ? s - 0.5 : s + 0.5));
  endfunction

  always @(posedge clk) begin
    if (!rst_n) begin
      busy <= 0; wr = 0; rd = 0; wait_cnt = 0;
      out_valid <= 0; out_last <= 0; out_user <= '0; out_data <= '0; user_q <= '0;
    end else begin
      out_valid <= 0; out_last <= 0;
      if (in_valid && in_ready) begin
        if (in_first) wr = 0;
        xr[wr] = real'(in_data.re) / SC;
        xi[wr] = real'(in_data.im) / SC;
        wr++;
        if (in_last) begin
          assert (wr == L) else $error("IDFT block of %0d samples", wr);
          for (int n = 0; n < L; n++) begin
            tr[n] = 0.0; ti[n] = 0.0;
            for (int k = 0; k < L; k++) begin
              real a;
              a = 2.0 * PI * real'((k * n) % L) / real'(L);
              tr[n] += xr[k] * $cos(a) - xi[k] * $sin(a);
              ti[n] += xr[k] * $sin(a) + xi[k] * $cos(a);
            end
            tr[n] /= $sqrt(real'(L)); ti[n] /= $sqrt(real'(L));
          end
          busy <= 1; rd = 0; wait_cnt = GAP; user_q <= in_user;
        end
      end else if (busy) begin
        if (wait_cnt > 0) wait_cnt--;
        else begin
          out_valid   <= 1;
          out_data.re <= q(tr[rd]);
          out_data.im <= q(ti[rd]);
          out_user    <= user_q;
          out_last    <= (rd == L - 1);
          rd++;
          if (rd == L) busy <= 0;
        end
      end
    end
  end
endmodule
