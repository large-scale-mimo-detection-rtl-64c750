// Self-checking testbench of sinr_unit (U=4, L=16): three SC-FDMA symbols of
// random per-subcarrier A~^-1*B, G/B and D^-1*B.  mu, the NPI, rho^2 and 1/mu
// are recomputed here in floating point from the same quantised inputs and
// compared (relative tolerance); checks that the accumulators restart every
// symbol, that a subcarrier is taken every U clocks and that the results of
// the U users follow 3 clocks apart.
module tb_sinr_unit;
  import mimo_pkg::*;
  localparam int U = 4, L = 16;
  localparam real SC = 4096.0;
  logic clk = 0, rst_n = 0, in_valid = 0, in_ready, last_sc = 0;
  cplx_t ainv [U][U], gram [U][U];
  logic signed [DW-1:0] dinv [U];
  logic out_valid, out_last;
  logic [$clog2(U)-1:0] out_user;
  logic [SW-1:0] rho2, mu_inv;

  sinr_unit #(.U(U), .L(L)) dut (.*);

  always #5 clk = ~clk;
  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc++;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  real mu_s [U], npi_s [U];
  real exp_rho [U], exp_mui [U];
  int  nout = 0, last_out_cyc = 0, sym_out = 0;

  always @(posedge clk) if (rst_n && out_valid) begin
    real r, m;
    r = real'(rho2) / 16.0;
    m = real'(mu_inv) / 256.0;
    checks += 3;
    if (int'(out_user) != nout % U) begin failures++; $display("FAIL user order"); end
    if (r > exp_rho[out_user]*1.03 + 0.07 || r < exp_rho[out_user]*0.97 - 0.07) begin
      failures++; $display("FAIL rho2 user %0d: %f expected %f", out_user, r, exp_rho[out_user]);
    end
    if (m > exp_mui[out_user]*1.01 + 0.005 || m < exp_mui[out_user]*0.99 - 0.005) begin
      failures++; $display("FAIL mu_inv user %0d: %f expected %f", out_user, m, exp_mui[out_user]);
    end
    if (nout % U != 0) begin
      checks++;
      if (cyc - last_out_cyc != 3) begin failures++; $display("FAIL spacing %0d", cyc - last_out_cyc); end
    end
    if (out_last) sym_out++;
    last_out_cyc = cyc;
    nout++;
  end

  function automatic real q(input real v);
    return real'(int'(v * SC)) / SC;
  endfunction

  initial begin
    int t0, t1;
    for (int i = 0; i < U; i++) begin
      dinv[i] = '0;
      for (int j = 0; j < U; j++) begin ainv[i][j] = '0; gram[i][j] = '0; end
    end
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int s = 0; s < 3; s++) begin
      for (int u = 0; u < U; u++) begin mu_s[u] = 0; npi_s[u] = 0; end
      for (int w = 0; w < L; w++) begin
        real ar [U][U], ai [U][U], gr [U][U], gi [U][U], dd [U];
        for (int i = 0; i < U; i++) begin
          gr[i][i] = q(1.0 + real'($urandom_range(0, 2000)) / 10000.0);
          gi[i][i] = 0;
          ar[i][i] = q(0.75 + real'($urandom_range(0, 1000)) / 10000.0);
          ai[i][i] = 0;
          dd[i]    = q(1.0 / (gr[i][i] + 0.1));
          for (int j = 0; j < i; j++) begin
            gr[i][j] = q(real'($urandom_range(0, 2000)) / 10000.0 - 0.1);
            gi[i][j] = q(real'($urandom_range(0, 2000)) / 10000.0 - 0.1);
            ar[i][j] = q(real'($urandom_range(0, 2000)) / 10000.0 - 0.1);
            ai[i][j] = q(real'($urandom_range(0, 2000)) / 10000.0 - 0.1);
            gr[j][i] = gr[i][j]; gi[j][i] = -gi[i][j];
            ar[j][i] = ar[i][j]; ai[j][i] = -ai[i][j];
          end
        end
        for (int u = 0; u < U; u++) begin
          for (int c = 0; c < U; c++) mu_s[u] += ar[u][c]*gr[c][u] - ai[u][c]*gi[c][u];
          npi_s[u] += dd[u] * gr[u][u];
        end
        // inputs change at the falling edge, ready is sampled there too
        @(negedge clk);
        in_valid = 1;
        last_sc  = (w == L - 1);
        for (int i = 0; i < U; i++) begin
          dinv[i] = DW'(int'(dd[i]*SC));
          for (int j = 0; j < U; j++) begin
            ainv[i][j].re = DW'(int'(ar[i][j]*SC)); ainv[i][j].im = DW'(int'(ai[i][j]*SC));
            gram[i][j].re = DW'(int'(gr[i][j]*SC)); gram[i][j].im = DW'(int'(gi[i][j]*SC));
          end
        end
        while (!in_ready) @(negedge clk);
        @(posedge clk);
        if (w == 0) t0 = cyc;
        if (w == L - 1) t1 = cyc;
      end
      #1 in_valid = 0;
      checks++;
      if (t1 - t0 != (L - 1) * U) begin failures++; $display("FAIL rate: %0d clocks", t1 - t0); end
      for (int u = 0; u < U; u++) begin
        real m, n2;
        m  = mu_s[u] / L;
        n2 = npi_s[u] / L - m*m;
        exp_rho[u] = (m*m/n2 > 255.0) ? 255.9 : m*m/n2;
        exp_mui[u] = 1.0 / m;
      end
      wait (sym_out == s + 1);
      @(posedge clk);
    end
    checks++;
    if (nout != 3 * U) begin failures++; $display("FAIL outputs %0d", nout); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
