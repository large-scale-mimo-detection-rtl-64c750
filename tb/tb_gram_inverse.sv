// Self-checking testbench of gram_inverse.  Random Gaussian-like channels
// (U=4 users, B=32 antennas) are streamed row by row; the normalised Gram
// matrix G/B, D^-1*B and the K-term Neumann approximation for K = 1..4 are
// recomputed here in floating point and compared with the fixed-point outputs
// within a tolerance.  Also checks the B-cycle input phase, the latency from
// the last row to out_valid (out_valid is seen 5 clock edges after the last row for K = 1 and
// 7 + (K-2)*(U+1) for K >= 2)
// and that the result is held while out_ready is low.
module tb_gram_inverse;
  import mimo_pkg::*;
  localparam int U = 4;
  localparam int B = 32;
  localparam real SC = 4096.0;

  logic clk = 0, rst_n = 0;
  logic [2:0] k_terms;
  logic signed [DW-1:0] n0_scaled;
  logic row_valid, row_ready, out_valid, out_ready;
  cplx_t h_row [U];
  cplx_t ainv [U][U], gram [U][U];
  logic signed [DW-1:0] dinv [U];

  gram_inverse #(.U(U), .B(B)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  real hr [B][U], hi [B][U];
  real gr [U][U], gi [U][U];
  real pr_ [U][U], pi_ [U][U];
  real xr [U][U], xi [U][U], tr [U][U], ti [U][U];
  real dd [U];

  function automatic real gauss();
    real s = 0.0;
    for (int k = 0; k < 12; k++) s += real'($urandom_range(0, 65535)) / 65536.0;
    return s - 6.0;
  endfunction

  task automatic check(input string what, input real got, input real exp, input real tol);
    checks++;
    if (!(got - exp <= tol && exp - got <= tol)) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %f expected %f", what, got, exp);
    end
  endtask

  task automatic run(input int K, input real n0, input bit stall);
    int lat;
    // channel
    for (int b = 0; b < B; b++)
      for (int u = 0; u < U; u++) begin
        hr[b][u] = real'(int'(gauss() * 0.7071 * SC)) / SC;
        hi[b][u] = real'(int'(gauss() * 0.7071 * SC)) / SC;
      end
    // reference: G/B, d, P, Neumann
    for (int i = 0; i < U; i++)
      for (int j = 0; j < U; j++) begin
        gr[i][j] = 0; gi[i][j] = 0;
        for (int b = 0; b < B; b++) begin
          gr[i][j] += hr[b][i]*hr[b][j] + hi[b][i]*hi[b][j];
          gi[i][j] += hr[b][i]*hi[b][j] - hi[b][i]*hr[b][j];
        end
        gr[i][j] /= B; gi[i][j] /= B;
      end
    for (int i = 0; i < U; i++) dd[i] = 1.0 / (gr[i][i] + n0);
    for (int i = 0; i < U; i++)
      for (int j = 0; j < U; j++) begin
        pr_[i][j] = (i == j) ? 0.0 : -dd[i]*gr[i][j];
        pi_[i][j] = (i == j) ? 0.0 : -dd[i]*gi[i][j];
        xr[i][j]  = (i == j) ? dd[i] : 0.0;
        xi[i][j]  = 0.0;
      end
    for (int k = 1; k < K; k++) begin
      for (int i = 0; i < U; i++)
        for (int j = 0; j < U; j++) begin
          tr[i][j] = (i == j) ? dd[i] : 0.0; ti[i][j] = 0.0;
          for (int m = 0; m < U; m++) begin
            tr[i][j] += pr_[i][m]*xr[m][j] - pi_[i][m]*xi[m][j];
            ti[i][j] += pr_[i][m]*xi[m][j] + pi_[i][m]*xr[m][j];
          end
        end
      xr = tr; xi = ti;
    end
    // drive
    k_terms   <= 3'(K);
    n0_scaled <= DW'(int'(n0 * SC));
    for (int b = 0; b < B; b++) begin
      row_valid <= 1'b1;
      for (int u = 0; u < U; u++) begin
        h_row[u].re <= DW'(int'(hr[b][u] * SC));
        h_row[u].im <= DW'(int'(hi[b][u] * SC));
      end
      @(posedge clk);
      checks++;
      if (!row_ready) begin failures++; $display("FAIL row %0d not accepted at once", b); end
    end
    row_valid <= 1'b0;
    lat = 0;
    while (!out_valid) begin @(posedge clk); lat++; end
    checks++;
    if (lat != ((K == 1) ? 5 : 7 + (K-2)*(U+1))) begin
      failures++; $display("FAIL latency K=%0d: %0d", K, lat);
    end
    if (stall) begin
      repeat (3) @(posedge clk);
      checks++;
      if (!out_valid) begin failures++; $display("FAIL result dropped under stall"); end
    end
    #1;
    for (int i = 0; i < U; i++) begin
      check("dinv", real'(dinv[i]) / SC, dd[i], 0.01);
      for (int j = 0; j < U; j++) begin
        check("gram.re", real'(gram[i][j].re) / SC, gr[i][j], 0.002);
        check("gram.im", real'(gram[i][j].im) / SC, gi[i][j], 0.002);
        check($sformatf("ainv.re K=%0d (%0d,%0d)", K, i, j), real'(ainv[i][j].re) / SC, xr[i][j], 0.01);
        check($sformatf("ainv.im K=%0d (%0d,%0d)", K, i, j), real'(ainv[i][j].im) / SC, xi[i][j], 0.01);
      end
    end
    out_ready <= 1'b1;
    @(posedge clk);
    out_ready <= 1'b0;
    @(posedge clk);
  endtask

  initial begin
    row_valid = 0; out_ready = 0; k_terms = 3; n0_scaled = '0;
    for (int u = 0; u < U; u++) h_row[u] = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int r = 0; r < 3; r++) begin
      run(1, 0.05, 0);
      run(2, 0.1, 1);
      run(3, 0.02, 0);
      run(4, 0.2, 1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
