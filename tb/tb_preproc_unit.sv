// Self-checking testbench of preproc_unit (U=4 users, B=16 antennas, K=2).
// A producer streams several subcarriers back to back, one antenna row and
// receive sample per clock; a consumer takes the results with a random
// out_ready.  For every subcarrier the matched-filter output H^H y / B, the
// Gram matrix G/B, D^-1 and the 2-term Neumann inverse are recomputed here in
// floating point and compared with the fixed-point outputs.  Also counts that
// the consumer's stalls really held the row stream back (row_ready low) and
// that every subcarrier came out.  Inputs are driven and row_ready sampled at
// the falling edge, so transfers happen at the following rising edge.
module tb_preproc_unit;
  import mimo_pkg::*;
  localparam int U = 4, B = 16, NSC = 12, K = 2;
  localparam real SC = 4096.0, N0 = 0.05;

  logic clk = 0, rst_n = 0;
  logic [2:0] k_terms = 3'(K);
  logic signed [DW-1:0] n0_scaled = DW'(int'(N0 * SC));
  logic row_valid = 0, row_ready, out_valid, out_ready = 0;
  cplx_t h_row [U], y_in;
  cplx_t ymf [U], ainv [U][U], gram [U][U];
  logic signed [DW-1:0] dinv [U];

  preproc_unit #(.U(U), .B(B)) dut (.*);

  always #5 clk = ~clk;
  int checks = 0, failures = 0, stalls = 0, done = 0;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && row_valid && !row_ready) stalls++;

  real hr [NSC][B][U], hi [NSC][B][U], yr [NSC][B], yi [NSC][B];

  function automatic real rnd();
    return real'($urandom_range(0, 8000)) / SC - 0.98;
  endfunction

  task automatic check(input string what, input real got, input real exp, input real tol);
    checks++;
    if (!(got - exp <= tol && exp - got <= tol)) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %f expected %f", what, got, exp);
    end
  endtask

  // reference for subcarrier s, compared with the outputs as they stand now
  task automatic compare(input int s);
    real gr [U][U], gi [U][U], dd [U], er, ei, xr, xi;
    for (int i = 0; i < U; i++)
      for (int j = 0; j < U; j++) begin
        gr[i][j] = 0; gi[i][j] = 0;
        for (int b = 0; b < B; b++) begin
          gr[i][j] += hr[s][b][i]*hr[s][b][j] + hi[s][b][i]*hi[s][b][j];
          gi[i][j] += hr[s][b][i]*hi[s][b][j] - hi[s][b][i]*hr[s][b][j];
        end
        gr[i][j] /= B; gi[i][j] /= B;
      end
    for (int i = 0; i < U; i++) dd[i] = 1.0 / (gr[i][i] + N0);
    for (int i = 0; i < U; i++) begin
      er = 0; ei = 0;
      for (int b = 0; b < B; b++) begin
        er += hr[s][b][i]*yr[s][b] + hi[s][b][i]*yi[s][b];
        ei += hr[s][b][i]*yi[s][b] - hi[s][b][i]*yr[s][b];
      end
      check("ymf.re", real'(ymf[i].re) / SC, er / B, 0.003);
      check("ymf.im", real'(ymf[i].im) / SC, ei / B, 0.003);
      check("dinv", real'(dinv[i]) / SC, dd[i], 0.01);
      for (int j = 0; j < U; j++) begin
        // two Neumann terms: D^-1 - D^-1 E D^-1
        xr = (i == j) ? dd[i] : -dd[i] * gr[i][j] * dd[j];
        xi = (i == j) ? 0.0   : -dd[i] * gi[i][j] * dd[j];
        check("gram.re", real'(gram[i][j].re) / SC, gr[i][j], 0.002);
        check("gram.im", real'(gram[i][j].im) / SC, gi[i][j], 0.002);
        check("ainv.re", real'(ainv[i][j].re) / SC, xr, 0.01);
        check("ainv.im", real'(ainv[i][j].im) / SC, xi, 0.01);
      end
    end
  endtask

  // producer
  initial begin
    y_in = '0;
    for (int u = 0; u < U; u++) h_row[u] = '0;
    for (int s = 0; s < NSC; s++)
      for (int b = 0; b < B; b++) begin
        yr[s][b] = real'(int'(rnd() * SC)) / SC; yi[s][b] = real'(int'(rnd() * SC)) / SC;
        for (int u = 0; u < U; u++) begin
          hr[s][b][u] = real'(int'(rnd() * SC)) / SC; hi[s][b][u] = real'(int'(rnd() * SC)) / SC;
        end
      end
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int s = 0; s < NSC; s++)
      for (int b = 0; b < B; b++) begin
        @(negedge clk);
        row_valid = 1;
        y_in.re = DW'(int'(yr[s][b] * SC)); y_in.im = DW'(int'(yi[s][b] * SC));
        for (int u = 0; u < U; u++) begin
          h_row[u].re = DW'(int'(hr[s][b][u] * SC)); h_row[u].im = DW'(int'(hi[s][b][u] * SC));
        end
        while (!row_ready) @(negedge clk);
        @(posedge clk);
        #1 row_valid = 0;
      end
  end

  // consumer: takes a result only on some cycles
  initial begin
    @(posedge rst_n);
    while (done < NSC) begin
      @(negedge clk);
      out_ready = 0;
      if (out_valid && ($urandom_range(0, 3) == 0 || done % 4 == 3)) begin
        compare(done);
        out_ready = 1;
        @(posedge clk);
        #1 out_ready = 0;
        done++;
      end
    end
    checks++;
    if (stalls == 0) begin failures++; $display("FAIL row stream never held back"); end
    $display("row stalls: %0d", stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
