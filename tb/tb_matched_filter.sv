// Self-checking testbench of matched_filter (U=4, B=16): random H and y,
// the reference H^H y / B is computed here in floating point; checks the
// values, that out_valid pulses once per B inputs and that gaps in the input
// stream are tolerated.
module tb_matched_filter;
  import mimo_pkg::*;
  localparam int U = 4, B = 16;
  localparam real SC = 4096.0;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  cplx_t y_in, h_row [U], ymf [U];

  matched_filter #(.U(U), .B(B)) dut (.*);

  always #5 clk = ~clk;
  int checks = 0, failures = 0, pulses = 0;
  always @(posedge clk) if (rst_n && out_valid) pulses++;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  real hr [B][U], hi [B][U], yr [B], yi [B];

  initial begin
    y_in = '0;
    for (int u = 0; u < U; u++) h_row[u] = '0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int t = 0; t < 40; t++) begin
      real er, ei;
      for (int b = 0; b < B; b++) begin
        yr[b] = real'($urandom_range(0, 16000)) / SC - 1.95;
        yi[b] = real'($urandom_range(0, 16000)) / SC - 1.95;
        for (int u = 0; u < U; u++) begin
          hr[b][u] = real'($urandom_range(0, 16000)) / SC - 1.95;
          hi[b][u] = real'($urandom_range(0, 16000)) / SC - 1.95;
        end
      end
      for (int b = 0; b < B; b++) begin
        if ((t % 3) == 1 && b == 5) begin in_valid <= 0; repeat (2) @(posedge clk); end
        in_valid <= 1;
        y_in.re <= DW'(int'(yr[b]*SC)); y_in.im <= DW'(int'(yi[b]*SC));
        for (int u = 0; u < U; u++) begin
          h_row[u].re <= DW'(int'(hr[b][u]*SC)); h_row[u].im <= DW'(int'(hi[b][u]*SC));
        end
        @(posedge clk);
      end
      in_valid <= 0;
      @(posedge clk);
      #1;
      checks++;
      if (pulses != t + 1) begin failures++; $display("FAIL pulses %0d", pulses); end
      for (int u = 0; u < U; u++) begin
        er = 0; ei = 0;
        for (int b = 0; b < B; b++) begin
          er += hr[b][u]*yr[b] + hi[b][u]*yi[b];
          ei += hr[b][u]*yi[b] - hi[b][u]*yr[b];
        end
        er /= B; ei /= B;
        checks += 2;
        if (real'(ymf[u].re)/SC - er > 0.003 || er - real'(ymf[u].re)/SC > 0.003 ||
            real'(ymf[u].im)/SC - ei > 0.003 || ei - real'(ymf[u].im)/SC > 0.003) begin
          failures++;
          $display("FAIL ymf[%0d] got %f,%f expected %f,%f", u,
                   real'(ymf[u].re)/SC, real'(ymf[u].im)/SC, er, ei);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
