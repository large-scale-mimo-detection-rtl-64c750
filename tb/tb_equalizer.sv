// Self-checking testbench of equalizer (U=4): random A~^-1*B and y^MF/B,
// the product is recomputed in floating point and compared with the 12-bit
// outputs; checks that back-to-back subcarriers are accepted every U clocks
// and that a stalled output (out_ready low) holds its value.
module tb_equalizer;
  import mimo_pkg::*;
  localparam int U = 4;
  localparam real SC = 4096.0, SS = 512.0;
  logic clk = 0, rst_n = 0, in_valid = 0, in_ready, out_valid, out_ready = 1;
  cplx_t ainv [U][U], ymf [U];
  csym_t s_hat [U];

  equalizer #(.U(U)) dut (.*);

  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // expected results in a queue
  real qr [$], qi [$];
  int  accepts = 0, first_acc = -1, last_acc = -1, cyc = 0;
  always @(posedge clk) cyc++;

  always @(posedge clk) if (rst_n && in_valid && in_ready) begin
    accepts++;
    if (first_acc < 0) first_acc = cyc;
    last_acc = cyc;
  end

  // consumer
  int got_n = 0;
  always @(posedge clk) begin
    if (rst_n && out_valid && out_ready) begin
      for (int i = 0; i < U; i++) begin
        real er, ei;
        er = qr.pop_front(); ei = qi.pop_front();
        checks++;
        if (real'(s_hat[i].re)/SS - er > 0.01 || er - real'(s_hat[i].re)/SS > 0.01 ||
            real'(s_hat[i].im)/SS - ei > 0.01 || ei - real'(s_hat[i].im)/SS > 0.01) begin
          failures++;
          $display("FAIL s_hat[%0d] got %f,%f expected %f,%f", i,
                   real'(s_hat[i].re)/SS, real'(s_hat[i].im)/SS, er, ei);
        end
      end
      got_n++;
    end
  end

  task automatic send(input bit stall_after);
    real ar [U][U], ai [U][U], yr [U], yi [U];
    for (int i = 0; i < U; i++) begin
      yr[i] = real'($urandom_range(0, 8000)) / SC - 0.97;
      yi[i] = real'($urandom_range(0, 8000)) / SC - 0.97;
      for (int j = 0; j < U; j++) begin
        ar[i][j] = real'($urandom_range(0, 4000)) / SC - 0.48;
        ai[i][j] = real'($urandom_range(0, 4000)) / SC - 0.48;
      end
    end
    for (int i = 0; i < U; i++) begin
      real er = 0, ei = 0;
      for (int j = 0; j < U; j++) begin
        er += ar[i][j]*yr[j] - ai[i][j]*yi[j];
        ei += ar[i][j]*yi[j] + ai[i][j]*yr[j];
      end
      qr.push_back(er); qi.push_back(ei);
    end
    // inputs change at the falling edge, ready is sampled there too
    @(negedge clk);
    in_valid = 1;
    for (int i = 0; i < U; i++) begin
      ymf[i].re = DW'(int'(yr[i]*SC)); ymf[i].im = DW'(int'(yi[i]*SC));
      for (int j = 0; j < U; j++) begin
        ainv[i][j].re = DW'(int'(ar[i][j]*SC)); ainv[i][j].im = DW'(int'(ai[i][j]*SC));
      end
    end
    while (!in_ready) @(negedge clk);
    @(posedge clk);
    #1 in_valid = 0;
    if (stall_after) begin
      out_ready <= 0;
      repeat (3*U) @(posedge clk);
      checks++;
      if (!out_valid) begin failures++; $display("FAIL output not held"); end
      out_ready <= 1;
    end
  endtask

  initial begin
    for (int i = 0; i < U; i++) begin
      ymf[i] = '0;
      for (int j = 0; j < U; j++) ainv[i][j] = '0;
    end
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int t = 0; t < 30; t++) send(0);
    checks++;
    if (last_acc - first_acc != 29 * U) begin
      failures++; $display("FAIL throughput: 30 subcarriers in %0d clocks", last_acc - first_acc);
    end
    for (int t = 0; t < 5; t++) send(t % 2 == 0);
    repeat (4*U) @(posedge clk);
    checks++;
    if (got_n != 35) begin failures++; $display("FAIL outputs %0d", got_n); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
