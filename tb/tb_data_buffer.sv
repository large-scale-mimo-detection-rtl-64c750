// Self-checking testbench of data_buffer (U=4, L=10): five symbols of
// numbered data are written subcarrier by subcarrier and read back user by
// user under a random rd_ready.  Checks data, user tags, first/last flags,
// that nothing is read before 'commit', and that the writer is held off
// (wr_ready low) while both halves are occupied.
module tb_data_buffer;
  import mimo_pkg::*;
  localparam int U = 4, L = 10, NSYM = 5;
  logic clk = 0, rst_n = 0, wr_en = 0, wr_ready, wr_last = 0, commit = 0;
  csym_t wr_data [U];
  logic rd_valid, rd_ready = 0, rd_first, rd_last;
  csym_t rd_data;
  logic [$clog2(U)-1:0] rd_user;

  data_buffer #(.U(U), .L(L)) dut (.*);

  always #5 clk = ~clk;
  int checks = 0, failures = 0, blocked = 0, commits = 0;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic csym_t pat(input int s, input int u, input int w);
    csym_t c;
    c.re = SW'(s * 100 + u * 16 + w);
    c.im = SW'(-(s * 37 + w * 5 + u));
    return c;
  endfunction

  // writer
  initial begin
    for (int u = 0; u < U; u++) wr_data[u] = '0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int s = 0; s < NSYM; s++) begin
      for (int w = 0; w < L; w++) begin
        // inputs change at the falling edge, ready is sampled there too
        @(negedge clk);
        wr_en   = 1;
        wr_last = (w == L - 1);
        for (int u = 0; u < U; u++) wr_data[u] = pat(s, u, w);
        while (!wr_ready) begin blocked++; @(negedge clk); end
        @(posedge clk);
      end
      #1 wr_en = 0; wr_last = 0;
      repeat (3) @(posedge clk);
      commit <= 1; @(posedge clk); commit <= 0;
      commits++;
    end
  end

  // reader
  int rs = 0, ru = 0, rw = 0, nread = 0;
  always @(posedge clk) begin
    rd_ready <= ($urandom_range(0, 3) != 0) && (nread > 0 || commits > 0);
    if (rst_n && rd_valid && rd_ready) begin
      checks++;
      if (rs >= commits) begin failures++; $display("FAIL read before commit"); end
      if (rd_data != pat(rs, ru, rw) || int'(rd_user) != ru ||
          rd_first != (rw == 0) || rd_last != (rw == L - 1)) begin
        failures++;
        if (failures < 10) $display("FAIL s%0d u%0d w%0d: got %0d/%0d user %0d", rs, ru, rw,
                                    rd_data.re, rd_data.im, rd_user);
      end
      nread++;
      rw++;
      if (rw == L) begin rw = 0; ru++; end
      if (ru == U) begin ru = 0; rs++; end
    end
  end

  initial begin
    wait (rs == NSYM);
    repeat (5) @(posedge clk);
    checks += 2;
    if (nread != NSYM * U * L) begin failures++; $display("FAIL count %0d", nread); end
    if (blocked == 0) begin failures++; $display("FAIL writer never held off"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
