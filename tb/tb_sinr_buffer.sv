// Self-checking testbench of sinr_buffer (U=4): writes the values of three
// symbols and checks that reads return the values of the symbol that is
// current on the read side, independently of later writes to the other half.
module tb_sinr_buffer;
  import mimo_pkg::*;
  localparam int U = 4;
  logic clk = 0, rst_n = 0, wr_en = 0, wr_last = 0, rd_done = 0;
  logic [$clog2(U)-1:0] wr_user, rd_user;
  logic [SW-1:0] wr_rho2, wr_mu_inv, rd_rho2, rd_mu_inv;

  sinr_buffer #(.U(U)) dut (.*);

  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic write_sym(input int s);
    for (int u = 0; u < U; u++) begin
      wr_en <= 1; wr_last <= (u == U - 1); wr_user <= u[$clog2(U)-1:0];
      wr_rho2 <= SW'(s * 50 + u); wr_mu_inv <= SW'(1000 - s * 7 - u);
      @(posedge clk);
    end
    wr_en <= 0; wr_last <= 0;
  endtask

  task automatic check_sym(input int s);
    for (int u = 0; u < U; u++) begin
      rd_user <= u[$clog2(U)-1:0];
      @(posedge clk); #1;
      checks++;
      if (rd_rho2 != SW'(s * 50 + u) || rd_mu_inv != SW'(1000 - s * 7 - u)) begin
        failures++; $display("FAIL sym %0d user %0d: %0d %0d", s, u, rd_rho2, rd_mu_inv);
      end
    end
  endtask

  initial begin
    rd_user = '0; wr_user = '0; wr_rho2 = '0; wr_mu_inv = '0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    write_sym(0);
    write_sym(1);            // other half
    check_sym(0);
    rd_done <= 1; @(posedge clk); rd_done <= 0;
    check_sym(1);
    write_sym(2);            // overwrites half 0, half 1 still read
    check_sym(1);
    rd_done <= 1; @(posedge clk); rd_done <= 0;
    check_sym(2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
