// Self-checking testbench of llr_unit: streams random QPSK, 16-QAM and 64-QAM
// symbols (LTE Gray mapping, scaled by a random mu, plus noise) one per clock
// and compares every LLR with a floating-point max-log reference computed by
// brute force over the constellation from the same quantised inputs
// (tolerance 0.75 or 4 %; saturation at +-31.75).  Also checks the 3-stage
// latency, one result per clock, and that the sign of each LLR gives back the
// transmitted bit for noise-free symbols.
module tb_llr_unit;
  import mimo_pkg::*;
  logic clk = 0, rst_n = 0, in_valid = 0, in_last = 0;
  csym_t x_hat;
  logic [SW-1:0] rho2, mu_inv;
  mod_e mod;
  logic [2:0] in_user, out_user;
  logic out_valid, out_last;
  logic signed [LLRW-1:0] llr [6];

  llr_unit #(.UB(3)) dut (.*);

  always #5 clk = ~clk;
  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc++;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // LTE Gray level of an axis label (b0 is the MSB of the label)
  function automatic int lvl(input int m, input int lab);
    int mag;
    if (m == 0) return (lab == 0) ? 1 : -1;
    if (m == 1) begin mag = (lab & 1) ? 3 : 1; return (lab & 2) ? -mag : mag; end
    case (lab & 3) 0: mag = 3; 1: mag = 1; 2: mag = 5; default: mag = 7; endcase
    return (lab & 4) ? -mag : mag;
  endfunction

  typedef struct { real llr[6]; int bits[6]; int nbits; int in_cyc; bit clean; } exp_t;
  exp_t q [$];

  task automatic send(input int m, input real mu, input real snr_rho, input bit clean);
    int nb, labr, labi;
    real nrm, xr, xi, xq_r, xq_i, mi, rq, yr, yi;
    exp_t e;
    nb  = m + 1;
    nrm = (m == 0) ? 2.0 : (m == 1) ? 10.0 : 42.0;
    labr = $urandom_range(0, (1 << nb) - 1);
    labi = $urandom_range(0, (1 << nb) - 1);
    xr = mu * lvl(m, labr) / $sqrt(nrm);
    xi = mu * lvl(m, labi) / $sqrt(nrm);
    if (!clean) begin
      xr += (real'($urandom_range(0, 1000)) / 1000.0 - 0.5) * 0.3 / $sqrt(nrm);
      xi += (real'($urandom_range(0, 1000)) / 1000.0 - 0.5) * 0.3 / $sqrt(nrm);
    end
    x_hat.re <= SW'(int'(xr * 512.0));
    x_hat.im <= SW'(int'(xi * 512.0));
    mu_inv   <= SW'(int'(256.0 / mu));
    rho2     <= SW'(int'(snr_rho * 16.0));
    mod      <= mod_e'(m);
    in_valid <= 1;
    // reference from the quantised values
    xq_r = real'(int'(xr * 512.0)) / 512.0;
    xq_i = real'(int'(xi * 512.0)) / 512.0;
    mi   = real'(int'(256.0 / mu)) / 256.0;
    rq   = real'(int'(snr_rho * 16.0)) / 16.0;
    yr = xq_r * mi * $sqrt(nrm);
    yi = xq_i * mi * $sqrt(nrm);
    e.nbits = 2 * nb; e.in_cyc = cyc; e.clean = clean;
    for (int k = 0; k < 6; k++) begin e.llr[k] = 0; e.bits[k] = 0; end
    for (int k = 0; k < nb; k++) begin
      real b0r = 1e9, b1r = 1e9, b0i = 1e9, b1i = 1e9;
      for (int lab = 0; lab < (1 << nb); lab++) begin
        real dr, di;
        dr = (yr - lvl(m, lab)) ** 2;
        di = (yi - lvl(m, lab)) ** 2;
        if (((lab >> (nb - 1 - k)) & 1) == 0) begin
          if (dr < b0r) b0r = dr;
          if (di < b0i) b0i = di;
        end else begin
          if (dr < b1r) b1r = dr;
          if (di < b1i) b1i = di;
        end
      end
      e.llr[2*k]   = rq / nrm * (b0r - b1r);
      e.llr[2*k+1] = rq / nrm * (b0i - b1i);
      e.bits[2*k]   = (labr >> (nb - 1 - k)) & 1;
      e.bits[2*k+1] = (labi >> (nb - 1 - k)) & 1;
    end
    q.push_back(e);
    @(posedge clk);
  endtask

  always @(posedge clk) if (rst_n && out_valid) begin
    exp_t e;
    e = q.pop_front();
    checks++;
    // driven after edge n, sampled at edge n+1, out_valid set at edge n+3 and
    // seen by this monitor at edge n+4 (cyc already advanced): 5 = 3 stages + 2
    if (cyc - e.in_cyc != 5) begin failures++; $display("FAIL latency %0d", cyc - e.in_cyc); end
    for (int k = 0; k < 6; k++) begin
      real got, ex, tol;
      got = real'(llr[k]) / 4.0;
      ex  = e.llr[k];
      if (ex > 31.75) ex = 31.75;
      if (ex < -32.0) ex = -32.0;
      tol = (ex > 0 ? ex : -ex) * 0.04 + 0.75;
      checks++;
      if (k < e.nbits) begin
        if (got - ex > tol || ex - got > tol) begin
          failures++;
          if (failures < 15) $display("FAIL llr[%0d] got %f expected %f", k, got, ex);
        end
        if (e.clean) begin
          checks++;
          if ((got > 0) != (e.bits[k] == 1)) begin
            failures++; $display("FAIL hard decision bit %0d", k);
          end
        end
      end else if (llr[k] != 0) begin
        failures++; $display("FAIL unused llr[%0d] not zero", k);
      end
    end
  end

  initial begin
    x_hat = '0; rho2 = '0; mu_inv = '0; mod = MOD_QAM64; in_user = '0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int t = 0; t < 3000; t++) begin
      int m;
      m = t % 3;
      if ((t % 5) == 0) send(m, 0.6 + real'($urandom_range(0, 390)) / 1000.0, 25.0, 1);
      else send(m, 0.6 + real'($urandom_range(0, 390)) / 1000.0,
                0.5 + real'($urandom_range(0, 3000)) / 100.0, 0);
    end
    in_valid <= 0;
    repeat (6) @(posedge clk);
    checks++;
    if (q.size() != 0) begin failures++; $display("FAIL %0d results missing", q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
