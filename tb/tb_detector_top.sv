// End-to-end testbench of detector_top at reduced size (U=4 users, B=32
// antennas, L=12 subcarriers, NPRE=2 preprocessing instances, 6 SC-FDMA
// symbols).  Each user sends QAM symbols in time; the testbench applies the
// user's DFT (SC-FDMA precoding), a random Rayleigh channel per subcarrier and
// a little noise, and feeds every instance its B antenna rows per subcarrier.
// The inverse DFT after the detector is the behavioural idft_model.  The
// hard decisions of the LLRs must give back the transmitted bits.
//
// The run walks through the mechanisms of the design and counts each; one
// that never happens is a failure: K switched between symbols (K = 1..4),
// modulation switched (QPSK, 16-QAM, 64-QAM), subcarriers dealt round robin
// to every instance, the data buffer swapping halves, the inverse-DFT input
// stalled, the data buffer holding the equalizer off, and the preprocessing
// row stream held back by it (a finished result waiting).  Also checks the framing of the LLR stream (user,
// last) and the number of LLR results.  Inputs are driven at the falling edge.
module tb_detector_top;
  import mimo_pkg::*;
  localparam int U = 4, B = 32, L = 12, NPRE = 2, NSYM = 6;
  localparam int UB = $clog2(U);
  localparam real SC = 4096.0, N0 = 0.004;
  localparam int KS [NSYM] = '{3, 2, 1, 4, 3, 3};
  localparam int MS [NSYM] = '{2, 1, 0, 2, 1, 2};
  localparam int STALL_SYM = 1;  // symbol during which the IDFT input stalls

  logic clk = 0, rst_n = 0;
  logic [2:0] k_terms;
  logic signed [DW-1:0] n0_scaled;
  mod_e mod;
  logic pre_row_valid [NPRE], pre_row_ready [NPRE];
  cplx_t pre_h_row [NPRE][U], pre_y [NPRE];
  logic ifft_in_valid, ifft_in_ready, model_ready, ifft_in_first, ifft_in_last;
  csym_t ifft_in_data, ifft_out_data;
  logic [UB-1:0] ifft_in_user, ifft_out_user, llr_user;
  logic ifft_out_valid, ifft_out_last, llr_valid, llr_last;
  logic signed [LLRW-1:0] llr [6];
  logic stall_ifft;

  detector_top #(.U(U), .B(B), .L(L), .NPRE(NPRE)) dut (.*);

  idft_model #(.U(U), .L(L)) u_idft (
    .clk, .rst_n, .in_valid(ifft_in_valid), .in_ready(model_ready),
    .in_data(ifft_in_data), .in_user(ifft_in_user), .in_first(ifft_in_first),
    .in_last(ifft_in_last), .out_valid(ifft_out_valid), .out_data(ifft_out_data),
    .out_user(ifft_out_user), .out_last(ifft_out_last));

  assign ifft_in_ready = model_ready && !stall_ifft;

  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired: fired %0d llr %0d sym %0d rowhold %0d swaps %0d", fired, nllr, osym, n_row_hold, n_swap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------ stimulus
  int  bits [NSYM][U][L][6];
  real hr [NSYM][L][B][U], hi [NSYM][L][B][U];
  real yr [NSYM][L][B], yi [NSYM][L][B];

  function automatic real gauss();
    real s = 0.0;
    for (int k = 0; k < 12; k++) s += real'($urandom_range(0, 65535)) / 65536.0;
    return s - 6.0;
  endfunction

  function automatic int lvl(input int m, input int lab);
    int mag;
    if (m == 0) return (lab == 0) ? 1 : -1;
    if (m == 1) begin mag = (lab & 1) ? 3 : 1; return (lab & 2) ? -mag : mag; end
    case (lab & 3) 0: mag = 3; 1: mag = 1; 2: mag = 5; default: mag = 7; endcase
    return (lab & 4) ? -mag : mag;
  endfunction

  function automatic logic signed [DW-1:0] qd(input real v);
    real s = v * SC;
    if (s > 16383.0) return DW'(16383);
    if (s < -16384.0) return DW'(-16384);
    return DW'($rtoi(s < 0 ? s - 0.5 : s + 0.5));
  endfunction

  task automatic make_data();
    real sr [L], si [L], fr [U][L], fi [U][L], nrm;
    int nb, labr, labi;
    for (int s = 0; s < NSYM; s++) begin
      nb  = MS[s] + 1;
      nrm = (MS[s] == 0) ? 2.0 : (MS[s] == 1) ? 10.0 : 42.0;
      for (int u = 0; u < U; u++) begin
        for (int n = 0; n < L; n++) begin
          labr = $urandom_range(0, (1 << nb) - 1);
          labi = $urandom_range(0, (1 << nb) - 1);
          for (int k = 0; k < 6; k++) bits[s][u][n][k] = 0;
          for (int k = 0; k < nb; k++) begin
            bits[s][u][n][2*k]   = (labr >> (nb - 1 - k)) & 1;
            bits[s][u][n][2*k+1] = (labi >> (nb - 1 - k)) & 1;
          end
          sr[n] = lvl(MS[s], labr) / $sqrt(nrm);
          si[n] = lvl(MS[s], labi) / $sqrt(nrm);
        end
        // unitary DFT of the user's block
        for (int k = 0; k < L; k++) begin
          fr[u][k] = 0; fi[u][k] = 0;
          for (int n = 0; n < L; n++) begin
            real a = -2.0 * 3.14159265358979 * real'((k * n) % L) / real'(L);
            fr[u][k] += sr[n] * $cos(a) - si[n] * $sin(a);
            fi[u][k] += sr[n] * $sin(a) + si[n] * $cos(a);
          end
          fr[u][k] /= $sqrt(real'(L)); fi[u][k] /= $sqrt(real'(L));
        end
      end
      for (int w = 0; w < L; w++)
        for (int b = 0; b < B; b++) begin
          yr[s][w][b] = gauss() * $sqrt(N0 / 2.0);
          yi[s][w][b] = gauss() * $sqrt(N0 / 2.0);
          for (int u = 0; u < U; u++) begin
            hr[s][w][b][u] = real'(qd(gauss() * 0.5)) / SC;
            hi[s][w][b][u] = real'(qd(gauss() * 0.5)) / SC;
            yr[s][w][b] += hr[s][w][b][u] * fr[u][w] - hi[s][w][b][u] * fi[u][w];
            yi[s][w][b] += hr[s][w][b][u] * fi[u][w] + hi[s][w][b][u] * fr[u][w];
          end
        end
    end
  endtask

  // ------------------------------------------------------------ counters
  int n_rr [NPRE], n_swap = 0, n_ifft_stall = 0, n_eq_hold = 0, n_row_hold = 0;
  int n_k [5], n_mod [3], fired = 0, taken_sym = 0, prev_rbank = 0;

  always @(posedge clk) if (rst_n) begin
    for (int k = 0; k < NPRE; k++) begin
      if (dut.pre_out_ready[k]) n_rr[k]++;
      // rows held because a finished result cannot leave (buffer full)
      if (pre_row_valid[k] && !pre_row_ready[k] && dut.pre_out_valid[k] && !dut.db_wr_ready)
        n_row_hold++;
    end
    if (dut.fire) fired++;
    if (ifft_in_valid && !ifft_in_ready && stall_ifft) n_ifft_stall++;
    if (dut.eq_out_valid && !dut.db_wr_ready) n_eq_hold++;
    if (int'(dut.u_db.rbank) != prev_rbank) n_swap++;
    prev_rbank = int'(dut.u_db.rbank);
  end

  // ------------------------------------------------------------ drivers
  int started [NPRE];
  for (genvar k = 0; k < NPRE; k++) begin : g_drv
    initial begin
      pre_row_valid[k] = 0;
      pre_y[k] = '0;
      for (int u = 0; u < U; u++) pre_h_row[k][u] = '0;
      started[k] = 0;
      @(posedge rst_n);
      for (int s = 0; s < NSYM; s++) begin
        // symbols are fed one after another so that K changes cleanly
        wait (taken_sym == s);
        for (int w = k; w < L; w += NPRE)
          for (int b = 0; b < B; b++) begin
            @(negedge clk);
            pre_row_valid[k] = 1;
            pre_y[k].re = qd(yr[s][w][b]); pre_y[k].im = qd(yi[s][w][b]);
            for (int u = 0; u < U; u++) begin
              pre_h_row[k][u].re = qd(hr[s][w][b][u]);
              pre_h_row[k][u].im = qd(hi[s][w][b][u]);
            end
            while (!pre_row_ready[k]) @(negedge clk);
            @(posedge clk);
            #1 pre_row_valid[k] = 0;
          end
      end
    end
  end

  // symbol sequencing: K is set before a symbol's rows enter
  initial begin
    n0_scaled = qd(N0 / B);
    k_terms = 3'(KS[0]);
    stall_ifft = 0;
    @(posedge rst_n);
    for (int s = 0; s < NSYM; s++) begin
      k_terms = 3'(KS[s]);
      n_k[KS[s]]++;
      taken_sym = s;
      if (s == STALL_SYM) stall_ifft = 1;
      wait (fired == (s + 1) * L);
      @(negedge clk);
    end
    taken_sym = NSYM;
  end

  // the IDFT input stays stalled until the back-pressure reaches the rows
  initial begin
    wait (stall_ifft);
    wait (n_row_hold > 0 && n_eq_hold > 0);
    repeat (50) @(negedge clk);
    stall_ifft = 0;
  end

  // ------------------------------------------------------------ checker
  int osym = 0, ou = 0, on = 0, nllr = 0, errs = 0;
  assign mod = mod_e'(MS[(osym < NSYM) ? osym : NSYM - 1]);

  always @(posedge clk) if (rst_n && llr_valid) begin
    int nb;
    nb = MS[osym] + 1;
    nllr++;
    checks++;
    if (int'(llr_user) != ou || llr_last != (on == L - 1)) begin
      failures++;
      $display("FAIL framing: user %0d last %0d at sym %0d u %0d n %0d", llr_user, llr_last, osym, ou, on);
    end
    for (int k = 0; k < 2 * nb; k++) begin
      checks++;
      if ((llr[k] > 0) != (bits[osym][ou][on][k] == 1)) begin
        failures++; errs++;
        if (errs < 10) $display("FAIL bit sym %0d user %0d n %0d bit %0d llr %0d", osym, ou, on, k, llr[k]);
      end
    end
    n_mod[MS[osym]]++;
    if (on == L - 1) begin
      on = 0;
      if (ou == U - 1) begin ou = 0; osym++; end else ou++;
    end else on++;
  end

  task automatic need(input string what, input int n);
    checks++;
    $display("%-28s %0d", what, n);
    if (n == 0) begin failures++; $display("FAIL mechanism never happened: %s", what); end
  endtask

  initial begin
    make_data();
    repeat (3) @(posedge clk);
    rst_n <= 1;
    wait (osym == NSYM);
    repeat (20) @(posedge clk);
    checks++;
    if (nllr != NSYM * U * L) begin failures++; $display("FAIL %0d LLR results", nllr); end
    for (int k = 0; k < NPRE; k++) need($sformatf("round robin to instance %0d", k), n_rr[k]);
    for (int k = 1; k <= 4; k++) need($sformatf("symbols with K=%0d", k), n_k[k]);
    need("QPSK samples", n_mod[0]);
    need("16-QAM samples", n_mod[1]);
    need("64-QAM samples", n_mod[2]);
    need("data buffer swaps", n_swap);
    need("IDFT input stall cycles", n_ifft_stall);
    need("equalizer held off", n_eq_hold);
    need("row stream held back", n_row_hold);
    $display("bit errors %0d", errs);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
