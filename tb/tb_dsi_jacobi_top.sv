// tb_dsi_jacobi_top: end-to-end test of the solver at its default size.
//
// Each case solves A_m x = b with A_m = [1, 1-2^-m; 1-2^-m, 1], the family
// used to evaluate the design, and b random in [0, 1) scaled by 2^-(m+1)
// so that the solution and every iterate stay inside (-1, 1). The host
// loads c0 = c1 = -(1-2^-m) (m digits of -1), d = b, x(0) = 0, alpha =
// -(m+1) and beta = log2(1-2^-m) rounded up, starts the solver and reads
// the approximant back. Checked for each case: convergence flag, that the
// result is within 2 * 2^-target of the exact solution (exact integer
// arithmetic), that a solve with skipping gives exactly the digits and
// pass count of the same solve without it (skip_en = 0) in fewer cycles,
// and that the measured cycle count equals the reported one. One case is
// stopped by max_iter. Changes of digits declared stable are reported.
// The last case is the paper's largest: m = 1, eta = 2^-1024, i.e. 1026
// stable digits (|A (x - x*)|_2 <= 1.5 sqrt(2) 2^-1026 < 2^-1024).
// Mechanisms counted (each must occur): k-hat designation, a pass started
// from a saved state, skipped digits, a stop on stable digits, a stop on
// max_iter, a restore point past 16 digits.
module tb_dsi_jacobi_top;
  import dsi_pkg::*;

  localparam int unsigned PMAX = 2048;          // the top's default
  localparam int unsigned PW   = $clog2(PMAX + DELTA + 1);
  localparam int unsigned AW   = $clog2(PMAX);
  localparam int unsigned BW   = 2400;          // exact-check integer width

  logic                   clk = 0, rst_n = 0;
  logic                   host_we = 0, host_re = 0;
  logic [2:0]             host_bank = '0;
  logic [AW-1:0]          host_addr = '0;
  digit_t                 host_wdata = DIG_ZERO, host_rdata;
  logic [PW-1:0]          prec = '0, target = '0;
  logic [31:0]            max_iter = '0;
  logic                   skip_en = 0;
  logic signed [AB_W-1:0] alpha = '0, beta = '0;
  logic                   start = 0;
  logic                   busy, done, converged, khat_valid;
  logic [PW-1:0]          d_held, psi, psi_next;
  logic [31:0]            iterations, cycles, digits_generated, digits_skipped, psi_sum, restores;
  logic [15:0]            violations;

  dsi_jacobi_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_khat = 0, n_restore = 0, n_skip = 0, n_conv = 0, n_maxit = 0, n_deep = 0, n_viol = 0;

  initial begin
    repeat (20_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int b_dig [2][PMAX];
  int x_dig [2][PMAX];
  int x_ref [2][PMAX];

  task automatic host_write(bank_e bank, int addr, int v);
    @(negedge clk);
    host_we = 1; host_bank = bank; host_addr = AW'(addr);
    host_wdata = (v > 0) ? DIG_POS : (v < 0) ? DIG_NEG : DIG_ZERO;
    @(negedge clk);
    host_we = 0;
  endtask

  task automatic host_read(bank_e bank, int addr, output int v);
    @(negedge clk);
    host_re = 1; host_bank = bank; host_addr = AW'(addr);
    @(negedge clk);
    host_re = 0;
    v = int'(host_rdata);
  endtask

  // value of a digit string scaled by 2^p
  function automatic logic signed [BW-1:0] sval(int d [PMAX], int p);
    logic signed [BW-1:0] v = 0;
    for (int i = 0; i < p; i++) v = v * 2 + BW'(d[i]);
    return v;
  endfunction

  // load the case and run one solve; results in x_dig and the status ports
  task automatic solve_once(int m, int p, int tgt, int maxit, bit skip, output int c_meas);
    int c_start, c_end;
    real br;
    for (int i = 0; i < p; i++) begin
      host_write(BANK_C0, i, (i < m) ? -1 : 0);
      host_write(BANK_C1, i, (i < m) ? -1 : 0);
      host_write(BANK_D0, i, b_dig[0][i]);
      host_write(BANK_D1, i, b_dig[1][i]);
      host_write(BANK_X0, i, 0);
      host_write(BANK_X1, i, 0);
    end
    br       = $ln(1.0 - 1.0 / real'(longint'(1) << m)) / $ln(2.0);
    alpha    = -AB_W'((m + 1) << AB_FRAC);
    beta     = AB_W'(longint'($ceil(br * real'(1 << AB_FRAC))));
    prec     = PW'(p);
    target   = PW'(tgt);
    max_iter = 32'(maxit);
    skip_en  = skip;
    @(negedge clk); start = 1; c_start = $time / 10;
    @(negedge clk); start = 0;
    wait (done);
    c_end = $time / 10;
    c_meas = c_end - c_start;
    @(negedge clk);
    for (int j = 0; j < 2; j++)
      for (int i = 0; i < PMAX; i++) begin
        if (i < p) host_read(j == 0 ? BANK_X0 : BANK_X1, i, x_dig[j][i]);
        else x_dig[j][i] = 0;
      end
    $display("m=%0d prec=%0d target=%0d skip=%0b: %0d passes, converged %0b, D=%0d, psi=%0d, %0d cycles, %0d digits generated, %0d skipped, %0d restores, psi sum %0d, %0d stable-digit changes",
             m, p, tgt, skip, iterations, converged, d_held, psi, cycles, digits_generated, digits_skipped,
             restores, psi_sum, violations);
  endtask

  task automatic run_case(int m, int p, int tgt, int maxit, bit expect_conv);
    logic signed [BW-1:0] gnum, den, e, lim;
    logic signed [BW-1:0] bv [2], xv [2];
    int c_meas, nb, it_ref, cyc_ref;
    bit same;
    // b: random digits 0/1 after m+1 leading zeros, at most 24 digits long
    nb = m + 1 + 24;
    for (int j = 0; j < 2; j++)
      for (int i = 0; i < PMAX; i++) b_dig[j][i] = (i > m && i < nb && i < p) ? $urandom_range(1) : 0;
    // reference: the same solve without skipping
    solve_once(m, p, tgt, maxit, 1'b0, c_meas);
    x_ref   = x_dig;
    it_ref  = iterations;
    cyc_ref = cycles;
    checks++;
    if (digits_skipped != 0 || restores != 0) begin failures++; $display("  skipped with skip_en low"); end
    solve_once(m, p, tgt, maxit, 1'b1, c_meas);
    checks += 4;
    if (converged != expect_conv) begin failures++; $display("  converged flag wrong"); end
    if (int'(cycles) != c_meas - 1 && int'(cycles) != c_meas) begin
      failures++; $display("  cycles %0d, measured %0d", cycles, c_meas);
    end
    same = 1;
    for (int j = 0; j < 2; j++) for (int i = 0; i < p; i++) if (x_dig[j][i] != x_ref[j][i]) same = 0;
    if (!same || iterations != 32'(it_ref)) begin
      failures++; $display("  skipping changed the result");
    end
    if (restores != 0 && cycles >= 32'(cyc_ref)) begin
      failures++; $display("  skipping saved no cycles");
    end
    if (khat_valid) n_khat++;
    if (restores != 0) n_restore++;
    if (digits_skipped != 0) n_skip++;
    if (converged) n_conv++; else n_maxit++;
    if (digits_skipped > 32'd16 * restores && restores != 0) n_deep++;
    if (violations != 0) n_viol++;
    if (expect_conv) begin
      // |x_j - x*_j| < 2 * 2^-tgt, with x* = (1/(1-g^2)) [1 -g; -g 1] b, g = (2^m-1)/2^m
      gnum = (BW'(1) <<< m) - 1;
      den  = (BW'(1) <<< (2 * m)) - gnum * gnum;
      for (int j = 0; j < 2; j++) begin
        bv[j] = sval(b_dig[j], p);
        xv[j] = sval(x_dig[j], p);
      end
      for (int j = 0; j < 2; j++) begin
        e   = xv[j] * den - ((bv[j] <<< (2 * m)) - gnum * (BW'(1) <<< m) * bv[1 - j]);
        if (e < 0) e = -e;
        lim = (den <<< (p + 1)) >>> tgt;
        checks++;
        if (e >= lim) begin
          failures++;
          $display("  element %0d is not within 2^-%0d of the solution", j, tgt - 1);
        end
      end
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    run_case(1, 48, 32, 1000, 1);
    run_case(2, 64, 48, 1000, 1);
    run_case(3, 80, 60, 1000, 1);
    run_case(1, 64, 48, 6, 0);          // stopped by max_iter
    run_case(5, 96, 64, 2000, 1);
    run_case(1, 1040, 1026, 4000, 1);    // eta = 2^-1024
    checks += 6;
    if (n_khat == 0)    begin failures++; $display("k-hat never designated"); end
    if (n_restore == 0) begin failures++; $display("no pass restored a saved state"); end
    if (n_skip == 0)    begin failures++; $display("no digit skipped"); end
    if (n_conv == 0)    begin failures++; $display("no stop on stable digits"); end
    if (n_maxit == 0)   begin failures++; $display("no stop on max_iter"); end
    if (n_deep == 0)    begin failures++; $display("no deep restore"); end
    $display("mechanisms: k-hat %0d, restore %0d, skip %0d, converged %0d, max_iter %0d, deep %0d, cases with stable-digit changes %0d",
             n_khat, n_restore, n_skip, n_conv, n_maxit, n_deep, n_viol);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
