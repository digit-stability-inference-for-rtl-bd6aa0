// tb_dsi_sequencer: self-checking test of the digit-generation scheduler.
// The datapath is modelled by a two-cycle delay from each step with
// position t to an output digit t-5; the stability controller by a script:
// k-hat after pass KH, then psi(k) = P0 + S (k - KH). Checked per pass:
//   - clear on a full pass, restore when a saved state exists,
//   - the first digit read is the restore point L, the last is prec+5,
//   - one save, at digit psi(k-1), when psi has grown to at least 6,
//   - writes cover digits L-4 .. prec (1 .. prec on a full pass),
//   - the pass takes prec + 13 - L cycles from one pass start to the next,
// a reported change below the saved position (pass 12) must force a
// full pass and a new save; and at the end: stop at the first psi(k) >= target with `converged`,
// the iteration count, skipped-digit and psi sums; a second solve with a
// low max_iter must stop unconverged after exactly max_iter passes.
module tb_dsi_sequencer;
  import dsi_pkg::*;

  localparam int unsigned PMAX = 128;
  localparam int unsigned PW   = $clog2(PMAX + DELTA + 1);
  localparam int unsigned AW   = $clog2(PMAX);
  localparam int KH = 3, P0 = 4, S = 3;

  logic          clk = 0, rst_n = 0;
  logic          start = 0;
  logic [PW-1:0] prec = PW'(100), target = PW'(90);
  logic [31:0]   max_iter = 32'd1000;
  logic          skip_en = 1, cmp_clear;
  logic [PW-1:0] first_diff = '1;
  logic          rd_en, rd_d_en, dp_clear, dp_restore, dp_step, dp_save, dp_zero_xc, dp_zero_d;
  logic [AW-1:0] rd_addr, rd_d_addr, wr_addr;
  logic [PW-1:0] dp_pos, cmp_psi;
  logic          z_valid = 0;
  logic [PW-1:0] z_pos = '0;
  logic          wr_en, cmp_start, cmp_en, stab_start, stab_update;
  logic          khat_valid = 0;
  logic [PW-1:0] psi = '0;
  logic          busy, done, converged;
  logic [31:0]   iterations, cycles, digits_generated, digits_skipped, psi_sum, restores;

  dsi_sequencer #(.PMAX(PMAX)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // datapath model: output digit t-5 two cycles after the step with digit t
  logic          v1 = 0;
  logic [PW-1:0] p1 = '0;
  always @(posedge clk) begin
    v1      <= dp_step && dp_pos > PW'(DELTA);
    p1      <= dp_pos - PW'(DELTA);
    z_valid <= v1;
    z_pos   <= p1;
  end

  // stability controller model
  int passes = 0;
  function automatic int psi_of(int k);
    return (k < KH) ? 0 : P0 + S * (k - KH);
  endfunction
  always @(posedge clk) begin
    if (stab_start) begin passes = 0; khat_valid <= 0; psi <= '0; end
    if (stab_update) begin
      passes = passes + 1;
      khat_valid <= (passes >= KH);
      psi        <= PW'(psi_of(passes) > 100 ? 100 : psi_of(passes));
    end
  end

  // per-pass observation
  int cyc = 0, pass_start = -1, first_rd, last_rd, n_save, save_pos, first_wr, last_wr, n_wr;
  bit was_restore, was_clear;
  int exp_L = 0, exp_shadow = 0, pass_no = 0, exp_skipped = 0, exp_psi_sum = 0, fd_model = 1000, n_reject = 0;

  task automatic end_of_pass();
    int psi_prev, want_save;
    pass_no++;
    psi_prev  = (pass_no - 1 >= KH) ? psi_of(pass_no - 1) : 0;
    if (psi_prev > int'(prec)) psi_prev = prec;
    want_save = (pass_no - 1 >= KH && psi_prev >= DELTA + 1 && psi_prev > exp_shadow) ? psi_prev : 0;
    checks++;
    if (was_restore != (exp_L != 0) || was_clear != (exp_L == 0) || first_rd != exp_L ||
        last_rd != int'(prec) - 1 || (want_save != 0 && (n_save != 1 || save_pos != want_save)) ||
        (want_save == 0 && n_save != 0) ||
        first_wr != ((exp_L == 0) ? 0 : exp_L - DELTA) || last_wr != int'(prec) - 1) begin
      failures++;
      $display("pass %0d: L=%0d restore=%0b clear=%0b reads %0d..%0d saves %0d at %0d (want %0d) writes %0d..%0d",
               pass_no, exp_L, was_restore, was_clear, first_rd, last_rd, n_save, save_pos, want_save,
               first_wr, last_wr);
    end
    if (exp_L != 0) exp_skipped += exp_L - DELTA;
    if (pass_no >= KH) exp_psi_sum += (psi_of(pass_no) > 100 ? 100 : psi_of(pass_no));
    if (want_save != 0) exp_shadow = (fd_model > want_save) ? want_save : 0;
    else                exp_shadow = (fd_model > exp_shadow) ? exp_shadow : 0;
    if (fd_model < 1000) n_reject++;
    exp_L = exp_shadow;
  endtask

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (cmp_start) begin
      if (pass_start >= 0) begin
        checks++;
        if (cyc - pass_start != int'(prec) + 13 - exp_L) begin
          failures++;
          $display("pass %0d took %0d cycles, want %0d", pass_no + 1, cyc - pass_start, int'(prec) + 13 - exp_L);
        end
        end_of_pass();
      end
      pass_start  = cyc;
      fd_model    = (pass_no + 1 == 12) ? 3 : 1000;
      first_diff <= (pass_no + 1 == 12) ? PW'(3) : '1;
      first_rd    = -1; n_save = 0; first_wr = -1; n_wr = 0;
      was_restore = dp_restore; was_clear = dp_clear;
    end
    if (rd_en) begin
      if (first_rd < 0) first_rd = rd_addr;
      last_rd = rd_addr;
    end
    if (dp_step && dp_save) begin n_save++; save_pos = dp_pos; end
    if (wr_en) begin
      if (first_wr < 0) first_wr = wr_addr;
      last_wr = wr_addr;
    end
  end

  initial begin
    int want_iter;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    wait (done);
    @(negedge clk);
    end_of_pass();
    // first k with psi(k) >= 90
    want_iter = KH;
    while (psi_of(want_iter) < 90) want_iter++;
    checks += 4;
    if (!converged || iterations != 32'(want_iter)) begin
      failures++; $display("stopped after %0d passes, converged %0b, want %0d", iterations, converged, want_iter);
    end
    if (digits_skipped != 32'(exp_skipped)) begin
      failures++; $display("skipped %0d want %0d", digits_skipped, exp_skipped);
    end
    if (psi_sum != 32'(exp_psi_sum)) begin
      failures++; $display("psi sum %0d want %0d", psi_sum, exp_psi_sum);
    end
    if (busy) failures++;
    checks++;
    if (n_reject != 1) failures++;
    // max_iter stop
    max_iter = 32'd5; pass_start = -1; exp_L = 0; exp_shadow = 0; pass_no = 0; exp_skipped = 0; exp_psi_sum = 0;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    wait (done);
    @(negedge clk);
    checks++;
    if (converged || iterations != 32'd5) begin
      failures++; $display("max_iter stop: %0d passes converged %0b", iterations, converged);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
