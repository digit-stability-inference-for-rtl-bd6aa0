// tb_jacobi_datapath: self-checking test of the Jacobi datapath.
// Random digit strings x0, x1, c0, c1, d0, d1 of NDIG digits (first digit 0
// so every sum stays inside (-1, 1)) are streamed as the datapath expects:
// digit t of x and c with digit t-3 of d, t = 1 .. NDIG+5. Checked:
//   - z0 = c0*x1 + d0 and z1 = c1*x0 + d1 within 3 * 2^-NDIG (exact
//     integer arithmetic),
//   - output digit i is visible two cycles after the cycle of the step that took digit
//     i+5 (online delay 5 plus the operators' output registers) with the
//     right position tag, and old0/old1 carry x0/x1 digit i,
//   - after save at digit L and restore, the tail reproduces the digits.
module tb_jacobi_datapath;
  import dsi_pkg::*;

  localparam int unsigned PMAX = 64;
  localparam int unsigned NDIG = 40;
  localparam int unsigned PW   = $clog2(PMAX + DELTA + 1);

  logic          clk = 0, rst_n = 0;
  logic          clear = 0, restore = 0, step = 0, save = 0;
  logic [PW-1:0] pos = '0;
  digit_t        x0 = DIG_ZERO, x1 = DIG_ZERO, c0 = DIG_ZERO, c1 = DIG_ZERO, d0 = DIG_ZERO, d1 = DIG_ZERO;
  logic          z_valid;
  logic [PW-1:0] z_pos;
  digit_t        z0, z1, old0, old1;

  jacobi_datapath #(.PMAX(PMAX)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef digit_t str_t [NDIG+8];
  str_t xs0, xs1, cs0, cs1, ds0, ds1;
  digit_t zo0 [NDIG+1], zo1 [NDIG+1], zr0 [NDIG+1], zr1 [NDIG+1];
  int     cyc, step_cyc [NDIG+8];

  function automatic digit_t rnd_digit();
    int r = $urandom_range(2, 0);
    return (r == 0) ? DIG_NEG : (r == 1) ? DIG_ZERO : DIG_POS;
  endfunction

  function automatic logic signed [191:0] sval(digit_t d [NDIG+1]);
    logic signed [191:0] v = 0;
    for (int i = 1; i <= NDIG; i++) v = v * 2 + 192'(signed'(d[i]));
    return v;
  endfunction

  // positions are 1-based: s[t] is digit t, zero beyond NDIG
  function automatic digit_t at(str_t s, int t);
    return (t >= 1 && t <= NDIG) ? s[t] : DIG_ZERO;
  endfunction

  always @(posedge clk) cyc <= cyc + 1;

  // output monitor
  bit collect_restored = 0;
  always @(posedge clk) begin
    #1;
    if (z_valid && z_pos >= 1 && z_pos <= NDIG) begin
      if (!collect_restored) begin
        zo0[z_pos] = z0; zo1[z_pos] = z1;
        checks++;
        if (cyc - step_cyc[z_pos + DELTA] != 2 || old0 != xs0[z_pos] || old1 != xs1[z_pos]) begin
          failures++;
          $display("digit %0d: %0d cycles after its step, old %0d/%0d", z_pos,
                   cyc - step_cyc[z_pos + DELTA], old0, old1);
        end
      end else begin
        zr0[z_pos] = z0; zr1[z_pos] = z1;
      end
    end
  end

  task automatic run(int from, int save_at);
    for (int t = from; t <= NDIG + DELTA; t++) begin
      @(negedge clk);
      step = 1; pos = PW'(t); save = (t == save_at);
      x0 = at(xs0, t); x1 = at(xs1, t); c0 = at(cs0, t); c1 = at(cs1, t);
      d0 = at(ds0, t - 3); d1 = at(ds1, t - 3);
      step_cyc[t] = cyc;
    end
    @(negedge clk); step = 0; save = 0;
    repeat (5) @(posedge clk);
  endtask

  initial begin
    logic signed [191:0] e0, e1, sc, b;
    int L;
    cyc = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 30; trial++) begin
      for (int i = 0; i < NDIG + 8; i++) begin
        xs0[i] = (i > 1 && i <= NDIG) ? rnd_digit() : DIG_ZERO;
        xs1[i] = (i > 1 && i <= NDIG) ? rnd_digit() : DIG_ZERO;
        cs0[i] = (i > 1 && i <= NDIG) ? rnd_digit() : DIG_ZERO;
        cs1[i] = (i > 1 && i <= NDIG) ? rnd_digit() : DIG_ZERO;
        ds0[i] = (i > 1 && i <= NDIG) ? rnd_digit() : DIG_ZERO;
        ds1[i] = (i > 1 && i <= NDIG) ? rnd_digit() : DIG_ZERO;
      end
      @(negedge clk); clear = 1; @(negedge clk); clear = 0;
      collect_restored = 0;
      L = 8 + $urandom_range(NDIG - 10);
      run(1, L);
      // exact check: 2^(2N) (c x + d) - 2^N z
      begin
        digit_t a [NDIG+1], bb [NDIG+1], c [NDIG+1];
        for (int i = 1; i <= NDIG; i++) begin a[i] = cs0[i]; bb[i] = xs1[i]; c[i] = ds0[i]; end
        e0 = sval(a) * sval(bb) + (sval(c) <<< NDIG) - (sval(zo0) <<< NDIG);
        for (int i = 1; i <= NDIG; i++) begin a[i] = cs1[i]; bb[i] = xs0[i]; c[i] = ds1[i]; end
        e1 = sval(a) * sval(bb) + (sval(c) <<< NDIG) - (sval(zo1) <<< NDIG);
      end
      b = 192'sd3 <<< NDIG;
      checks += 2;
      if (e0 >= b || e0 <= -b) begin failures++; $display("trial %0d: z0 off", trial); end
      if (e1 >= b || e1 <= -b) begin failures++; $display("trial %0d: z1 off", trial); end
      // replay from the saved state
      @(negedge clk); clear = 1; @(negedge clk); clear = 0;
      @(negedge clk); restore = 1; @(negedge clk); restore = 0;
      collect_restored = 1;
      run(L + 1, 0);
      checks++;
      begin
        bit same = 1;
        for (int i = L - 4; i <= NDIG; i++) if (zr0[i] != zo0[i] || zr1[i] != zo1[i]) same = 0;
        if (!same) begin failures++; $display("trial %0d: restore mismatch", trial); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
