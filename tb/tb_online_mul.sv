// tb_online_mul: self-checking test of the online multiplier.
// Random signed-digit operands of NDIG digits are streamed MSD first
// (with 3 zero digits after them); the NDIG product digits are collected
// and checked against the exact product: |X*Y - P| < 2 * 2^-NDIG, which is
// the bound on the kept residual. The first product digit must appear
// after exactly 4 steps (online delay 3). A second pass saves the state at
// step L, runs on, clears, restores and replays the tail; it must give the
// same digits.
module tb_online_mul;
  import dsi_pkg::*;

  localparam int unsigned PMAX = 64;
  localparam int unsigned NDIG = 48;

  logic   clk = 0, rst_n = 0;
  logic   clear = 0, restore = 0, step = 0, save = 0;
  digit_t x = DIG_ZERO, y = DIG_ZERO;
  logic   p_valid;
  digit_t p;

  online_mul #(.PMAX(PMAX)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  digit_t xs [NDIG+3], ys [NDIG+3];
  digit_t ps [NDIG], ps2 [NDIG];
  int     np, first_step;

  function automatic digit_t rnd_digit();
    int r = $urandom_range(2, 0);
    return (r == 0) ? DIG_NEG : (r == 1) ? DIG_ZERO : DIG_POS;
  endfunction

  // value of a digit string as an integer scaled by 2^NDIG
  function automatic logic signed [255:0] sval(digit_t d [], int n);
    logic signed [255:0] v = 0;
    for (int i = 0; i < n; i++) v = v * 2 + 256'(signed'(d[i]));
    return v;
  endfunction

  // one step, with capture of the registered product digit of the previous step
  task automatic do_step(digit_t a, digit_t b, bit sv, int stepno, ref digit_t out [NDIG]);
    x = a; y = b; step = 1; save = sv;
    @(posedge clk); #1;
    step = 0; save = 0;
    if (p_valid) begin
      if (np == 0) first_step = stepno;
      if (np < NDIG) out[np] = p;
      np++;
    end
  endtask

  initial begin
    digit_t xd [], yd [], pd [];
    logic signed [255:0] xv, yv, pv, err, bound;
    int L;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 40; trial++) begin
      for (int i = 0; i < NDIG + 3; i++) begin
        xs[i] = (i < NDIG) ? rnd_digit() : DIG_ZERO;
        ys[i] = (i < NDIG) ? rnd_digit() : DIG_ZERO;
      end
      if (trial == 0) for (int i = 0; i < NDIG; i++) begin xs[i] = DIG_POS; ys[i] = DIG_POS; end
      if (trial == 1) for (int i = 0; i < NDIG; i++) begin xs[i] = DIG_POS; ys[i] = DIG_NEG; end
      @(negedge clk); clear = 1; @(posedge clk); #1; clear = 0;
      np = 0;
      L = 6 + $urandom_range(NDIG - 8);
      for (int i = 0; i < NDIG + 3; i++) do_step(xs[i], ys[i], (i + 1 == L), i + 1, ps);
      // the registered digit of the last step
      @(posedge clk); #1;
      checks++;
      if (first_step != 4 || np != NDIG) begin
        failures++;
        $display("latency: first digit after step %0d, %0d digits", first_step, np);
      end
      xd = new[NDIG]; yd = new[NDIG]; pd = new[NDIG];
      for (int i = 0; i < NDIG; i++) begin xd[i] = xs[i]; yd[i] = ys[i]; pd[i] = ps[i]; end
      xv = sval(xd, NDIG); yv = sval(yd, NDIG); pv = sval(pd, NDIG);
      err   = xv * yv - (pv <<< NDIG);
      bound = 256'sd2 <<< NDIG;
      checks++;
      if (err >= bound || err <= -bound) begin
        failures++;
        $display("trial %0d: product error too large", trial);
      end
      // restore the state saved after step L and replay the tail
      @(negedge clk); clear = 1; @(posedge clk); #1; clear = 0;
      @(negedge clk); restore = 1; @(posedge clk); #1; restore = 0;
      np = L - 3;
      for (int i = L; i < NDIG + 3; i++) do_step(xs[i], ys[i], 1'b0, i + 1, ps2);
      @(posedge clk); #1;
      checks++;
      begin
        bit same = 1;
        for (int i = L - 3; i < NDIG; i++) if (ps2[i] != ps[i]) same = 0;
        if (!same) begin
          failures++;
          $display("trial %0d: restored state gives other digits", trial);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
