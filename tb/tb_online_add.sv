// tb_online_add: self-checking test of the online adder.
// Random signed-digit addends of NDIG digits whose first digit is 0 (so
// |x + y| < 1) are streamed MSD first with 2 zero digits after them; the
// NDIG sum digits must satisfy |X + Y - Z| <= 2^-NDIG exactly, and the
// first sum digit must appear after exactly 3 steps (online delay 2). A
// save/clear/restore replay of the tail must reproduce the digits.
module tb_online_add;
  import dsi_pkg::*;

  localparam int unsigned NDIG = 40;

  logic   clk = 0, rst_n = 0;
  logic   clear = 0, restore = 0, step = 0, save = 0;
  digit_t x = DIG_ZERO, y = DIG_ZERO;
  logic   z_valid;
  digit_t z;

  online_add dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  digit_t xs [NDIG+2], ys [NDIG+2];
  digit_t zs [NDIG], zs2 [NDIG];
  int     nz, first_step;

  function automatic digit_t rnd_digit();
    int r = $urandom_range(2, 0);
    return (r == 0) ? DIG_NEG : (r == 1) ? DIG_ZERO : DIG_POS;
  endfunction

  function automatic longint sval(digit_t d [NDIG]);
    longint v = 0;
    for (int i = 0; i < NDIG; i++) v = v * 2 + longint'(signed'(d[i]));
    return v;
  endfunction

  task automatic do_step(digit_t a, digit_t b, bit sv, int stepno, ref digit_t out [NDIG]);
    x = a; y = b; step = 1; save = sv;
    @(posedge clk); #1;
    step = 0; save = 0;
    if (z_valid) begin
      if (nz == 0) first_step = stepno;
      if (nz < NDIG) out[nz] = z;
      nz++;
    end
  endtask

  initial begin
    digit_t xd [NDIG], yd [NDIG];
    longint err;
    int L;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 200; trial++) begin
      for (int i = 0; i < NDIG + 2; i++) begin
        xs[i] = (i > 0 && i < NDIG) ? rnd_digit() : DIG_ZERO;
        ys[i] = (i > 0 && i < NDIG) ? rnd_digit() : DIG_ZERO;
      end
      if (trial == 0) for (int i = 1; i < NDIG; i++) begin xs[i] = DIG_POS; ys[i] = DIG_POS; end
      if (trial == 1) for (int i = 1; i < NDIG; i++) begin xs[i] = DIG_NEG; ys[i] = DIG_NEG; end
      @(negedge clk); clear = 1; @(posedge clk); #1; clear = 0;
      nz = 0;
      L = 4 + $urandom_range(NDIG - 6);
      for (int i = 0; i < NDIG + 2; i++) do_step(xs[i], ys[i], (i + 1 == L), i + 1, zs);
      @(posedge clk); #1;
      checks++;
      if (first_step != 3 || nz != NDIG) begin
        failures++;
        $display("latency: first digit after step %0d, %0d digits", first_step, nz);
      end
      for (int i = 0; i < NDIG; i++) begin xd[i] = xs[i]; yd[i] = ys[i]; end
      err = sval(xd) + sval(yd) - sval(zs);
      checks++;
      if (err > 1 || err < -1) begin
        failures++;
        $display("trial %0d: sum error %0d ulp", trial, err);
      end
      @(negedge clk); clear = 1; @(posedge clk); #1; clear = 0;
      @(negedge clk); restore = 1; @(posedge clk); #1; restore = 0;
      nz = L - 2;
      for (int i = L; i < NDIG + 2; i++) do_step(xs[i], ys[i], 1'b0, i + 1, zs2);
      @(posedge clk); #1;
      checks++;
      begin
        bit same = 1;
        for (int i = L - 2; i < NDIG; i++) if (zs2[i] != zs[i]) same = 0;
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
