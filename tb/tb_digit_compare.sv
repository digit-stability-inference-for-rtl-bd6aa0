// tb_digit_compare: self-checking test of the leading-identical-digit
// counter. Pairs of digit strings share a random common prefix per element
// and then differ; D must be the smallest prefix. Positions with cmp_en low
// must end a run; first_diff must be the lowest changed position;
// positions at or below psi that differ must be counted as
// violations, others not.
module tb_digit_compare;
  import dsi_pkg::*;

  localparam int unsigned PMAX = 64;
  localparam int unsigned PW   = $clog2(PMAX + DELTA + 1);
  localparam int unsigned NDIG = 48;

  logic          clk = 0, rst_n = 0;
  logic          start = 0, clear_stats = 0, valid = 0, cmp_en = 1;
  logic [PW-1:0] pos = '0, psi = '0;
  digit_t        new_d [N], old_d [N];
  logic [PW-1:0] d, first_diff;
  logic [15:0]   violations;

  digit_compare #(.PMAX(PMAX)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    // clear_stats zeroes the violation count at a pass start
    @(negedge clk); start = 1; clear_stats = 1; @(negedge clk); start = 0; clear_stats = 0;
    checks++;
    if (violations != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic digit_t rnd_digit();
    int r = $urandom_range(2, 0);
    return (r == 0) ? DIG_NEG : (r == 1) ? DIG_ZERO : DIG_POS;
  endfunction

  function automatic digit_t other(digit_t a);
    return (a == DIG_POS) ? DIG_ZERO : (a == DIG_ZERO) ? DIG_NEG : DIG_POS;
  endfunction

  initial begin
    int pre [N];
    int want, cut, viol_want, viol_base, fd_want;
    digit_t a, b;
    for (int j = 0; j < N; j++) begin new_d[j] = DIG_ZERO; old_d[j] = DIG_ZERO; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 300; trial++) begin
      for (int j = 0; j < N; j++) pre[j] = $urandom_range(NDIG);
      cut  = ($urandom_range(3) == 0) ? $urandom_range(NDIG, 1) : NDIG + 1;  // cmp_en drops here
      psi  = PW'($urandom_range(NDIG));
      want = NDIG;
      for (int j = 0; j < N; j++) if (pre[j] < want) want = pre[j];
      if (cut - 1 < want) want = cut - 1;
      fd_want = NDIG + 1;
      for (int j = 0; j < N; j++) if (pre[j] + 1 < fd_want) fd_want = pre[j] + 1;
      if (fd_want >= cut) fd_want = -1;
      if (fd_want == NDIG + 1) fd_want = -1;
      viol_want = 0;
      viol_base = violations;
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      for (int i = 1; i <= NDIG; i++) begin
        valid = 1; pos = PW'(i); cmp_en = (i < cut);
        for (int j = 0; j < N; j++) begin
          a = rnd_digit();
          b = (i <= pre[j]) ? a : other(a);
          new_d[j] = a; old_d[j] = b;
          if (cmp_en && i <= psi && a != b) viol_want++;
        end
        @(negedge clk);
      end
      valid = 0;
      @(negedge clk);
      checks += 3;
      if ((fd_want < 0 && first_diff != '1) || (fd_want >= 0 && first_diff != PW'(fd_want))) begin
        failures++;
        $display("trial %0d: first_diff=%0d want %0d", trial, first_diff, fd_want);
      end
      if (d != PW'(want)) begin
        failures++;
        $display("trial %0d: D=%0d want %0d", trial, d, want);
      end
      if (int'(violations) - viol_base != viol_want) begin
        failures++;
        $display("trial %0d: %0d violations want %0d", trial, int'(violations) - viol_base, viol_want);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
