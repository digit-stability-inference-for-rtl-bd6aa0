// tb_stability_ctrl: self-checking test of the stability controller.
// For random |G|inf, alpha = log2((1-g)/2) and beta = log2(g) are rounded
// to the fixed-point format (alpha down, beta up); a run of updates with
// D = 0 must leave k-hat unset; the first update with D > 0 sets k-hat and
// D; every later update must give psi(k) = D + floor(alpha - (k-khat+1)
// beta) - 1, clamped to [0, PMAX], recomputed here in real arithmetic on
// the same rounded constants. psi_next must announce the next psi.
module tb_stability_ctrl;
  import dsi_pkg::*;

  localparam int unsigned PMAX = 2048;
  localparam int unsigned PW   = $clog2(PMAX + DELTA + 1);

  logic                   clk = 0, rst_n = 0;
  logic                   start = 0, update = 0;
  logic [PW-1:0]          d_in = '0;
  logic signed [AB_W-1:0] alpha = '0, beta = '0;
  logic                   khat_valid;
  logic [PW-1:0]          d_held, psi, psi_next;

  stability_ctrl #(.PMAX(PMAX)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint expect_psi(int d, longint a_fx, longint b_fx, int n);
    // floor((a - n b) / 2^AB_FRAC) with exact integers
    longint num = a_fx - longint'(n) * b_fx;
    longint fl  = (num >= 0) ? (num >>> AB_FRAC) : -((-num + (longint'(1) << AB_FRAC) - 1) >>> AB_FRAC);
    longint p   = longint'(d) + fl - 1;
    if (p < 0) p = 0;
    if (p > PMAX) p = PMAX;
    return p;
  endfunction

  initial begin
    real g, ar, br;
    int  pre, dd, iters;
    longint a_fx, b_fx, want;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 60; trial++) begin
      case (trial % 4)
        0: g = 0.5;                                       // m = 1
        1: g = 1.0 - 1.0 / real'(1 << $urandom_range(10, 1));
        2: g = real'($urandom_range(999, 1)) / 1000.0;
        default: g = 0.01;
      endcase
      ar = $ln((1.0 - g) / 2.0) / $ln(2.0);
      br = $ln(g) / $ln(2.0);
      a_fx = longint'($floor(ar * real'(1 << AB_FRAC)));
      b_fx = longint'($ceil(br * real'(1 << AB_FRAC)));
      alpha = AB_W'(a_fx); beta = AB_W'(b_fx);
      pre   = $urandom_range(3);
      dd    = $urandom_range(40, 1);
      iters = $urandom_range(300, 20);
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      for (int k = 0; k < pre; k++) begin
        d_in = '0; update = 1; @(negedge clk); update = 0; @(negedge clk);
      end
      checks++;
      if (khat_valid) begin failures++; $display("k-hat set by D = 0"); end
      // k-hat
      d_in = PW'(dd); update = 1; @(negedge clk); update = 0; @(negedge clk);
      checks++;
      want = expect_psi(dd, a_fx, b_fx, 1);
      if (!khat_valid || d_held != PW'(dd) || longint'(psi) != want) begin
        failures++;
        $display("trial %0d k-hat: psi %0d want %0d", trial, psi, want);
      end
      for (int n = 2; n <= iters; n++) begin
        checks++;
        if (longint'(psi_next) != expect_psi(dd, a_fx, b_fx, n)) begin
          failures++;
          $display("trial %0d n=%0d: psi_next %0d want %0d", trial, n, psi_next, expect_psi(dd, a_fx, b_fx, n));
        end
        d_in = PW'($urandom_range(PMAX));   // ignored after k-hat
        update = 1; @(negedge clk); update = 0; @(negedge clk);
        want = expect_psi(dd, a_fx, b_fx, n);
        checks++;
        if (longint'(psi) != want) begin
          failures++;
          $display("trial %0d n=%0d: psi %0d want %0d (g=%f)", trial, n, psi, want, g);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
