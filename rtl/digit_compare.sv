// digit_compare: on-the-fly comparison of the digits of approximant k with
// those of approximant k-1, as the paper's prototype does while approximant
// k is being generated.
//
// For each vector element it counts the leading run of digit positions at
// which the two approximants hold the same signed digit (the digits
// themselves are compared, not the values, since the representation is
// redundant). D is the smallest run over the elements: the number of MSDs
// identical "across all pairs of elements". A run is only counted from
// digit 1 upward, so D is meaningful for a pass that generated every digit.
//
// `first_diff` is the lowest position of the pass at which any element
// changed; the sequencer uses it to confirm a saved operator state.
//
// It also checks the paper's guarantee: a digit at a position the stability
// controller declared stable (pos <= psi) must not change. Such a change is
// counted in `violations`. The paper's theorem says this cannot happen; in
// simulation a few such changes do occur, because a close value can have
// another redundant digit string. That is why the sequencer confirms a saved
// operator state before it reuses it, instead of trusting psi.
//
// Timing: `start` clears the runs and first_diff before a pass (and the
// violation count too when `clear_stats` is high); each cycle with `valid`
// presents digit `pos` of both elements in increasing position order; `d`
// is read after the last digit.
module digit_compare
  import dsi_pkg::*;
#(
  parameter int unsigned PMAX = 2048,
  localparam int unsigned PW  = $clog2(PMAX + DELTA + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic          clear_stats, // zero the violation count
  input  logic          valid,
  input  logic          cmp_en,     // the old digit at this position is known
  input  logic [PW-1:0] pos,
  input  digit_t        new_d [N],
  input  digit_t        old_d [N],
  input  logic [PW-1:0] psi,        // digits declared stable in this approximant
  output logic [PW-1:0] d,
  output logic [PW-1:0] first_diff, // lowest position that changed ('1: none)
  output logic [15:0]   violations
);

  logic [N-1:0]  same;
  logic [PW-1:0] run [N];

  // elements whose digit differs at this position
  logic [$clog2(N+1)-1:0] n_diff;
  always_comb begin
    n_diff = '0;
    for (int j = 0; j < N; j++) n_diff += $bits(n_diff)'(new_d[j] != old_d[j]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      same       <= '1;
      violations <= '0;
      first_diff <= '1;
      for (int j = 0; j < N; j++) run[j] <= '0;
    end else if (start) begin
      same       <= '1;
      first_diff <= '1;
      if (clear_stats) violations <= '0;
      for (int j = 0; j < N; j++) run[j] <= '0;
    end else if (valid) begin
      if (cmp_en && n_diff != '0 && pos < first_diff) first_diff <= pos;
      for (int j = 0; j < N; j++) begin
        if (cmp_en && same[j] && new_d[j] == old_d[j]) run[j] <= pos;
        else same[j] <= 1'b0;
      end
      if (cmp_en && pos <= psi && violations < 16'hFFF0)
        violations <= violations + 16'(n_diff);
    end
  end

  always_comb begin
    d = run[0];
    for (int j = 1; j < N; j++) if (run[j] < d) d = run[j];
  end

endmodule
