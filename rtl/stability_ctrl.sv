// stability_ctrl: digit stability inference (the paper's Theorem 1 as used
// by its prototype).
//
// After each pass that generated every digit, the comparator reports D, the
// number of leading digits identical between the two newest approximants.
// The first time D > 0 (approximants k-1 and k), k is designated k-hat and D
// is held. From then on the number of digits of approximant k that are
// known never to change again is
//   psi(k) = D + floor(alpha - (k - khat + 1) beta) - 1
// with alpha = log2((1-|G|inf)/2) and beta = log2(|G|inf) supplied by the
// host, so no logarithm or power is computed here. As in the paper the
// floor term is kept incrementally: an accumulator starts at alpha - beta
// for k = k-hat and loses beta (gains |beta|) for each further approximant.
// psi is clamped to [0, PMAX]. alpha and beta are signed fixed point with
// AB_FRAC fractional bits (format chosen here); to stay safe the host should
// round alpha down and beta up.
//
// Timing: `start` (one cycle, before the first pass) clears k-hat; `update`
// (one cycle, after pass k) presents that pass's D and advances to the next
// approximant. `psi` then holds psi for the approximant just finished, valid
// when `khat_valid`; `psi_next` is psi for the approximant after it.
module stability_ctrl
  import dsi_pkg::*;
#(
  parameter int unsigned PMAX = 2048,
  localparam int unsigned PW  = $clog2(PMAX + DELTA + 1)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   start,
  input  logic                   update,
  input  logic [PW-1:0]          d_in,
  input  logic signed [AB_W-1:0] alpha,
  input  logic signed [AB_W-1:0] beta,
  output logic                   khat_valid,
  output logic [PW-1:0]          d_held,
  output logic [PW-1:0]          psi,
  output logic [PW-1:0]          psi_next
);

  localparam int unsigned ACC_W = AB_W + 16;
  localparam int unsigned AW2   = ACC_W - AB_FRAC + 1;

  logic signed [ACC_W-1:0] acc;      // alpha - (k - khat + 1) beta, next approximant

  function automatic logic [PW-1:0] psi_of(logic [PW-1:0] dd, logic signed [ACC_W-1:0] a);
    logic signed [AW2-1:0] s;
    s = AW2'($signed({1'b0, dd})) + AW2'(a >>> AB_FRAC) - AW2'(1);
    if (s < 0)                    return '0;
    else if (s > AW2'(PMAX))      return PW'(PMAX);
    else                          return PW'(s);
  endfunction

  logic signed [ACC_W-1:0] alpha_x, beta_x;
  assign alpha_x = ACC_W'(alpha);
  assign beta_x  = ACC_W'(beta);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      khat_valid <= 1'b0;
      d_held     <= '0;
      acc        <= '0;
      psi        <= '0;
    end else if (start) begin
      khat_valid <= 1'b0;
      d_held     <= '0;
      acc        <= '0;
      psi        <= '0;
    end else if (update) begin
      if (!khat_valid) begin
        if (d_in != '0) begin
          khat_valid <= 1'b1;
          d_held     <= d_in;
          psi        <= psi_of(d_in, alpha_x - beta_x);
          acc        <= alpha_x - beta_x - beta_x;
        end
      end else begin
        psi <= psi_of(d_held, acc);
        // stop accumulating once psi is at its ceiling
        if (psi_of(d_held, acc) != PW'(PMAX)) acc <= acc - beta_x;
      end
    end
  end

  assign psi_next = khat_valid ? psi_of(d_held, acc) : '0;

endmodule
