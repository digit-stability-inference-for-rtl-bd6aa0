// dsi_jacobi_top: arbitrary-precision two-dimensional Jacobi solver with
// digit stability inference.
//
// The solver iterates x(k+1) = G x(k) + M^-1 b for a 2x2 system A x = b
// with M = diag(A), computing every approximant MSD first in radix-2
// signed digits through the online datapath of jacobi_datapath. While an
// approximant is generated its digits are compared with those of the
// previous one (digit_compare). The first time the two share D > 0 leading
// digits, stability_ctrl fixes k-hat and from then on gives psi(k), the
// number of leading digits of approximant k proven never to change again
// (the paper's Theorem 1). dsi_sequencer uses psi to skip the generation of
// those digits in later passes and to stop once `target` digits are stable.
//
// Memories (digit_mem, one bank each, address a = digit a+1):
//   X0, X1  the approximant, updated in place (load x(0) before start)
//   C0, C1  -a01/a00 and -a10/a11 as digit strings
//   D0, D1  b0/a00 and b1/a11 as digit strings
// The host writes and reads them through the host port while the solver is
// idle (`host_bank` uses dsi_pkg::bank_e codes; read data one cycle after
// `host_re`). Every value, including each element of every approximant and
// every intermediate sum, must lie in (-1, 1); the host scales A and b so.
// alpha = log2((1-|G|inf)/2) and beta = log2(|G|inf) are signed fixed point
// with dsi_pkg::AB_FRAC fractional bits.
//
// What follows the paper: the datapath structure, operator delays and digit
// width, the comparison of successive approximants, k-hat, psi and its
// incremental evaluation from alpha and beta. This design's own choices:
// full-width operator registers of PMAX digits (the paper's operators grow
// their precision in memory without bound), the state save/restore by which
// stable digits are skipped, the in-place approximant memory, the host port
// and the stopping rule on psi.
module dsi_jacobi_top
  import dsi_pkg::*;
#(
  parameter int unsigned PMAX = 2048,
  localparam int unsigned PW  = $clog2(PMAX + DELTA + 1),
  localparam int unsigned AW  = $clog2(PMAX)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // host memory port (use while idle)
  input  logic                   host_we,
  input  logic                   host_re,
  input  logic [2:0]             host_bank,
  input  logic [AW-1:0]          host_addr,
  input  digit_t                 host_wdata,
  output digit_t                 host_rdata,
  // configuration
  input  logic [PW-1:0]          prec,
  input  logic [PW-1:0]          target,
  input  logic [31:0]            max_iter,
  input  logic                   skip_en,
  input  logic signed [AB_W-1:0] alpha,
  input  logic signed [AB_W-1:0] beta,
  input  logic                   start,
  // status
  output logic                   busy,
  output logic                   done,
  output logic                   converged,
  output logic                   khat_valid,
  output logic [PW-1:0]          d_held,
  output logic [PW-1:0]          psi,
  output logic [PW-1:0]          psi_next,
  output logic [31:0]            iterations,
  output logic [31:0]            cycles,
  output logic [31:0]            digits_generated,
  output logic [31:0]            digits_skipped,
  output logic [31:0]            psi_sum,
  output logic [31:0]            restores,
  output logic [15:0]            violations
);

  // sequencer <-> memories and datapath
  logic          rd_en, rd_d_en, wr_en;
  logic [AW-1:0] rd_addr, rd_d_addr, wr_addr;
  logic          dp_clear, dp_restore, dp_step, dp_save, dp_zero_xc, dp_zero_d;
  logic [PW-1:0] dp_pos, z_pos;
  logic          z_valid;
  digit_t        z0, z1, old0, old1;
  logic          cmp_start, cmp_en, stab_start, stab_update;
  logic [PW-1:0] cmp_psi, cmp_d, first_diff;
  logic          cmp_clear;

  // memory ports
  logic          x_re, cd_re, d_re;
  logic [AW-1:0] x_raddr, c_raddr, d_raddr;
  logic          x0_we, x1_we;
  logic [AW-1:0] x_waddr;
  digit_t        x0_wdata, x1_wdata;
  digit_t        x0_q, x1_q, c0_q, c1_q, d0_q, d1_q;

  wire host_sel_w  = host_we && !busy;
  wire host_sel_r  = host_re && !busy;

  assign x_re     = rd_en || host_sel_r;
  assign x_raddr  = busy ? rd_addr : host_addr;
  assign cd_re    = rd_en || host_sel_r;
  assign c_raddr  = busy ? rd_addr : host_addr;
  assign d_re     = rd_d_en || host_sel_r;
  assign d_raddr  = busy ? rd_d_addr : host_addr;
  assign x0_we    = busy ? wr_en : (host_sel_w && host_bank == BANK_X0);
  assign x1_we    = busy ? wr_en : (host_sel_w && host_bank == BANK_X1);
  assign x_waddr  = busy ? wr_addr : host_addr;
  assign x0_wdata = busy ? z0 : host_wdata;
  assign x1_wdata = busy ? z1 : host_wdata;

  digit_mem #(.DEPTH(PMAX)) u_x0 (.clk, .re(x_re),  .raddr(x_raddr), .rdata(x0_q),
    .we(x0_we), .waddr(x_waddr), .wdata(x0_wdata));
  digit_mem #(.DEPTH(PMAX)) u_x1 (.clk, .re(x_re),  .raddr(x_raddr), .rdata(x1_q),
    .we(x1_we), .waddr(x_waddr), .wdata(x1_wdata));
  digit_mem #(.DEPTH(PMAX)) u_c0 (.clk, .re(cd_re), .raddr(c_raddr), .rdata(c0_q),
    .we(host_sel_w && host_bank == BANK_C0), .waddr(host_addr), .wdata(host_wdata));
  digit_mem #(.DEPTH(PMAX)) u_c1 (.clk, .re(cd_re), .raddr(c_raddr), .rdata(c1_q),
    .we(host_sel_w && host_bank == BANK_C1), .waddr(host_addr), .wdata(host_wdata));
  digit_mem #(.DEPTH(PMAX)) u_d0 (.clk, .re(d_re),  .raddr(d_raddr), .rdata(d0_q),
    .we(host_sel_w && host_bank == BANK_D0), .waddr(host_addr), .wdata(host_wdata));
  digit_mem #(.DEPTH(PMAX)) u_d1 (.clk, .re(d_re),  .raddr(d_raddr), .rdata(d1_q),
    .we(host_sel_w && host_bank == BANK_D1), .waddr(host_addr), .wdata(host_wdata));

  // host read-back
  logic [2:0] host_bank_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) host_bank_q <= '0;
    else if (host_sel_r) host_bank_q <= host_bank;
  end
  always_comb begin
    unique case (host_bank_q)
      BANK_X0: host_rdata = x0_q;
      BANK_X1: host_rdata = x1_q;
      BANK_C0: host_rdata = c0_q;
      BANK_C1: host_rdata = c1_q;
      BANK_D0: host_rdata = d0_q;
      BANK_D1: host_rdata = d1_q;
      default: host_rdata = DIG_ZERO;
    endcase
  end

  jacobi_datapath #(.PMAX(PMAX)) u_dp (
    .clk, .rst_n,
    .clear(dp_clear), .restore(dp_restore), .step(dp_step), .save(dp_save), .pos(dp_pos),
    .x0(dp_zero_xc ? DIG_ZERO : x0_q), .x1(dp_zero_xc ? DIG_ZERO : x1_q),
    .c0(dp_zero_xc ? DIG_ZERO : c0_q), .c1(dp_zero_xc ? DIG_ZERO : c1_q),
    .d0(dp_zero_d  ? DIG_ZERO : d0_q), .d1(dp_zero_d  ? DIG_ZERO : d1_q),
    .z_valid, .z_pos, .z0, .z1, .old0, .old1
  );

  digit_compare #(.PMAX(PMAX)) u_cmp (
    .clk, .rst_n, .start(cmp_start), .clear_stats(cmp_clear), .valid(z_valid && z_pos != '0 && z_pos <= prec),
    .cmp_en, .pos(z_pos), .new_d('{z0, z1}), .old_d('{old0, old1}),
    .psi(cmp_psi), .d(cmp_d), .first_diff, .violations
  );

  stability_ctrl #(.PMAX(PMAX)) u_stab (
    .clk, .rst_n, .start(stab_start), .update(stab_update), .d_in(cmp_d),
    .alpha, .beta, .khat_valid, .d_held, .psi, .psi_next
  );

  dsi_sequencer #(.PMAX(PMAX)) u_seq (
    .clk, .rst_n, .start, .prec, .target, .max_iter, .skip_en,
    .rd_en, .rd_addr, .rd_d_en, .rd_d_addr,
    .dp_clear, .dp_restore, .dp_step, .dp_save, .dp_pos, .dp_zero_xc, .dp_zero_d,
    .z_valid, .z_pos, .wr_en, .wr_addr,
    .cmp_start, .cmp_en, .cmp_psi, .cmp_clear, .first_diff,
    .stab_start, .stab_update, .khat_valid, .psi,
    .busy, .done, .converged, .iterations, .cycles,
    .digits_generated, .digits_skipped, .psi_sum, .restores
  );

endmodule
