// jacobi_datapath: the two-dimensional Jacobi step of the paper's datapath
// figure, computed MSD first with online operators:
//   x0(k+1) = (-a01/a00) * x1(k) + b0/a00
//   x1(k+1) = (-a10/a11) * x0(k) + b1/a11
// Two online multipliers (delay 3) feed two online adders (delay 2), so the
// datapath has an online delay of 5: digit i of x(k+1) needs digits up to
// i+5 of x(k). This structure, the operator delays and the two-bit digit
// buses are the paper's.
//
// Interface and timing (this design's choices): on a cycle with `step` the
// multipliers take digit t (`pos`) of x(k) and of the constants c0, c1; the
// adders take digit t-3 of d0, d1 on the same cycle (the caller fetches
// them from address t-4), delayed here by one register to meet the
// multiplier's registered product. Output digit i = t-5 of both elements
// is visible two cycles after the cycle of the step that took
// digit t (`z_valid`, `z_pos`).
// `old0`/`old1` give digit i of x(k) next to output digit i for the
// comparator; the last 5 digits read are saved and restored with the
// operator state, so they are right from the first output of a restored
// pass on.
// `clear`, `restore` and `save` reach all four operators; `save` marks the
// step that takes digit t, and each adder saves the state of its matching
// step one cycle later, so a restored datapath resumes exactly after t.
module jacobi_datapath
  import dsi_pkg::*;
#(
  parameter int unsigned PMAX = 2048,
  localparam int unsigned PW  = $clog2(PMAX + DELTA + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clear,
  input  logic          restore,
  input  logic          step,
  input  logic          save,
  input  logic [PW-1:0] pos,
  input  digit_t        x0,
  input  digit_t        x1,
  input  digit_t        c0,
  input  digit_t        c1,
  input  digit_t        d0,
  input  digit_t        d1,
  output logic          z_valid,
  output logic [PW-1:0] z_pos,
  output digit_t        z0,
  output digit_t        z1,
  output digit_t        old0,
  output digit_t        old1
);

  logic   p0_valid, p1_valid;
  digit_t p0, p1;
  logic   z1_valid;

  // multiplier 0 takes x1(k), multiplier 1 takes x0(k) (crossed, as drawn)
  online_mul #(.PMAX(PMAX)) u_mul0 (
    .clk, .rst_n, .clear, .restore, .step, .save,
    .x(x1), .y(c0), .p_valid(p0_valid), .p(p0)
  );
  online_mul #(.PMAX(PMAX)) u_mul1 (
    .clk, .rst_n, .clear, .restore, .step, .save,
    .x(x0), .y(c1), .p_valid(p1_valid), .p(p1)
  );

  // align d digits and the save mark with the registered products
  digit_t d0_q, d1_q;
  logic   save_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      d0_q   <= DIG_ZERO;
      d1_q   <= DIG_ZERO;
      save_q <= 1'b0;
    end else begin
      d0_q   <= d0;
      d1_q   <= d1;
      save_q <= step & save;
    end
  end

  online_add u_add0 (
    .clk, .rst_n, .clear, .restore, .step(p0_valid), .save(save_q),
    .x(p0), .y(d0_q), .z_valid, .z(z0)
  );
  online_add u_add1 (
    .clk, .rst_n, .clear, .restore, .step(p1_valid), .save(save_q),
    .x(p1), .y(d1_q), .z_valid(z1_valid), .z(z1)
  );

  // old digits of x(k) and the position tag, DELTA steps then two cycles late;
  // the history line is part of the saved state
  digit_t        hist0 [DELTA];
  digit_t        hist1 [DELTA];
  digit_t        shist0 [DELTA];   // saved with the operator state
  digit_t        shist1 [DELTA];
  digit_t        o0_q, o1_q;
  logic [PW-1:0] pos_q, pos_qq;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < DELTA; i++) begin
        hist0[i]  <= DIG_ZERO;
        hist1[i]  <= DIG_ZERO;
        shist0[i] <= DIG_ZERO;
        shist1[i] <= DIG_ZERO;
      end
      o0_q   <= DIG_ZERO;
      o1_q   <= DIG_ZERO;
      old0   <= DIG_ZERO;
      old1   <= DIG_ZERO;
      pos_q  <= '0;
      pos_qq <= '0;
    end else begin
      if (restore) begin
        for (int i = 0; i < DELTA; i++) begin
          hist0[i] <= shist0[i];
          hist1[i] <= shist1[i];
        end
      end else if (step) begin
        hist0[0] <= x0;
        hist1[0] <= x1;
        for (int i = 1; i < DELTA; i++) begin
          hist0[i] <= hist0[i-1];
          hist1[i] <= hist1[i-1];
        end
        if (save) begin
          shist0[0] <= x0;
          shist1[0] <= x1;
          for (int i = 1; i < DELTA; i++) begin
            shist0[i] <= hist0[i-1];
            shist1[i] <= hist1[i-1];
          end
        end
        o0_q  <= hist0[DELTA-1];
        o1_q  <= hist1[DELTA-1];
        pos_q <= pos - PW'(DELTA);
      end
      if (p0_valid) begin
        old0   <= o0_q;
        old1   <= o1_q;
        pos_qq <= pos_q;
      end
    end
  end

  assign z_pos = pos_qq;

  // both lanes step together
  assert property (@(posedge clk) disable iff (!rst_n) p0_valid == p1_valid)
    else $error("jacobi_datapath: multiplier lanes out of step");
  assert property (@(posedge clk) disable iff (!rst_n) z_valid == z1_valid)
    else $error("jacobi_datapath: adder lanes out of step");

endmodule
