// online_add: radix-2 signed-digit online adder, online delay 2, with a
// one-entry state snapshot.
//
// Addends x and y arrive one signed digit per step, MSD first; the sum digit
// z leaves one step later than it could be first known: the first sum digit
// is produced at the third step (online delay 2, the paper's value for its
// adder). The recurrence works on a residual counted in quarters:
//   v = 2 w + (x + y)            (i.e. 2w + (x+y) 2^-2)
//   z = +1 if v >= 2, -1 if v < -2, else 0   (0 in the 2 first steps)
//   w = v - 4 z
// so w = 2^j (X + Y - Z) exactly. The residual is a few bits wide whatever
// the precision; the sum must lie in (-1, 1) for the digits to be valid.
// The selection on the exact residual is this design's choice; the paper
// names the operator and its delay only.
//
// Interface and timing as online_mul: `step`, `clear`, `save`, `restore`;
// the sum digit is registered (`z_valid`/`z` show the previous step's).
module online_add
  import dsi_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   clear,
  input  logic   restore,
  input  logic   step,
  input  logic   save,
  input  digit_t x,
  input  digit_t y,
  output logic   z_valid,
  output digit_t z
);

  typedef struct packed {
    logic signed [5:0] w;     // residual in units of 2^-2
    logic        [1:0] cnt;   // initial steps taken, saturates at 2
  } add_state_t;

  add_state_t st, st_nx, shadow;
  logic signed [5:0] v;
  digit_t            z_nx;

  always_comb begin
    st_nx = st;
    v     = (st.w <<< 1) + 6'(signed'(x)) + 6'(signed'(y));
    if (st.cnt != 2'd2) begin
      z_nx      = DIG_ZERO;
      st_nx.cnt = st.cnt + 2'd1;
    end else if (v >= 6'sd2) begin
      z_nx = DIG_POS;
    end else if (v < -6'sd2) begin
      z_nx = DIG_NEG;
    end else begin
      z_nx = DIG_ZERO;
    end
    unique case (z_nx)
      DIG_POS: st_nx.w = v - 6'sd4;
      DIG_NEG: st_nx.w = v + 6'sd4;
      default: st_nx.w = v;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st      <= '0;
      shadow  <= '0;
      z_valid <= 1'b0;
      z       <= DIG_ZERO;
    end else begin
      z_valid <= 1'b0;
      if (clear) begin
        st <= '0;
      end else if (restore) begin
        st <= shadow;
      end else if (step) begin
        st      <= st_nx;
        z_valid <= (st.cnt == 2'd2);
        z       <= z_nx;
        if (save) shadow <= st_nx;
      end
    end
  end

  // the residual stays within +-8 quarters whenever |x + y| < 1
  assert property (@(posedge clk) disable iff (!rst_n) (st.w <= 6'sd8) && (st.w >= -6'sd8))
    else $error("online_add: residual out of range");

endmodule
