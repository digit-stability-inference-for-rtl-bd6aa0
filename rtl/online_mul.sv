// online_mul: radix-2 signed-digit serial-serial online multiplier, online
// delay 3, with a one-entry state snapshot.
//
// Operands x and y arrive one signed digit per step, MSD first; the product
// p = x*y leaves one digit per step, MSD first, starting at the fourth step
// (online delay 3, as the paper gives for its multiplier). The recurrence is
// the classical one for online multiplication:
//   X[j+1] = X[j] + x 2^-t,  Y[j+1] = Y[j] + y 2^-t     (t = j+4)
//   v      = 2 w + (X[j] y + Y[j+1] x) 2^-3
//   p      = +1 if v >= 1/2, -1 if v < -1/2, else 0     (0 in the 3 first steps)
//   w      = v - p
// so w = 2^j (X Y - P) holds exactly after every step. This design keeps X, Y
// and w as full-width two's-complement registers of F = PMAX+8 fractional bits
// and selects on the exact residual; the paper's arbitrary-precision operators
// instead keep their state in memory and take more cycles per digit as the
// digit's significance falls. PMAX is therefore the longest operand, in
// digits, that this multiplier handles (inputs beyond it must be zero).
//
// Interface: `step` advances one digit; `clear` returns to the initial state;
// `save` copies the state reached by this step into the shadow registers;
// `restore` loads the shadow into the state (clear, restore and step are
// exclusive; restore and save are this design's means of skipping stable
// digits, see dsi_sequencer). The product digit is registered: `p_valid`/`p`
// show the digit produced by the previous step.
module online_mul
  import dsi_pkg::*;
#(
  parameter int unsigned PMAX = 2048
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   clear,
  input  logic   restore,
  input  logic   step,
  input  logic   save,
  input  digit_t x,
  input  digit_t y,
  output logic   p_valid,
  output digit_t p
);

  localparam int unsigned F = PMAX + 8;   // fractional bits
  localparam int unsigned W = F + 4;      // plus sign and integer bits

  typedef struct packed {
    logic signed [W-1:0] xa;    // X: digits of x seen so far
    logic signed [W-1:0] ya;    // Y: digits of y seen so far
    logic signed [W-1:0] w;     // scaled residual
    logic        [W-1:0] u;     // one-hot weight of the next digit
    logic        [1:0]   cnt;   // initial steps taken, saturates at 3
  } mul_state_t;

  mul_state_t st, st_nx, shadow;

  localparam logic signed [W-1:0] HALF = W'(1) <<< (F - 1);
  localparam logic signed [W-1:0] ONE  = W'(1) <<< F;

  logic signed [W-1:0] y_term, x_term, v;
  digit_t              p_nx;

  always_comb begin
    st_nx = st;
    // X[j+1], Y[j+1]
    unique case (x)
      DIG_POS: st_nx.xa = st.xa + $signed(st.u);
      DIG_NEG: st_nx.xa = st.xa - $signed(st.u);
      default: st_nx.xa = st.xa;
    endcase
    unique case (y)
      DIG_POS: st_nx.ya = st.ya + $signed(st.u);
      DIG_NEG: st_nx.ya = st.ya - $signed(st.u);
      default: st_nx.ya = st.ya;
    endcase
    // X[j] * y and Y[j+1] * x, each times 2^-3
    unique case (y)
      DIG_POS: y_term = st.xa >>> 3;
      DIG_NEG: y_term = -(st.xa >>> 3);
      default: y_term = '0;
    endcase
    unique case (x)
      DIG_POS: x_term = st_nx.ya >>> 3;
      DIG_NEG: x_term = -(st_nx.ya >>> 3);
      default: x_term = '0;
    endcase
    v = (st.w <<< 1) + y_term + x_term;
    if (st.cnt != 2'd3) begin
      p_nx      = DIG_ZERO;
      st_nx.cnt = st.cnt + 2'd1;
    end else if (v >= HALF) begin
      p_nx = DIG_POS;
    end else if (v < -HALF) begin
      p_nx = DIG_NEG;
    end else begin
      p_nx = DIG_ZERO;
    end
    unique case (p_nx)
      DIG_POS: st_nx.w = v - ONE;
      DIG_NEG: st_nx.w = v + ONE;
      default: st_nx.w = v;
    endcase
    st_nx.u = st.u >> 1;
  end

  function automatic mul_state_t init_state();
    mul_state_t s;
    s.xa  = '0;
    s.ya  = '0;
    s.w   = '0;
    s.cnt = '0;
    s.u   = W'(1) << (F - 1);   // weight of the first digit, 2^-1
    return s;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st      <= init_state();
      shadow  <= init_state();
      p_valid <= 1'b0;
      p       <= DIG_ZERO;
    end else begin
      p_valid <= 1'b0;
      if (clear) begin
        st <= init_state();
      end else if (restore) begin
        st <= shadow;
      end else if (step) begin
        st      <= st_nx;
        p_valid <= (st.cnt == 2'd3);
        p       <= p_nx;
        if (save) shadow <= st_nx;
      end
    end
  end

  // the residual must stay inside the integer range kept (|w| < 2)
  assert property (@(posedge clk) disable iff (!rst_n) (st.w < (ONE <<< 1)) && (st.w > -(ONE <<< 1)))
    else $error("online_mul: residual out of range");

endmodule
