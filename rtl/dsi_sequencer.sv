// dsi_sequencer: digit-generation scheduling for the Jacobi solver with
// digit stability inference.
//
// One pass generates approximant k from approximant k-1, MSD first: it
// reads digit positions t = L+1 .. prec+5 of x(k-1) and of the constants,
// and the datapath writes digits L-4 .. prec of x(k) back in place (a digit
// is written 8 cycles after it was read, so the in-place update never
// overwrites a digit still to be read; the stable MSDs are simply left
// where they are). After each pass the stability controller is updated with
// the comparator's D, and the pass count, psi and the termination test are
// evaluated.
//
// How stable digits are skipped is this design's own mechanism; the paper
// says only that "the generation of each approximant's first psi(k) digits
// is skipped". An online operator's state after it has taken t input digits
// depends on nothing but those t digits. The first psi(k-1) digits of
// x(k-1) are stable, so x(k) repeats them; the operators' state at input
// position psi(k-1) in pass k is therefore also their state at that
// position in pass k+1. Pass k saves that state (operator `save`), and
// pass k+1 restores it and starts reading at L = psi(k-1)+1, skipping the
// generation of its first L-5 output digits (L below 6 is not used: the
// output would start before digit 1). A shadow stays valid for all later
// passes, as stable digits never change, so a new one is taken only when
// psi has grown.
//
// The theorem behind psi is not trusted blindly: in simulation a digit
// declared stable does now and then change (a nearby value with another
// redundant digit string). A saved state at position S is therefore kept
// after a pass only if the comparator saw no digit at or below S change in
// that pass; otherwise the next pass is a full one and a new state is saved.
// With this check a solve with skipping produces exactly the digits of a
// solve without it (`skip_en` = 0), only in fewer cycles.
//
// Termination (also this design's choice; the paper's prototype stops on a
// residual norm): the solver stops after pass k when psi(k) >= `target`,
// i.e. every element of x(k) has `target` digits that agree with the exact
// solution's, or when `max_iter` passes have run.
//
// Timing: `start` (one cycle, in IDLE) begins a solve from the approximant
// in memory; `busy` stays high until `done` pulses. A pass of a restored
// solve takes prec+5-L read cycles plus 5 drain and 2 bookkeeping cycles.
module dsi_sequencer
  import dsi_pkg::*;
#(
  parameter int unsigned PMAX = 2048,
  localparam int unsigned PW  = $clog2(PMAX + DELTA + 1),
  localparam int unsigned AW  = $clog2(PMAX)
) (
  input  logic          clk,
  input  logic          rst_n,
  // configuration, held stable while busy
  input  logic          start,
  input  logic [PW-1:0] prec,       // digits generated per approximant (<= PMAX)
  input  logic [PW-1:0] target,     // stable digits wanted
  input  logic [31:0]   max_iter,
  input  logic          skip_en,    // 0: every pass generates every digit
  // memory read side (x and constants c share an address; d lags by 3 digits)
  output logic          rd_en,
  output logic [AW-1:0] rd_addr,
  output logic          rd_d_en,
  output logic [AW-1:0] rd_d_addr,
  // datapath control, aligned with the read data
  output logic          dp_clear,
  output logic          dp_restore,
  output logic          dp_step,
  output logic          dp_save,
  output logic [PW-1:0] dp_pos,
  output logic          dp_zero_xc,   // position beyond prec: feed zero digits
  output logic          dp_zero_d,
  // datapath results
  input  logic          z_valid,
  input  logic [PW-1:0] z_pos,
  output logic          wr_en,
  output logic [AW-1:0] wr_addr,
  // comparator and stability controller
  output logic          cmp_start,
  output logic          cmp_en,
  output logic [PW-1:0] cmp_psi,
  output logic          cmp_clear,
  input  logic [PW-1:0] first_diff, // lowest digit changed in this pass
  output logic          stab_start,
  output logic          stab_update,
  input  logic          khat_valid,
  input  logic [PW-1:0] psi,        // psi of the newest finished approximant
  // status
  output logic          busy,
  output logic          done,
  output logic          converged,
  output logic [31:0]   iterations,
  output logic [31:0]   cycles,
  output logic [31:0]   digits_generated,   // output digits computed, per element
  output logic [31:0]   digits_skipped,     // output digits not computed, per element
  output logic [31:0]   psi_sum,            // sum of psi(k) over finished passes
  output logic [31:0]   restores            // passes that started from a saved state
);

  typedef enum logic [2:0] {S_IDLE, S_PREP, S_RUN, S_DRAIN, S_UPDATE, S_CHECK} state_e;
  state_e state;

  localparam logic [PW-1:0] LMIN = PW'(DELTA + 1);

  logic [PW-1:0] t;          // next input position to read
  logic [PW-1:0] last_t;     // prec + DELTA
  logic [PW-1:0] l_cur;      // restore point of this pass (0: full pass)
  logic [PW-1:0] l_shadow;   // position of the saved state (0: none)
  logic [PW-1:0] snap;       // where this pass saves
  logic          snap_en;
  logic [2:0]    drain;
  logic          first_pass;

  assign last_t = prec + PW'(DELTA);

  // read stage registers -> datapath control one cycle later
  logic          step_r, save_r, zxc_r, zd_r;
  logic [PW-1:0] pos_r;

  wire issue = (state == S_RUN);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      step_r <= 1'b0;
      save_r <= 1'b0;
      zxc_r  <= 1'b0;
      zd_r   <= 1'b0;
      pos_r  <= '0;
    end else begin
      step_r <= issue;
      save_r <= issue && snap_en && (t == snap);
      zxc_r  <= (t > prec);
      zd_r   <= (t < PW'(4)) || (t > prec + PW'(3));
      pos_r  <= t;
    end
  end

  assign rd_en      = issue && (t <= prec);
  assign rd_addr    = AW'(t - PW'(1));
  assign rd_d_en    = issue && (t >= PW'(4)) && (t <= prec + PW'(3));
  assign rd_d_addr  = AW'(t - PW'(4));
  assign dp_step    = step_r;
  assign dp_save    = save_r;
  assign dp_pos     = pos_r;
  assign dp_zero_xc = zxc_r;
  assign dp_zero_d  = zd_r;
  assign dp_clear   = (state == S_PREP) && (l_cur == '0);
  assign dp_restore = (state == S_PREP) && (l_cur != '0);

  assign wr_en      = z_valid && (z_pos != '0) && (z_pos <= prec);
  assign wr_addr    = AW'(z_pos - PW'(1));
  assign cmp_start  = (state == S_PREP);
  assign cmp_en     = 1'b1;   // every pass is compared, the first one against x(0)
  assign cmp_clear  = first_pass;
  assign cmp_psi    = khat_valid ? psi : '0;   // digits of x(k-1) declared stable

  assign stab_start  = start && (state == S_IDLE);
  assign stab_update = (state == S_UPDATE);
  assign busy        = (state != S_IDLE);

  // psi of x(k-1) limited to prec: the save point of this pass
  logic [PW-1:0] psi_cl;
  assign psi_cl = (psi > prec) ? prec : psi;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state            <= S_IDLE;
      t                <= '0;
      l_cur            <= '0;
      l_shadow         <= '0;
      snap             <= '0;
      snap_en          <= 1'b0;
      drain            <= '0;
      first_pass       <= 1'b0;
      done             <= 1'b0;
      converged        <= 1'b0;
      iterations       <= '0;
      cycles           <= '0;
      digits_generated <= '0;
      digits_skipped   <= '0;
      psi_sum          <= '0;
      restores         <= '0;
    end else begin
      done <= 1'b0;
      if (busy) cycles <= cycles + 32'd1;
      if (wr_en) digits_generated <= digits_generated + 32'd1;
      unique case (state)
        S_IDLE: if (start) begin
          state            <= S_PREP;
          first_pass       <= 1'b1;
          l_cur            <= '0;
          l_shadow         <= '0;
          converged        <= 1'b0;
          iterations       <= '0;
          cycles           <= '0;
          digits_generated <= '0;
          digits_skipped   <= '0;
          psi_sum          <= '0;
          restores         <= '0;
        end
        S_PREP: begin
          // operators are cleared or restored this cycle
          t          <= l_cur + PW'(1);
          state      <= S_RUN;
          first_pass <= 1'b0;
          if (skip_en && khat_valid && psi_cl >= LMIN && psi_cl > l_shadow) begin
            snap_en <= 1'b1;
            snap    <= psi_cl;
          end else begin
            snap_en <= 1'b0;
          end
          if (l_cur != '0) begin
            restores       <= restores + 32'd1;
            digits_skipped <= digits_skipped + 32'(l_cur - PW'(DELTA));
          end
        end
        S_RUN: begin
          if (t == last_t) begin
            state <= S_DRAIN;
            drain <= 3'd5;
          end
          t <= t + PW'(1);
        end
        S_DRAIN: begin
          if (drain == 3'd1) state <= S_UPDATE;
          drain <= drain - 3'd1;
        end
        S_UPDATE: begin
          // stability controller takes cmp_d this cycle
          iterations <= iterations + 32'd1;
          // keep a saved state only if no digit at or below its position
          // changed in this pass: then x(k) repeats the prefix it was taken on
          if (snap_en) l_shadow <= (first_diff > snap)     ? snap     : '0;
          else         l_shadow <= (first_diff > l_shadow) ? l_shadow : '0;
          state <= S_CHECK;
        end
        S_CHECK: begin
          if (khat_valid) psi_sum <= psi_sum + 32'(psi);
          if (khat_valid && psi >= target) begin
            converged <= 1'b1;
            done      <= 1'b1;
            state     <= S_IDLE;
          end else if (iterations >= max_iter) begin
            done  <= 1'b1;
            state <= S_IDLE;
          end else begin
            l_cur <= l_shadow;
            state <= S_PREP;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // the in-place update needs every write to trail the read of its address
  assert property (@(posedge clk) disable iff (!rst_n) wr_en && rd_en |-> wr_addr < rd_addr)
    else $error("dsi_sequencer: write overtook read");

endmodule
