// task_priority: slack, priority and final priority of one task, the
// per-task part of the hardware scheduling (download manager) algorithm.
//
// Each task has a busy signal (high while it executes), a partial-execution
// counter PE (cycles since its execution phase began) and a partial-idle
// counter PI (cycles since its idle phase began).  The status register St
// holds the slack: the number of cycles until the task's next execution
// phase begins.  When the task enters its execution phase St is loaded with
// (E - PE) + I = E + I, when it enters its idle phase with I - PI = I; on
// every other clock St counts down by one and, on reaching 0, is reloaded
// with E + I.  Times E (execution), I (idle) and EC+RT (error correction
// plus reconfiguration) are given in clock cycles.
//
// Priority: when EC+RT <= St, the correction fits in the slack and
// P = St - (EC+RT) (p_ok = 1); otherwise p_ok = 0 and P keeps its last value.
// Final priority:
//     FP = w_a * (1/P) + w_b * (eta_i/eta) + w_c * zeta_i + w_d * E
// with 1/P, eta_i/eta and zeta_i as FRAC_W-bit fractions (1/0 is taken as
// 1/1) and E scaled by 2^FRAC_W so that all terms share one unit.  The two
// ratios come from sequential dividers that restart as soon as they finish,
// so FP follows P with a delay of about 27 cycles; St, P and FP are all
// updated in parallel for every task.
//
// eligible = p_ok and the task is idle: a task may only be reconfigured
// while it is idle and when the correction ends before it next executes.
module task_priority
  import edac_pkg::*;
#(
  parameter int unsigned ETA_W = 16   // width of frame counts
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             busy,
  input  time_t            exec_cycles,   // E_i / t
  input  time_t            idle_cycles,   // I_i / t
  input  time_t            ecrt_cycles,   // (EC_i + RT_i) / t
  input  logic [ETA_W-1:0] eta_i,         // configuration frames of the task
  input  logic [ETA_W-1:0] eta_total,     // configuration frames of all tasks
  input  ratio_t           zeta,          // criticality
  input  weights_t         w,
  output st_t              st,
  output time_t            pe,
  output time_t            pi,
  output st_t              p,
  output logic             p_ok,
  output fp_t              fp,
  output logic             eligible
);

  logic  busy_q;
  st_t   e_plus_i;
  assign e_plus_i = ST_W'(exec_cycles) + ST_W'(idle_cycles);

  // ---------------- PE, PI and the slack register St ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy_q <= 1'b0;
      pe     <= '0;
      pi     <= '0;
      st     <= '0;
      p      <= '0;
      p_ok   <= 1'b0;
    end else begin
      busy_q <= busy;
      if (busy && !busy_q) begin            // execution phase starts
        pe <= '0;
        st <= e_plus_i;
      end else if (!busy && busy_q) begin   // idle phase starts
        pi <= '0;
        st <= ST_W'(idle_cycles);
      end else begin
        if (busy) pe <= (pe == '1) ? pe : pe + 1'b1;
        else      pi <= (pi == '1) ? pi : pi + 1'b1;
        st <= (st == '0) ? e_plus_i : st - 1'b1;
      end
      if (ST_W'(ecrt_cycles) <= st) begin
        p    <= st - ST_W'(ecrt_cycles);
        p_ok <= 1'b1;
      end else begin
        p_ok <= 1'b0;
      end
    end
  end

  assign eligible = p_ok && !busy;

  // ---------------- ratios ----------------
  localparam int unsigned ENUM_W = ETA_W + FRAC_W;

  logic             rdiv_busy, rdiv_done, ediv_busy, ediv_done;
  logic [RATIO_W-1:0] rdiv_q;
  logic [ENUM_W-1:0]  ediv_q;
  ratio_t           recip_p, eta_ratio;

  recip_div #(.NUM_W(RATIO_W), .DEN_W(ST_W)) u_recip (
    .clk(clk), .rst_n(rst_n),
    .start(!rdiv_busy),
    .num(RATIO_W'(1) << FRAC_W),
    .den((p == '0) ? ST_W'(1) : p),
    .busy(rdiv_busy), .done(rdiv_done), .quo(rdiv_q)
  );

  recip_div #(.NUM_W(ENUM_W), .DEN_W(ETA_W)) u_eta (
    .clk(clk), .rst_n(rst_n),
    .start(!ediv_busy),
    .num({eta_i, {FRAC_W{1'b0}}}),
    .den(eta_total),
    .busy(ediv_busy), .done(ediv_done), .quo(ediv_q)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      recip_p   <= '0;
      eta_ratio <= '0;
      fp        <= '0;
    end else begin
      if (rdiv_done) recip_p <= rdiv_q;
      if (ediv_done) eta_ratio <= (ediv_q > ENUM_W'(1 << FRAC_W)) ? ratio_t'(1 << FRAC_W)
                                                                   : RATIO_W'(ediv_q);
      fp <= FP_W'(w.wa) * FP_W'(recip_p)
          + FP_W'(w.wb) * FP_W'(eta_ratio)
          + FP_W'(w.wc) * FP_W'(zeta)
          + FP_W'(w.wd) * (FP_W'(exec_cycles) << FRAC_W);
    end
  end

endmodule
