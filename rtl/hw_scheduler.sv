// hw_scheduler: the download manager.  It keeps one task_priority unit per
// task, all updated in parallel, and on every clock picks, among the tasks
// that are waiting for correction (req) and may be reconfigured now
// (eligible: idle, with enough slack), the one with the highest final
// priority FP.  Equal FP values are broken by the smaller slack St (earliest
// deadline first), and then by the lower task index.
//
// eta, the number of configuration frames of all tasks, is the sum of the
// per-task frame counts.  The choice is registered: sel_valid/sel_task show
// the winner of the previous cycle's comparison.  While one task is being
// corrected the controller lowers its req bit and the comparison continues
// over the remaining ones, so the next choice is ready when it finishes.
module hw_scheduler
  import edac_pkg::*;
#(
  parameter int unsigned N_TASKS = 10,
  parameter int unsigned ETA_W   = 16,
  localparam int unsigned TASK_W = $clog2(N_TASKS)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic   [N_TASKS-1:0]          busy,
  input  time_t  [N_TASKS-1:0]          exec_cycles,
  input  time_t  [N_TASKS-1:0]          idle_cycles,
  input  time_t  [N_TASKS-1:0]          ecrt_cycles,
  input  logic   [N_TASKS-1:0][ETA_W-1:0] frames,
  input  ratio_t [N_TASKS-1:0]          zeta,
  input  weights_t                      w,
  input  logic   [N_TASKS-1:0]          req,
  output logic                          sel_valid,
  output logic   [TASK_W-1:0]           sel_task,
  output fp_t    [N_TASKS-1:0]          fp,
  output st_t    [N_TASKS-1:0]          st,
  output logic   [N_TASKS-1:0]          eligible
);

  logic [ETA_W-1:0] eta_total;
  always_comb begin
    eta_total = '0;
    for (int i = 0; i < N_TASKS; i++) eta_total = eta_total + frames[i];
  end

  for (genvar i = 0; i < N_TASKS; i++) begin : g_task
    time_t pe, pi;
    st_t   p;
    logic  p_ok;
    task_priority #(.ETA_W(ETA_W)) u_tp (
      .clk(clk), .rst_n(rst_n),
      .busy(busy[i]),
      .exec_cycles(exec_cycles[i]), .idle_cycles(idle_cycles[i]),
      .ecrt_cycles(ecrt_cycles[i]),
      .eta_i(frames[i]), .eta_total(eta_total),
      .zeta(zeta[i]), .w(w),
      .st(st[i]), .pe(pe), .pi(pi), .p(p), .p_ok(p_ok),
      .fp(fp[i]), .eligible(eligible[i])
    );
  end

  // Linear comparison: max FP, then min St, then lowest index.
  logic              best_v;
  logic [TASK_W-1:0] best_i;
  always_comb begin
    best_v = 1'b0;
    best_i = '0;
    for (int i = 0; i < N_TASKS; i++) begin
      if (req[i] && eligible[i]) begin
        if (!best_v || fp[i] > fp[best_i] ||
            (fp[i] == fp[best_i] && st[i] < st[best_i])) begin
          best_v = 1'b1;
          best_i = TASK_W'(i);
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sel_valid <= 1'b0;
      sel_task  <= '0;
    end else begin
      sel_valid <= best_v;
      sel_task  <= best_i;
    end
  end

endmodule
