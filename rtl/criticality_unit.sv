// criticality_unit: criticality of every task from the task dependency
// graph (TDG).
//
// The criticality of a task is the number of tasks that depend on it,
// directly or through other tasks, divided by the number of tasks in the
// system.  The TDG is given as an adjacency matrix: dep_adj[i][j] = 1 when
// task j depends directly on task i (an edge i -> j).  The graph must be
// acyclic.
//
// How it works: reach starts as the adjacency matrix and, on each of
// N_TASKS-1 clock cycles, every row i absorbs the rows of the tasks it
// already reaches (reach[i] |= OR of adj[j] over j in reach[i]), which
// extends the paths covered by one edge; after N_TASKS-1 steps reach is the
// transitive closure.  A final cycle counts the ones of each row and
// divides by N_TASKS (a constant) to give zeta_i as an unsigned fraction with
// FRAC_W fractional bits.
//
// Interface: pulse start with dep_adj stable; done pulses N_TASKS+1 cycles
// later, when dep_count and zeta are valid; they hold until the next start.
module criticality_unit
  import edac_pkg::*;
#(
  parameter int unsigned N_TASKS = 10,
  localparam int unsigned CNT_W = $clog2(N_TASKS + 1)
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic                            start,
  input  logic [N_TASKS-1:0][N_TASKS-1:0] dep_adj,
  output logic                            busy,
  output logic                            done,
  output logic [N_TASKS-1:0][CNT_W-1:0]   dep_count,
  output ratio_t [N_TASKS-1:0]            zeta
);

  logic [N_TASKS-1:0][N_TASKS-1:0] reach, reach_nx;
  logic [CNT_W-1:0]                step;

  always_comb begin
    for (int i = 0; i < N_TASKS; i++) begin
      reach_nx[i] = reach[i];
      for (int j = 0; j < N_TASKS; j++)
        if (reach[i][j]) reach_nx[i] = reach_nx[i] | dep_adj[j];
    end
  end

  function automatic logic [CNT_W-1:0] popcount(logic [N_TASKS-1:0] v);
    logic [CNT_W-1:0] c = '0;
    for (int k = 0; k < N_TASKS; k++) c = c + CNT_W'(v[k]);
    return c;
  endfunction

  function automatic ratio_t to_ratio(logic [CNT_W-1:0] c);
    logic [FRAC_W+CNT_W-1:0] num;
    num = {c, {FRAC_W{1'b0}}};
    return RATIO_W'(num / (FRAC_W+CNT_W)'(N_TASKS));
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      reach     <= '0;
      step      <= '0;
      busy      <= 1'b0;
      done      <= 1'b0;
      dep_count <= '0;
      zeta      <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        reach <= dep_adj;
        step  <= '0;
        busy  <= 1'b1;
      end else if (busy) begin
        if (step == CNT_W'(N_TASKS - 1)) begin
          busy <= 1'b0;
          done <= 1'b1;
          for (int i = 0; i < N_TASKS; i++) begin
            dep_count[i] <= popcount(reach[i]);
            zeta[i]      <= to_ratio(popcount(reach[i]));
          end
        end else begin
          reach <= reach_nx;
          step  <= step + 1'b1;
        end
      end
    end
  end

endmodule
