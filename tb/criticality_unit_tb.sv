// criticality_unit_tb: the ten-task dependency graph of the example in the
// design description (A..J, A->B,C,D; B->E,F,G; C->H,I; D->I,J), whose
// criticalities are 0.9, 0.3, 0.2, 0.2 and 0 for the rest, then random
// acyclic graphs checked against a reachability search written here.  Also
// checks the N+1-cycle latency.
module criticality_unit_tb;
  import edac_pkg::*;
  localparam int N = 10;
  localparam int CW = $clog2(N + 1);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, busy, done;
  logic [N-1:0][N-1:0] dep_adj;
  logic [N-1:0][CW-1:0] dep_count;
  ratio_t [N-1:0] zeta;
  int checks = 0, failures = 0;

  criticality_unit #(.N_TASKS(N)) dut (.*);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int ref_count(logic [N-1:0][N-1:0] adj, int s);
    bit seen [N];
    int stack [$];
    int c = 0;
    foreach (seen[i]) seen[i] = 0;
    stack.push_back(s);
    while (stack.size() > 0) begin
      int u = stack.pop_back();
      for (int v = 0; v < N; v++)
        if (adj[u][v] && !seen[v]) begin seen[v] = 1; c++; stack.push_back(v); end
    end
    return c;
  endfunction

  task automatic run_and_check(string tag, int expc [N]);
    int n = 0;
    start <= 1; @(posedge clk); start <= 0;
    while (!done) begin @(posedge clk); n++; end
    checks++;
    if (n != N + 1) begin failures++; $display("%s: latency %0d", tag, n); end
    for (int i = 0; i < N; i++) begin
      longint ez = (longint'(expc[i]) << FRAC_W) / N;
      checks++;
      if (dep_count[i] != CW'(expc[i]) || zeta[i] != RATIO_W'(ez)) begin
        failures++;
        $display("%s: task %0d count %0d zeta %0d, expected %0d %0d", tag, i, dep_count[i], zeta[i], expc[i], ez);
      end
    end
  endtask

  initial begin
    int expc [N];
    start = 0; dep_adj = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    // A=0 ... J=9
    dep_adj[0][1] = 1; dep_adj[0][2] = 1; dep_adj[0][3] = 1;
    dep_adj[1][4] = 1; dep_adj[1][5] = 1; dep_adj[1][6] = 1;
    dep_adj[2][7] = 1; dep_adj[2][8] = 1;
    dep_adj[3][8] = 1; dep_adj[3][9] = 1;
    expc = '{9, 3, 2, 2, 0, 0, 0, 0, 0, 0};
    run_and_check("example graph", expc);
    // 0.9 of 2^24, rounded down
    checks++;
    if (zeta[0] != 25'd15099494) begin failures++; $display("zeta(A) = %0d", zeta[0]); end
    for (int r = 0; r < 20; r++) begin
      dep_adj = '0;
      for (int i = 0; i < N; i++)
        for (int j = i + 1; j < N; j++)
          dep_adj[i][j] = ($urandom_range(0, 4) == 0);
      for (int i = 0; i < N; i++) expc[i] = ref_count(dep_adj, i);
      run_and_check("random graph", expc);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
