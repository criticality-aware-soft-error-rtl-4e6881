// task_priority_tb: drives one task through execution and idle phases and
// checks, cycle by cycle, that the slack register follows the formulas
// St = (E - PE) + I while busy and St = I - PI while idle (PE, PI counted
// here), that it reloads E + I when it reaches 0, that P = St - (EC+RT) when
// EC+RT <= St and is held otherwise, that eligible = p_ok and idle, and that
// the final priority equals
//   w_a*(2^24/P) + w_b*(eta_i*2^24/eta) + w_c*zeta + w_d*(E*2^24)
// worked out here once P is frozen.
module task_priority_tb;
  import edac_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic busy, p_ok, eligible;
  time_t exec_cycles, idle_cycles, ecrt_cycles, pe, pi;
  logic [15:0] eta_i, eta_total;
  ratio_t zeta;
  weights_t w;
  st_t st, p;
  fp_t fp;
  int checks = 0, failures = 0;

  task_priority dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Cycle-by-cycle checks of St and P.
  int  n_phase = -1;      // cycles since the phase began, -1 before the first
  bit  busy_prev = 0;
  st_t st_prev;
  bit  started = 0;
  int  reloads = 0;
  longint len;
  always @(posedge clk) if (rst_n) begin
    if (started) begin
      // St and P: compare with the values expected from the state before.
      if (n_phase >= 0) begin
        len = busy_prev ? longint'(exec_cycles) + idle_cycles : longint'(idle_cycles);
        if (n_phase < len) begin
          checks++;
          if (st != st_t'(len - n_phase)) begin
            failures++; $display("St = %0d, expected %0d (busy %0d, n %0d)", st, len - n_phase, busy_prev, n_phase);
          end
        end
        if (n_phase > 0 && st_prev == 0) begin
          reloads++;
          checks++;
          if (st != st_t'(exec_cycles + idle_cycles)) begin failures++; $display("no reload of St"); end
        end
      end
    end
    started = 1;
    st_prev = st;
    if (busy != busy_prev) n_phase = 0; else if (n_phase >= 0) n_phase++;
    busy_prev = busy;
  end

  st_t st_d, p_d, ec_d;
  bit  have_d = 0;
  always @(posedge clk) if (rst_n) begin
    ec_d = st_t'(ecrt_cycles);   // the value the block sees at this edge
    #1;
    if (have_d) begin
    checks++;
    if (p_ok !== (ec_d <= st_d)) begin failures++; $display("p_ok wrong at %0t: st_d %0d ec_d %0d p_ok %0d", $time, st_d, ec_d, p_ok); end
    if (ec_d <= st_d) begin
      checks++;
      if (p !== st_d - ec_d) begin failures++; $display("P = %0d, expected %0d", p, st_d - ec_d); end
    end else begin
      checks++;
      if (p !== p_d) begin failures++; $display("P not held"); end
    end
    checks++;
    if (eligible !== (p_ok && !busy)) begin failures++; $display("eligible wrong"); end
    end
    st_d = st; p_d = p; have_d = 1;
  end

  task automatic check_fp(string tag);
    longint unsigned pp, e;
    repeat (80) @(posedge clk);
    #2;
    pp = (p == 0) ? 1 : p;
    e = longint'(w.wa) * ((longint'(1) << 24) / pp)
      + longint'(w.wb) * ((longint'(eta_i) << 24) / eta_total)
      + longint'(w.wc) * zeta
      + longint'(w.wd) * (longint'(exec_cycles) << 24);
    checks++;
    if (fp != e) begin
      failures++; $display("%s: FP %0d expected %0d (P %0d)", tag, fp, e, p); end
  endtask

  initial begin
    busy = 0; exec_cycles = 40; idle_cycles = 200; ecrt_cycles = 30;
    eta_i = 25; eta_total = 100; zeta = 25'd5033164; // 0.3
    w = '{wa: 9'd256, wb: 9'd128, wc: 9'd64, wd: 9'd0};
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (10) @(posedge clk);
    // Execution phase, then idle phase, then run past the reload.
    busy <= 1; repeat (40) @(posedge clk);
    busy <= 0; repeat (120) @(posedge clk);
    // Freeze P at a non-zero value by raising EC+RT above St.
    @(negedge clk) ecrt_cycles = 24'd100000;
    check_fp("P frozen");
    w <= '{wa: 9'd0, wb: 9'd256, wc: 9'd0, wd: 9'd3};
    check_fp("eta and E terms");
    @(negedge clk) ecrt_cycles = 24'd30;
    repeat (300) @(posedge clk);
    busy <= 1; repeat (60) @(posedge clk);
    busy <= 0; repeat (260) @(posedge clk);
    checks++;
    if (reloads == 0) begin failures++; $display("St never reached 0"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
