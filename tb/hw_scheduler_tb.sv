// hw_scheduler_tb: four tasks.  Checks that the scheduler picks the
// requesting, eligible task with the highest final priority when the
// criticality term or the frame-share term dominates, that masked (req = 0)
// and busy tasks are passed over, that equal FP values go to the task with
// the smaller slack St (earliest deadline first), and that sel_valid is low
// when nothing is requested.  The expected winners are worked out here from
// the inputs.  A random phase then varies req, busy, weights and repair
// times (some too long for the slack, so the task is not eligible) and
// checks every cycle's choice against a model of the selection rule
// applied to the per-task fp, st and eligible outputs.
module hw_scheduler_tb;
  import edac_pkg::*;
  localparam int N = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic   [N-1:0]        busy, req, eligible;
  time_t  [N-1:0]        exec_cycles, idle_cycles, ecrt_cycles;
  logic   [N-1:0][15:0]  frames;
  ratio_t [N-1:0]        zeta;
  weights_t              w;
  logic                  sel_valid;
  logic   [1:0]          sel_task;
  fp_t    [N-1:0]        fp;
  st_t    [N-1:0]        st;
  int checks = 0, failures = 0;

  hw_scheduler #(.N_TASKS(N)) dut (.*);

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_sel(string tag, bit v, int t);
    repeat (100) @(posedge clk);
    #1;
    checks++;
    if (sel_valid !== v || (v && sel_task !== 2'(t))) begin
      failures++;
      $display("%s: sel_valid %0d sel_task %0d, expected %0d %0d", tag, sel_valid, sel_task, v, t);
    end
  endtask

  // Selection model, active in the random phase.
  bit rnd_on = 0;
  int n_inelig = 0;
  always @(posedge clk) if (rnd_on) begin
    bit ev;
    int ei;
    ev = 0; ei = 0;
    for (int i = 0; i < N; i++)
      if (req[i] && eligible[i])
        if (!ev || fp[i] > fp[ei] || (fp[i] == fp[ei] && st[i] < st[ei])) begin ev = 1; ei = i; end
    for (int i = 0; i < N; i++) if (req[i] && !busy[i] && !eligible[i]) n_inelig++;
    #1;
    checks++;
    if (sel_valid !== ev || (ev && sel_task !== 2'(ei))) begin
      failures++;
      $display("random: sel %0d/%0d expected %0d/%0d", sel_valid, sel_task, ev, ei);
    end
  end

  initial begin
    busy = '0; req = '0;
    for (int i = 0; i < N; i++) begin
      exec_cycles[i] = 24'd10; ecrt_cycles[i] = 24'd5;
    end
    idle_cycles[0] = 24'd9000; idle_cycles[1] = 24'd8000;
    idle_cycles[2] = 24'd7000; idle_cycles[3] = 24'd6000;
    frames[0] = 16'd10; frames[1] = 16'd40; frames[2] = 16'd30; frames[3] = 16'd20;
    zeta[0] = 25'd1677721; zeta[1] = 25'd8388608; zeta[2] = 25'd5033164; zeta[3] = 25'd3355443;
    w = '{wa: 9'd0, wb: 9'd0, wc: 9'd256, wd: 9'd0};
    repeat (3) @(posedge clk);
    rst_n = 1;
    req = 4'b1111;
    expect_sel("criticality", 1, 1);
    req = 4'b1101;
    expect_sel("task 1 masked", 1, 2);
    zeta[3] = zeta[2];
    req = 4'b1100;
    // Same FP; task 3 has the shorter idle time, so the smaller St.
    checks++;
    if (!(st[3] < st[2])) begin failures++; $display("test setup: St order"); end
    expect_sel("EDF tie-break", 1, 3);
    busy[3] = 1;
    expect_sel("busy task skipped", 1, 2);
    busy[3] = 0;
    w = '{wa: 9'd0, wb: 9'd256, wc: 9'd0, wd: 9'd0};
    req = 4'b1111;
    expect_sel("frame share", 1, 1);
    req = 4'b0000;
    expect_sel("no request", 0, 0);
    // random phase
    @(negedge clk);
    rnd_on = 1;
    for (int it = 0; it < 200; it++) begin
      @(negedge clk);
      req  = 4'($urandom);
      busy = 4'($urandom) & 4'($urandom);
      w = '{wa: 9'($urandom_range(0, 256)), wb: 9'($urandom_range(0, 256)),
            wc: 9'($urandom_range(0, 256)), wd: 9'($urandom_range(0, 1))};
      for (int i = 0; i < N; i++) ecrt_cycles[i] = ($urandom_range(0, 3) == 0) ? 24'd20000 : 24'(i + 5);
      repeat (30) @(negedge clk);
    end
    rnd_on = 0;
    checks++;
    if (n_inelig == 0) begin failures++; $display("random phase never had an idle but ineligible task"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
