// edac_top_tb: end-to-end test of the EDAC engine at a reduced size
// (4 tasks, 6 frame columns, 8-word frames; the tasks have 6, 4, 5 and 3
// frames, so dummy zero frames are exercised).  The configuration memory is
// the behavioural cm_model.
//
//  1. Configuration pass: the stored signatures are compared with SHA3-512
//     values computed by an independent reference.
//  2. A clean check pass: nothing may be flagged or written.
//  3. Errors are injected: task 0 in frame 1, task 1 in frame 3 (a burst of
//     adjacent bits), task 2 in frames 0 and 2 (beyond the code's reach).
//     All tasks are kept busy at first, so the scheduler must wait.  The
//     dependency graph makes task 2 the most critical, then task 1, then
//     task 0, and only the criticality weight is set, so tasks must be
//     handled in the order 2, 1, 0.  Task 2's candidates (frames 0 and 2)
//     are each tried and rejected by the signature check.  Task 0 turns
//     busy just before its repaired frame is written: the write must wait.
//  4. After the pass the CM must again hold the original data except in
//     task 2, which must be flagged uncorrectable; the next pass must find
//     only task 2 faulty.
// Every mechanism (configuration pass, clean pass, detection, dummy-frame
// padding, scheduler stall, candidate rejection, correction with write-back,
// uncorrectable report, write-back held while the task is busy) is counted
// and must occur at least once.
module edac_top_tb;
  import edac_pkg::*;
  localparam int NT = 4, NF = 6, FW = 8;
  localparam int FADDR_W = $clog2(NT * NF), WIDX_W = $clog2(FW);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cfg_start, run_en, cfg_done, pass_done, sig_valid;
  logic [1:0] sig_task;
  logic [511:0] sig_data;
  logic [511:0] got_sig [NT];
  logic [NT-1:0][15:0] task_frames;
  logic [NT-1:0][NT-1:0] dep_adj;
  logic [NT-1:0] task_busy, task_faulty, task_uncorrectable;
  time_t [NT-1:0] task_exec, task_idle, task_ecrt;
  weights_t weights;
  logic cm_rd_req_valid, cm_rd_req_ready, cm_rd_valid, cm_rd_ready, cm_wr_valid;
  logic [FADDR_W-1:0] cm_rd_frame, cm_wr_frame;
  logic [WIDX_W-1:0] cm_wr_word;
  word_t cm_rd_data, cm_wr_data;
  logic [15:0] pass_cnt, detect_cnt, reject_cnt, correct_cnt, uncorr_cnt, stall_cnt, hold_cnt;
  int checks = 0, failures = 0;

  edac_top #(.N_TASKS(NT), .N_FRAMES(NF), .FRAME_WORDS(FW)) u_dut (.*);

  cm_model #(.N_FRAMES_TOTAL(NT*NF), .FRAME_WORDS(FW), .FADDR_W(FADDR_W), .WIDX_W(WIDX_W)) u_cm (
    .clk(clk), .rst_n(rst_n),
    .rd_req_valid(cm_rd_req_valid), .rd_req_ready(cm_rd_req_ready), .rd_frame(cm_rd_frame),
    .rd_valid(cm_rd_valid), .rd_ready(cm_rd_ready), .rd_data(cm_rd_data),
    .wr_valid(cm_wr_valid), .wr_frame(cm_wr_frame), .wr_word(cm_wr_word), .wr_data(cm_wr_data));

  function automatic word_t gold(int z, int k, int w);
    return 32'((z * 32'h9E3779B9) ^ ((k + 1) * 32'h85EBCA6B) ^ ((w + 7) * 32'hC2B2AE35));
  endfunction

  // ---------------- mechanism counters ----------------
  int n_pad = 0, n_clean_pass = 0;
  int wr_order [$];
  longint cyc = 0, wr0_cyc = 0, busy_end = 0;
  always @(posedge clk) cyc <= cyc + 1;
  always @(posedge clk) if (rst_n) begin
    if (sig_valid && !cfg_done) got_sig[sig_task] <= sig_data;
    if (cm_wr_valid && cm_wr_word == 0) begin
      wr_order.push_back(int'(cm_wr_frame) / NF);
      if (int'(cm_wr_frame) / NF == 0) wr0_cyc = cyc;
    end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic wait_pass();
    @(posedge clk);
    while (!pass_done) @(posedge clk);
  endtask

  logic [511:0] exp_sig [NT];
  int frames_of [NT] = '{6, 4, 5, 3};

  initial begin
    int bad;
    exp_sig[0] = 512'h70508fe0abaeeb97500e558aa2802730ee1500a1390cea523820efdc411f4ec9a399e150c29d0ee91c39c5101f37bf193752d53eba5ad28a2fab3e6ff9f40848;
    exp_sig[1] = 512'h59c9a4970afd660282b2e7774c798d1b9c99359419d56f1bfbfea515f4cd9ab5ee0a373ecb36bd328c6cb9edd2667f3afadae35c563481249c73343853c232d1;
    exp_sig[2] = 512'he039fb8a2e39139a47a83b52d00bc2b80c7f1dd7e0f7358c99027fe1f4cfbbece2bf119a05b60f635d6e8c21412ce55a203a405bdbc8615ef9c7391777df42ee;
    exp_sig[3] = 512'h2581acba77a3ddff4efe01856b4dc9eaaa83ee12b0bab37fcea3e2835332d6eefd470543fcad836c4efc77d4e8ecee1cde77a9280d093ff9c027988d6612f1eb;
    cfg_start = 0; run_en = 0; task_busy = '0;
    for (int z = 0; z < NT; z++) begin
      task_frames[z] = 16'(frames_of[z]);
      task_exec[z] = 24'd50; task_idle[z] = 24'd100000; task_ecrt[z] = 24'd2000;
    end
    // Task 2 is depended on by 0, 1 and 3; task 1 by 3.
    dep_adj = '0;
    dep_adj[2][0] = 1; dep_adj[2][1] = 1; dep_adj[2][3] = 1; dep_adj[1][3] = 1;
    weights = '{wa: 9'd0, wb: 9'd0, wc: 9'd256, wd: 9'd0};
    for (int z = 0; z < NT; z++)
      for (int k = 0; k < NF; k++)
        for (int w = 0; w < FW; w++)
          u_cm.mem[(z*NF + k)*FW + w] = (k < frames_of[z]) ? gold(z, k, w) : 32'hDEAD_BEEF;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);

    // 1. configuration pass
    cfg_start <= 1; @(posedge clk); cfg_start <= 0;
    wait_pass();
    check(cfg_done, "cfg_done after the configuration pass");
    for (int z = 0; z < NT; z++)
      check(got_sig[z] == exp_sig[z], $sformatf("signature of task %0d", z));
    // 18 real frames of 24 columns were read; the rest are dummy frames.
    n_pad = NT*NF - u_cm.reads;
    check(u_cm.reads == 18, $sformatf("frames read in the configuration pass: %0d", u_cm.reads));

    // 2. clean check pass
    run_en <= 1;
    wait_pass();
    check(task_faulty == '0 && wr_order.size() == 0, "clean pass flags nothing");
    if (task_faulty == '0) n_clean_pass++;

    // 3. inject errors, keep every task busy for a while
    task_busy <= '1;
    u_cm.mem[(0*NF + 1)*FW + 5] ^= 32'h0000_0010;
    u_cm.mem[(1*NF + 3)*FW + 2] ^= 32'h000F_0000;
    u_cm.mem[(1*NF + 3)*FW + 3] ^= 32'h0000_0001;
    u_cm.mem[(2*NF + 0)*FW + 6] ^= 32'h8000_0000;
    u_cm.mem[(2*NF + 2)*FW + 6] ^= 32'h0000_0100;
    while (stall_cnt < 16'd300) @(posedge clk);
    task_busy <= '0;
    // Task 0 is repaired last.  When its re-hash reads its last frame, it
    // turns busy for 100 cycles: the write-back must wait for it.
    fork
      begin
        while (!(correct_cnt == 16'd1 && cm_rd_req_valid && cm_rd_req_ready &&
                 cm_rd_frame == FADDR_W'(0*NF + 5))) @(posedge clk);
        task_busy[0] <= 1'b1;
        repeat (100) @(posedge clk);
        task_busy[0] <= 1'b0;
        busy_end = cyc;
      end
    join_none
    wait_pass();
    check(detect_cnt == 3, $sformatf("three faulty tasks detected (%0d)", detect_cnt));
    check(correct_cnt == 2, $sformatf("two tasks corrected (%0d)", correct_cnt));
    check(uncorr_cnt == 1 && task_uncorrectable == 4'b0100, "task 2 reported uncorrectable");
    check(reject_cnt >= 1, "a wrong candidate was rejected");
    check(wr_order.size() == 2 && wr_order[0] == 1 && wr_order[1] == 0,
          "corrections in order of criticality (task 1, then task 0)");
    bad = 0;
    for (int z = 0; z < NT; z++)
      for (int k = 0; k < frames_of[z]; k++)
        for (int w = 0; w < FW; w++)
          if (z != 2 && u_cm.mem[(z*NF + k)*FW + w] != gold(z, k, w)) bad++;
    check(bad == 0, $sformatf("CM restored outside task 2 (%0d bad words)", bad));

    // 4. the next pass finds only task 2
    wait_pass();
    check(task_faulty == 4'b0100, $sformatf("only task 2 faulty in the next pass (%b)", task_faulty));
    run_en <= 0;

    $display("mechanisms: passes %0d clean %0d detect %0d dummy frames %0d stall %0d reject %0d correct %0d uncorrectable %0d write-back hold %0d",
             pass_cnt, n_clean_pass, detect_cnt, n_pad, stall_cnt, reject_cnt, correct_cnt, uncorr_cnt, hold_cnt);
    check(n_clean_pass > 0, "clean pass happened");
    check(stall_cnt > 0, "scheduler stall happened");
    check(hold_cnt > 0 && wr0_cyc > busy_end,
          $sformatf("write-back held while task 0 was busy (%0d cycles)", hold_cnt));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
