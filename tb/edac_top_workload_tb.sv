// edac_top_workload_tb: the task counts of the redundancy and timing
// comparison with scrubbing (4 and 8 tasks of 100 frames of 101 words,
// frames of a 7-series FPGA).  Both sizes run side by side, each with its
// own engine and configuration memory model.  For each size:
//  - the configuration pass must store the reference SHA3-512 signatures;
//  - one frame of every task is then hit by a multi-bit upset, and one check
//    pass must detect every task, repair each with a single candidate trial
//    and a single frame write, and leave the CM equal to the original data.
// The testbench prints the redundancy of the scheme, (tasks + 100) parity
// frames plus 512 bits per task, against a full golden copy as scrubbing
// keeps, and the cycles of the detection-and-correction pass against the
// frames a scrub would rewrite.
module edac_top_workload_tb;
  import edac_pkg::*;
  localparam int NF = 100, FW = 101;
  localparam int NSIZE = 2;
  localparam int SIZES [NSIZE] = '{4, 8};

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  logic [NSIZE-1:0] done = '0;
  logic [511:0] exp_sig [8];

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic word_t gold(int z, int k, int w);
    return 32'((z * 32'h9E3779B9) ^ ((k + 1) * 32'h85EBCA6B) ^ ((w + 7) * 32'hC2B2AE35));
  endfunction

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  for (genvar g = 0; g < NSIZE; g++) begin : g_size
    localparam int NT = SIZES[g];
    localparam int TASK_W = $clog2(NT);
    localparam int FADDR_W = $clog2(NT * NF), WIDX_W = $clog2(FW);

    logic cfg_start, run_en, cfg_done, pass_done, sig_valid;
    logic [TASK_W-1:0] sig_task;
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

    edac_top #(.N_TASKS(NT), .N_FRAMES(NF), .FRAME_WORDS(FW)) u_dut (.*);

    cm_model #(.N_FRAMES_TOTAL(NT*NF), .FRAME_WORDS(FW), .FADDR_W(FADDR_W), .WIDX_W(WIDX_W)) u_cm (
      .clk(clk), .rst_n(rst_n),
      .rd_req_valid(cm_rd_req_valid), .rd_req_ready(cm_rd_req_ready), .rd_frame(cm_rd_frame),
      .rd_valid(cm_rd_valid), .rd_ready(cm_rd_ready), .rd_data(cm_rd_data),
      .wr_valid(cm_wr_valid), .wr_frame(cm_wr_frame), .wr_word(cm_wr_word), .wr_data(cm_wr_data));

    int n_wr = 0;
    longint cyc = 0;
    always @(posedge clk) begin
      cyc <= cyc + 1;
      if (rst_n && sig_valid && !cfg_done) got_sig[sig_task] <= sig_data;
      if (rst_n && cm_wr_valid && cm_wr_word == 0) n_wr <= n_wr + 1;
    end

    initial begin
      int bad;
      longint t0, t_cfg, t_run;
      longint edac_bits, scrub_bits;
      cfg_start = 0; run_en = 0; task_busy = '0; dep_adj = '0;
      // a chain: task z depends on task z-1
      for (int z = 1; z < NT; z++) dep_adj[z-1][z] = 1'b1;
      for (int z = 0; z < NT; z++) begin
        task_frames[z] = 16'(NF);
        task_exec[z] = 24'd1000; task_idle[z] = 24'd1000000; task_ecrt[z] = 24'd100000;
      end
      weights = '{wa: 9'd0, wb: 9'd0, wc: 9'd256, wd: 9'd0};
      for (int z = 0; z < NT; z++)
        for (int k = 0; k < NF; k++)
          for (int w = 0; w < FW; w++)
            u_cm.mem[(z*NF + k)*FW + w] = gold(z, k, w);
      wait (rst_n);
      @(posedge clk);
      t0 = cyc;
      cfg_start <= 1; @(posedge clk); cfg_start <= 0;
      @(posedge clk);
      while (!pass_done) @(posedge clk);
      t_cfg = cyc - t0;
      for (int z = 0; z < NT; z++)
        check(got_sig[z] == exp_sig[z], $sformatf("%0d tasks: signature of task %0d", NT, z));

      // one upset per task: frame 13*z+5, word 3*z+1, a 3-bit burst
      for (int z = 0; z < NT; z++)
        u_cm.mem[(z*NF + (13*z + 5) % NF)*FW + 3*z + 1] ^= (32'h7 << z);
      t0 = cyc;
      run_en <= 1; @(posedge clk); run_en <= 0;
      while (!pass_done) @(posedge clk);
      t_run = cyc - t0;
      check(detect_cnt == 16'(NT), $sformatf("%0d tasks: all detected (%0d)", NT, detect_cnt));
      check(correct_cnt == 16'(NT) && uncorr_cnt == 0, $sformatf("%0d tasks: all corrected (%0d)", NT, correct_cnt));
      check(reject_cnt == 0, $sformatf("%0d tasks: one trial per task (%0d rejected)", NT, reject_cnt));
      check(n_wr == NT, $sformatf("%0d tasks: %0d frames written", NT, n_wr));
      bad = 0;
      for (int z = 0; z < NT; z++)
        for (int k = 0; k < NF; k++)
          for (int w = 0; w < FW; w++)
            if (u_cm.mem[(z*NF + k)*FW + w] != gold(z, k, w)) bad++;
      check(bad == 0, $sformatf("%0d tasks: CM restored (%0d bad words)", NT, bad));

      edac_bits  = (longint'(NT) + longint'(NF)) * FW * 32 + longint'(NT) * 512;
      scrub_bits = longint'(NT) * NF * FW * 32;
      $display("%0d tasks: redundancy %0d bits (parity frames + signatures) vs %0d bits for a golden copy",
               NT, edac_bits, scrub_bits);
      $display("%0d tasks: configuration pass %0d cycles; detection + correction pass %0d cycles, %0d frames rewritten vs %0d for a scrub",
               NT, t_cfg, t_run, n_wr, NT*NF);
      check(edac_bits < scrub_bits, "redundancy below a golden copy");
      done[g] = 1'b1;
    end
  end

  initial begin
        exp_sig[0] = 512'hcfb0ff217d1ca12302aba4b557a6cc1a43523c1b4a19e2b844a0ea652978e6f62f3cb325f918908809a82d06845fc2f7ee9b25c9faead9590e7e5991248bbc93;
        exp_sig[1] = 512'h418e2dec067d72d10c9bf311569856f7df28de38c7f6e87813b8c8d339d64637cf5a05dd4de09bafe76ab9a33acd4aeb4bc7e043e1ff65151f1033effb6be6bb;
        exp_sig[2] = 512'h31fecc2ae153eaa76cbe267ec0fa754a0e9ab805736d026ac12606b6d7ef9d7daf522a6fa06096b021a8c4dcb044da73b0bc1d3be77a921c783f0d4d4d6e7816;
        exp_sig[3] = 512'hb933533f98d35357ec6e90b64d6c12ca9fd37e3b950469bba433e1751533dee3f1a8777117e25efe863d63b07d9de35701f4c237b57631d7222085353fbc5627;
        exp_sig[4] = 512'hafa5b910687d07a6dbdaa4db303e29ef9eafc948d003fa4c6ff06c2e27ae02286005602c5309b98a7029054709390b4c7cf92171b6a72917a650404eccbca3d5;
        exp_sig[5] = 512'h59a00c9e45325d9b41ae15971c4c22f3b21c225843373ebba17770b992cde215c9619fbf0ec62edd05d84bee7b7d9c8db299180891a4a64836dd8810822b009b;
        exp_sig[6] = 512'he1068e25e00fdbcca6c9055b8cf9732ee18b7d0b74775ff4a40956e96dcc34a386a9da7b9d1e909f35a14d9b9768d446b6584a67f9cd2d0406d2fddf6119633b;
        exp_sig[7] = 512'haae61c833d45035633e600fa7c9e4646bb989cfea5a621a6832de05f2dffb7c6dc0c511722354743741e256b7b968b404756f0f5c767f3a5a708b2c7a9ae199c;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (done == '1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
