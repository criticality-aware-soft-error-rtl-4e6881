// edac_top_full_tb: one complete operation of the EDAC engine at its
// default size: 10 tasks of 100 frames of 101 32-bit words (the ten-task,
// hundred-frame configuration used in the design's evaluation; the frame size
// is that of a 7-series FPGA).  The configuration pass must store SHA3-512
// signatures equal to those of an independent reference; then adjacent
// multi-bit upsets are injected in frame 42 of task 3 and frame 10 of task 7,
// and one check pass must detect both tasks, correct them (the upsets share
// a bit position, so task 3's first candidate, frame 10, must be rejected),
// write back only the two faulty
// frames and leave the whole CM equal to the original data.
module edac_top_full_tb;
  import edac_pkg::*;
  localparam int NT = 10, NF = 100, FW = 101;
  localparam int FADDR_W = $clog2(NT * NF), WIDX_W = $clog2(FW);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cfg_start, run_en, cfg_done, pass_done, sig_valid;
  logic [3:0] sig_task;
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

  edac_top u_dut (.*);

  cm_model #(.N_FRAMES_TOTAL(NT*NF), .FRAME_WORDS(FW), .FADDR_W(FADDR_W), .WIDX_W(WIDX_W)) u_cm (
    .clk(clk), .rst_n(rst_n),
    .rd_req_valid(cm_rd_req_valid), .rd_req_ready(cm_rd_req_ready), .rd_frame(cm_rd_frame),
    .rd_valid(cm_rd_valid), .rd_ready(cm_rd_ready), .rd_data(cm_rd_data),
    .wr_valid(cm_wr_valid), .wr_frame(cm_wr_frame), .wr_word(cm_wr_word), .wr_data(cm_wr_data));

  function automatic word_t gold(int z, int k, int w);
    return 32'((z * 32'h9E3779B9) ^ ((k + 1) * 32'h85EBCA6B) ^ ((w + 7) * 32'hC2B2AE35));
  endfunction

  int wr_frames [$];
  longint cyc = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && sig_valid && !cfg_done) got_sig[sig_task] <= sig_data;
    if (rst_n && cm_wr_valid && cm_wr_word == 0) wr_frames.push_back(int'(cm_wr_frame));
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  logic [511:0] exp_sig [NT];

  initial begin
    int bad;
    longint t0;
    exp_sig[0] = 512'hcfb0ff217d1ca12302aba4b557a6cc1a43523c1b4a19e2b844a0ea652978e6f62f3cb325f918908809a82d06845fc2f7ee9b25c9faead9590e7e5991248bbc93;
    exp_sig[1] = 512'h418e2dec067d72d10c9bf311569856f7df28de38c7f6e87813b8c8d339d64637cf5a05dd4de09bafe76ab9a33acd4aeb4bc7e043e1ff65151f1033effb6be6bb;
    exp_sig[2] = 512'h31fecc2ae153eaa76cbe267ec0fa754a0e9ab805736d026ac12606b6d7ef9d7daf522a6fa06096b021a8c4dcb044da73b0bc1d3be77a921c783f0d4d4d6e7816;
    exp_sig[3] = 512'hb933533f98d35357ec6e90b64d6c12ca9fd37e3b950469bba433e1751533dee3f1a8777117e25efe863d63b07d9de35701f4c237b57631d7222085353fbc5627;
    exp_sig[4] = 512'hafa5b910687d07a6dbdaa4db303e29ef9eafc948d003fa4c6ff06c2e27ae02286005602c5309b98a7029054709390b4c7cf92171b6a72917a650404eccbca3d5;
    exp_sig[5] = 512'h59a00c9e45325d9b41ae15971c4c22f3b21c225843373ebba17770b992cde215c9619fbf0ec62edd05d84bee7b7d9c8db299180891a4a64836dd8810822b009b;
    exp_sig[6] = 512'he1068e25e00fdbcca6c9055b8cf9732ee18b7d0b74775ff4a40956e96dcc34a386a9da7b9d1e909f35a14d9b9768d446b6584a67f9cd2d0406d2fddf6119633b;
    exp_sig[7] = 512'haae61c833d45035633e600fa7c9e4646bb989cfea5a621a6832de05f2dffb7c6dc0c511722354743741e256b7b968b404756f0f5c767f3a5a708b2c7a9ae199c;
    exp_sig[8] = 512'h0ffb50ee6138e2d3e64b87edc38563a4472879feb5d3317ee6fff00dc1e11cf886716a5b067bd9856cbdc0c7a8c59fad70445effe97bdb36e384c38f4c59091d;
    exp_sig[9] = 512'h1341e8818df026b07a17a8f8139451b551740d9f86a8ec3c9cce2f4f2b20940b060b1994a63b2ba728cc4e1d44e6aa28a346c4a4de7ee023f0311739e9067fb6;
    cfg_start = 0; run_en = 0; task_busy = '0;
    for (int z = 0; z < NT; z++) begin
      task_frames[z] = 16'(NF);
      task_exec[z] = 24'd1000; task_idle[z] = 24'd1000000; task_ecrt[z] = 24'd100000;
    end
    // The example dependency graph: A -> B,C,D; B -> E,F,G; C -> H,I; D -> I,J.
    dep_adj = '0;
    dep_adj[0][1] = 1; dep_adj[0][2] = 1; dep_adj[0][3] = 1;
    dep_adj[1][4] = 1; dep_adj[1][5] = 1; dep_adj[1][6] = 1;
    dep_adj[2][7] = 1; dep_adj[2][8] = 1; dep_adj[3][8] = 1; dep_adj[3][9] = 1;
    weights = '{wa: 9'd64, wb: 9'd64, wc: 9'd256, wd: 9'd0};
    for (int z = 0; z < NT; z++)
      for (int k = 0; k < NF; k++)
        for (int w = 0; w < FW; w++)
          u_cm.mem[(z*NF + k)*FW + w] = gold(z, k, w);
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);

    t0 = cyc;
    cfg_start <= 1; @(posedge clk); cfg_start <= 0;
    @(posedge clk);
    while (!pass_done) @(posedge clk);
    $display("configuration pass: %0d cycles", cyc - t0);
    for (int z = 0; z < NT; z++)
      check(got_sig[z] == exp_sig[z], $sformatf("signature of task %0d", z));

    u_cm.mem[(3*NF + 42)*FW + 17] ^= 32'h0000_3C00;
    u_cm.mem[(3*NF + 42)*FW + 18] ^= 32'h0000_0001;
    // Task 7's upset shares bit 10 of word 17 with task 3's, so frame 10
    // is a candidate for task 3 as well.
    u_cm.mem[(7*NF + 10)*FW + 17] ^= 32'h0000_0400;
    t0 = cyc;
    run_en <= 1;
    @(posedge clk);
    run_en <= 0;
    while (!pass_done) @(posedge clk);
    $display("check pass with two corrections: %0d cycles", cyc - t0);
    check(detect_cnt == 2, $sformatf("two faulty tasks detected (%0d)", detect_cnt));
    check(correct_cnt == 2 && uncorr_cnt == 0, "both corrected");
    check(reject_cnt == 1, $sformatf("one candidate rejected (%0d)", reject_cnt));
    check(wr_frames.size() == 2, "only two frames written back");
    bad = 0;
    for (int z = 0; z < NT; z++)
      for (int k = 0; k < NF; k++)
        for (int w = 0; w < FW; w++)
          if (u_cm.mem[(z*NF + k)*FW + w] != gold(z, k, w)) bad++;
    check(bad == 0, $sformatf("CM restored (%0d bad words)", bad));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
