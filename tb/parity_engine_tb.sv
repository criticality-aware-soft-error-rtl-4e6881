// parity_engine_tb: builds golden parity from random frames (tasks padded
// with zero frames), then runs check passes on data with injected bit
// errors and compares the syndromes and the vertical/horizontal mismatch
// flags with values computed here directly from the error patterns.  Also
// checks that a clean pass gives no flags and the scan length, and that
// the scan narrowed to one task flags only the columns whose mismatch
// shares a bit position with that task's horizontal mismatch.
module parity_engine_tb;
  import edac_pkg::*;
  localparam int NT = 4, NF = 6, FW = 5;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic acc_valid, acc_encode, scan_start, scan_busy, scan_done, scan_mask;
  logic [1:0] acc_task, syn_task, scan_task;
  logic [2:0] acc_frame, syn_word, acc_word;
  word_t acc_data, syn_data;
  logic [NF-1:0] vflag;
  logic [NT-1:0] hflag;
  int checks = 0, failures = 0;

  parity_engine #(.N_TASKS(NT), .N_FRAMES(NF), .FRAME_WORDS(FW)) dut (.*);

  word_t data [NT][NF][FW];
  word_t err  [NT][NF][FW];
  int    frames [NT] = '{6, 4, 5, 6};

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic pass(bit encode);
    for (int z = 0; z < NT; z++)
      for (int k = 0; k < NF; k++)
        for (int w = 0; w < FW; w++) begin
          acc_valid <= 1; acc_encode <= encode;
          acc_task <= 2'(z); acc_frame <= 3'(k); acc_word <= 3'(w);
          acc_data <= encode ? data[z][k][w] : (data[z][k][w] ^ err[z][k][w]);
          @(posedge clk);
        end
    acc_valid <= 0;
    @(posedge clk);
  endtask

  task automatic scan_and_check(string tag);
    logic [NF-1:0] ev;
    logic [NT-1:0] eh;
    int n = 0;
    scan_start <= 1; @(posedge clk); scan_start <= 0;
    while (!scan_done) begin @(posedge clk); n++; end
    checks++;
    // NF*FW cycles of scanning, then the cycle that raises scan_done.
    if (n != NF*FW + 1) begin failures++; $display("%s: scan took %0d cycles", tag, n); end
    ev = '0; eh = '0;
    for (int k = 0; k < NF; k++) for (int w = 0; w < FW; w++) begin
      word_t x = '0;
      for (int z = 0; z < NT; z++) x ^= err[z][k][w];
      if (x != 0) ev[k] = 1;
    end
    for (int z = 0; z < NT; z++) for (int w = 0; w < FW; w++) begin
      word_t x = '0;
      for (int k = 0; k < NF; k++) x ^= err[z][k][w];
      if (x != 0) eh[z] = 1;
      syn_task = 2'(z); syn_word = 3'(w); #1;
      checks++;
      if (syn_data !== x) begin failures++; $display("%s: syndrome task %0d word %0d = %h, expected %h", tag, z, w, syn_data, x); end
    end
    checks++;
    if (vflag !== ev) begin failures++; $display("%s: vflag %b expected %b", tag, vflag, ev); end
    checks++;
    if (hflag !== eh) begin failures++; $display("%s: hflag %b expected %b", tag, hflag, eh); end
  endtask

  // Scan narrowed to task t: vflag[k] must be set exactly when column k's
  // vertical error pattern and task t's horizontal one share a bit.
  task automatic masked_check(string tag, int t);
    logic [NF-1:0] ev;
    scan_task <= 2'(t); scan_mask <= 1;
    scan_start <= 1; @(posedge clk); scan_start <= 0; scan_mask <= 0;
    while (!scan_done) @(posedge clk);
    ev = '0;
    for (int k = 0; k < NF; k++) for (int w = 0; w < FW; w++) begin
      word_t xv = '0, xh = '0;
      for (int z = 0; z < NT; z++) xv ^= err[z][k][w];
      for (int f = 0; f < NF; f++) xh ^= err[t][f][w];
      if ((xv & xh) != 0) ev[k] = 1;
    end
    checks++;
    if (vflag !== ev) begin failures++; $display("%s: masked vflag task %0d %b expected %b", tag, t, vflag, ev); end
  endtask

  initial begin
    scan_mask = 0; scan_task = 0;
    acc_valid = 0; acc_encode = 0; acc_task = 0; acc_frame = 0; acc_word = 0; acc_data = 0;
    syn_task = 0; syn_word = 0; scan_start = 0;
    for (int z = 0; z < NT; z++) for (int k = 0; k < NF; k++) for (int w = 0; w < FW; w++) begin
      data[z][k][w] = (k < frames[z]) ? $urandom : 32'h0;
      err[z][k][w]  = '0;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    pass(1'b1);
    pass(1'b0);
    scan_and_check("clean");
    // Errors in one frame of task 1 and one frame of task 2.
    err[1][3][0] = 32'h0000_0003; err[1][3][4] = 32'h8000_0000;
    err[2][1][2] = 32'h00F0_0000;
    pass(1'b0);
    scan_and_check("two tasks");
    for (int t = 0; t < NT; t++) masked_check("two tasks", t);
    // Columns 1 and 3 both mismatch, but task 1's own scan sees only frame 3.
    masked_check("two tasks", 1);
    checks++;
    if (vflag !== 6'b001000) begin failures++; $display("masked scan of task 1 flags %b", vflag); end
    // Task 3 with errors in two of its frames, plus task 0 in frame 3.
    err[3][0][1] = 32'h0000_0100; err[3][5][1] = 32'h0000_0001;
    err[0][3][0] = 32'h0000_0003;
    pass(1'b0);
    scan_and_check("multi-frame");
    for (int t = 0; t < NT; t++) masked_check("multi-frame", t);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
