// sha3_512_tb: SHA3-512 digests and timing of the multi-message sponge.
//
// 1. Six messages of 1, 17, 18, 19, 36 and 50 words (around the 18-word
//    block boundary, so that padding lands in every possible place) are
//    hashed one at a time on input 0 and compared with SHA3-512 values from
//    an independent reference implementation, first with random idle gaps,
//    then back to back.  Back-to-back cycle counts are checked.
// 2. All four inputs hash different messages at once with random gaps; each
//    digest must come out tagged with its own input.
// 3. All four inputs hash a 50-word message back to back at the same time:
//    the four states share the permutation ring, so the four digests must
//    be out only three cycles after a single message's would be
//    (4 x 576 bits absorbed per 48 cycles).
module sha3_512_tb;
  logic clk = 0, rst_n = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  always #5 clk = ~clk;

  localparam int NCTX = 4;
  logic [NCTX-1:0]       in_valid, in_ready, in_last;
  logic [NCTX-1:0][31:0] in_data;
  logic                  digest_valid;
  logic [1:0]            digest_ctx;
  logic [511:0]          digest_o;
  int checks = 0, failures = 0;

  sha3_512 dut (.*);

  logic [511:0] got [NCTX];
  int           got_n [NCTX] = '{0, 0, 0, 0};   // digests seen per input
  longint       got_t [NCTX];
  always @(posedge clk)
    if (digest_valid) begin
      got[digest_ctx] <= digest_o; got_n[digest_ctx] <= got_n[digest_ctx] + 1;
      got_t[digest_ctx] <= cyc;
    end

  localparam int NMSG = 6;
  int           lens [NMSG] = '{1, 17, 18, 19, 36, 50};
  logic [511:0] exp  [NMSG];

  function automatic logic [31:0] msg_word(int m, int j);
    return 32'(m * 32'h01000193 + j * 32'h9E3779B9 + 32'h12345678);
  endfunction


  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Feed message m to input x; returns when its last word is taken.
  task automatic feed(int x, int m, bit gaps);
    for (int j = 0; j < lens[m]; j++) begin
      if (gaps) while ($urandom_range(0, 2) == 0) begin in_valid[x] <= 0; @(posedge clk); end
      in_valid[x] <= 1; in_data[x] <= msg_word(m, j); in_last[x] <= (j == lens[m] - 1);
      @(posedge clk);
      while (!in_ready[x]) @(posedge clk);
    end
    in_valid[x] <= 0; in_last[x] <= 0;
  endtask

  // Wait until input x has produced more than n0 digests, then check.
  task automatic expect_digest(int x, int m, int n0);
    while (got_n[x] == n0) @(posedge clk);
    checks++;
    if (got[x] !== exp[m]) begin
      failures++; $display("input %0d message %0d (%0d words): wrong digest %h", x, m, lens[m], got[x]);
    end
  endtask

  task automatic hash(int m, bit gaps, output longint cycles);
    longint t0 = cyc;
    int n0 = got_n[0];
    feed(0, m, gaps);
    expect_digest(0, m, n0);
    cycles = got_t[0] - t0;
  endtask

  initial begin
    longint c;
    int n0 [NCTX];
    exp[0] = 512'hea28443213dc4e966e974b4d5eb24e05105a636c6ab860455f41ed2754835c4245266f73550e1fcc323bcefc5343481bcd5edd776e778c61b5da6060f4b308d9;
    exp[1] = 512'h05cbf208ff1579ac48977a33e5bcbe24e08989b3c8adc822c1d64e77c5e5d8f3c7749e31afbdb058770a0c3a6b543410893a4561f16110188bdb1c047863950b;
    exp[2] = 512'h82097d7eb24611505a9ee6ff142c3cb24b5c36f0f1968faeeacff3cad3d8f0d1392693c0f2f668ba14317b90a31d7da3de71899cede09e04ca03d5cfdda33e60;
    exp[3] = 512'hc954e74bdcdd26e1861fb7bdc14b434afd2a1c5a8a7e36d0fa3e5e9ece7b25758cb7eff471ed43186c09a8002600537c00fde79108d30d5fda5f050da3824711;
    exp[4] = 512'h5fb9391e319e21037921e48c681ffa79fd14f26472d925f2736f80febef164aa8020dc2806192ed32959915bd4cbeedbda6074594d0ca734527063c22f83efa1;
    exp[5] = 512'h000b79a59b01de0d3a20a3fc6aa743ea2919901d9ed9901d2c9d1d812dffe4f9a271c775712a48c385ea1f23d04162c3f613a33493bb5c49117303512c82ad06;
    in_valid = '0; in_data = '0; in_last = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int m = 0; m < NMSG; m++) hash(m, 1'b1, c);
    for (int m = 0; m < NMSG; m++) begin
      hash(m, 1'b0, c);
      $display("message %0d: %0d words, %0d cycles", m, lens[m], c);
      if (m == 0) begin
        // 1 word, pad, launch, 48-cycle permutation, digest register.
        checks++;
        if (c != 52) begin failures++; $display("1-word message took %0d cycles, expected 52", c); end
      end
      if (m == 5) begin
        // 50 words = three blocks: 18 words to fill the first, a launch
        // cycle, then 48 cycles per block (the later blocks fill while the
        // permutation runs and re-enter the ring directly), plus the digest
        // register.
        checks++;
        if (c != 18 + 1 + 3*48 + 1) begin failures++; $display("50-word message took %0d cycles", c); end
      end
    end
    // 2. four different messages at once, with gaps
    n0 = got_n;
    fork
      feed(0, 5, 1'b1);
      feed(1, 2, 1'b1);
      feed(2, 4, 1'b1);
      feed(3, 0, 1'b1);
    join
    expect_digest(0, 5, n0[0]); expect_digest(1, 2, n0[1]);
    expect_digest(2, 4, n0[2]); expect_digest(3, 0, n0[3]);
    // 3. four 50-word messages back to back, all at once
    repeat (5) @(posedge clk);
    n0 = got_n;
    c = cyc;
    fork
      feed(0, 5, 1'b0);
      feed(1, 5, 1'b0);
      feed(2, 5, 1'b0);
      feed(3, 5, 1'b0);
    join
    for (int x = 0; x < NCTX; x++) expect_digest(x, 5, n0[x]);
    begin
      longint last;
      last = 0;
      for (int x = 0; x < NCTX; x++) if (got_t[x] > last) last = got_t[x];
      $display("four 50-word messages together: %0d cycles", last - c);
      // One launch per cycle: the four states enter the ring in four
      // consecutive cycles and then stay interleaved.
      checks++;
      if (last - c != 18 + 1 + 3*48 + 1 + 3) begin failures++; $display("four messages took %0d cycles", last - c); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
