// keccak_f_pipe_tb: compares the pipelined permutation with a plain
// loop-based Keccak-f[1600] written here (rho offsets and round constants
// derived from their FIPS 202 definitions, not from a table), checks the
// known answer for the all-zero state, the 48-cycle latency, that four
// states can be in flight at once with their tags, and that in_ready drops
// while the ring is full.
module keccak_f_pipe_tb;
  import keccak_pkg::kstate_t;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic       in_valid, in_ready, out_valid;
  kstate_t    in_state, out_state;
  logic [1:0] in_tag, out_tag;
  int checks = 0, failures = 0;

  keccak_f_pipe #(.TAG_W(2)) dut (.*);

  // ---------------- reference model ----------------
  function automatic logic lfsr_rc(int t);
    logic [7:0] r; logic [8:0] r9;
    if (t % 255 == 0) return 1'b1;
    r = 8'h01;
    for (int i = 1; i <= t % 255; i++) begin
      r9 = {r, 1'b0};
      r9[0] ^= r9[8]; r9[4] ^= r9[8]; r9[5] ^= r9[8]; r9[6] ^= r9[8];
      r = r9[7:0];
    end
    return r[0];
  endfunction

  function automatic logic [63:0] rotl(logic [63:0] v, int n);
    n = n % 64;
    return (n == 0) ? v : ((v << n) | (v >> (64 - n)));
  endfunction

  function automatic kstate_t ref_f(kstate_t s);
    logic [63:0] a [5][5], b [5][5], c [5], d [5];
    int ofs [5][5];
    int x, y, t, nx;
    for (x = 0; x < 5; x++) for (y = 0; y < 5; y++) a[x][y] = s[64*(x+5*y) +: 64];
    ofs[0][0] = 0; x = 1; y = 0;
    for (t = 0; t < 24; t++) begin
      ofs[x][y] = ((t+1)*(t+2)/2) % 64;
      nx = y; y = (2*x + 3*y) % 5; x = nx;
    end
    for (int ir = 0; ir < 24; ir++) begin
      for (x = 0; x < 5; x++) c[x] = a[x][0]^a[x][1]^a[x][2]^a[x][3]^a[x][4];
      for (x = 0; x < 5; x++) d[x] = c[(x+4)%5] ^ rotl(c[(x+1)%5], 1);
      for (x = 0; x < 5; x++) for (y = 0; y < 5; y++) a[x][y] ^= d[x];
      for (x = 0; x < 5; x++) for (y = 0; y < 5; y++) b[y][(2*x+3*y)%5] = rotl(a[x][y], ofs[x][y]);
      for (x = 0; x < 5; x++) for (y = 0; y < 5; y++) a[x][y] = b[x][y] ^ (~b[(x+1)%5][y] & b[(x+2)%5][y]);
      for (int j = 0; j < 7; j++) a[0][0][(1<<j)-1] ^= lfsr_rc(j + 7*ir);
    end
    for (x = 0; x < 5; x++) for (y = 0; y < 5; y++) s[64*(x+5*y) +: 64] = a[x][y];
    return s;
  endfunction

  function automatic kstate_t rand_state();
    kstate_t s;
    for (int i = 0; i < 50; i++) s[32*i +: 32] = $urandom;
    return s;
  endfunction

  // ---------------- stimulus ----------------
  kstate_t sent [4];
  longint  t_in [4];
  longint  cyc = 0;
  int      got = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // Output monitor: every finished state is checked against the reference.
  // Input monitor: remember what was accepted and when.
  always @(posedge clk) if (rst_n && in_valid && in_ready) begin
    sent[in_tag] = in_state;
    t_in[in_tag] = cyc;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    checks++;
    if (out_state !== ref_f(sent[out_tag])) begin
      failures++; $display("tag %0d: wrong permutation result", out_tag);
    end
    checks++;
    if (cyc - t_in[out_tag] != 48) begin
      failures++; $display("tag %0d: latency %0d, expected 48", out_tag, cyc - t_in[out_tag]);
    end
    got++;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send(kstate_t s, logic [1:0] tag);
    in_valid <= 1; in_state <= s; in_tag <= tag;
    @(posedge clk);
    while (!in_ready) @(posedge clk);
    in_valid <= 0;
  endtask

  initial begin
    kstate_t z;
    in_valid = 0; in_state = '0; in_tag = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    // Known answer: Keccak-f[1600] of the zero state, first lane.
    z = ref_f('0);
    checks++;
    if (z[63:0] !== 64'hF1258F7940E1DDE7) begin failures++; $display("reference model KAT failed"); end
    send('0, 2'd0);
    wait (got == 1);
    @(posedge clk);
    // Four states back to back fill the ring.
    for (int r = 0; r < 5; r++) begin
      automatic int base = got;
      for (int k = 0; k < 4; k++) begin
        in_valid <= 1; in_state <= rand_state(); in_tag <= 2'(k);
        @(posedge clk);
        checks++;
        if (!in_ready) begin failures++; $display("ring not free for state %0d", k); end
      end
      in_valid <= 1;
      @(posedge clk);
      #1;
      checks++;
      if (in_ready) begin failures++; $display("in_ready high with a full ring"); end
      in_valid <= 0;
      wait (got == base + 4);
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
