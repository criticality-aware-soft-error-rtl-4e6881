// keccak_rc_tb: checks the compressed round-constant table against round
// constants computed here from the FIPS 202 LFSR definition rc(t), for all
// 24 rounds, and that out-of-range indices give zero.
module keccak_rc_tb;
  logic [4:0]  round_i;
  logic [63:0] rc_o;
  int checks = 0, failures = 0;

  keccak_rc dut (.round_i(round_i), .rc_o(rc_o));

  function automatic logic lfsr_rc(int t);
    logic [7:0] r;
    logic [8:0] r9;
    if (t % 255 == 0) return 1'b1;
    r = 8'h01;
    for (int i = 1; i <= t % 255; i++) begin
      r9 = {r, 1'b0};
      r9[0] ^= r9[8]; r9[4] ^= r9[8]; r9[5] ^= r9[8]; r9[6] ^= r9[8];
      r = r9[7:0];
    end
    return r[0];
  endfunction

  function automatic logic [63:0] ref_rc(int ir);
    logic [63:0] v = '0;
    for (int j = 0; j < 7; j++) v[(1 << j) - 1] = lfsr_rc(j + 7*ir);
    return v;
  endfunction

  initial begin
    #1000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 32; i++) begin
      logic [63:0] e;
      round_i = 5'(i);
      #1;
      e = (i < 24) ? ref_rc(i) : 64'h0;
      checks++;
      if (rc_o !== e) begin
        failures++;
        $display("round %0d: got %h expected %h", i, rc_o, e);
      end
    end
    // Two well-known constants as an extra anchor.
    round_i = 5'd0;  #1; checks++; if (rc_o !== 64'h1) failures++;
    round_i = 5'd23; #1; checks++; if (rc_o !== 64'h8000000080008008) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
