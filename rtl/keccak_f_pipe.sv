// keccak_f_pipe: Keccak-f[1600] permutation (24 rounds), unrolled by two,
// pipelined by two and sub-pipelined by two.
//
// Structure (one pass = two rounds, four register stages in a ring):
//
//   in_state --+
//              |  mux  -> Theta -> REG1 -> Rho,Pi,Chi,Iota(RC 2p)   -> REG2
//   REG4 ------+       -> Theta -> REG3 -> Rho,Pi,Chi,Iota(RC 2p+1) -> REG4 -> out_state
//
// The mux, the two unrolled rounds, the register after each Theta
// (sub-pipelining) and the register after each round (pipelining) are those
// of the paper's optimised SHA-3 architecture.  A state goes round the ring 12
// times, so a permutation takes 48 clock cycles from in_valid&in_ready to
// out_valid.  Because the ring has four registers, up to four independent
// states can be in flight at once, each carrying a TAG_W-bit tag.
//
// Handshake (this design's choice): the ring slot arriving at the mux is
// free when REG4 is empty or holds a finished state; in_ready is high then.
// A finished state is presented on out_state/out_tag for exactly one cycle
// with out_valid high; there is no back-pressure on the output.
module keccak_f_pipe
  import keccak_pkg::*;
#(
  parameter int unsigned TAG_W = 2
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  kstate_t          in_state,
  input  logic [TAG_W-1:0] in_tag,
  output logic             out_valid,
  output kstate_t          out_state,
  output logic [TAG_W-1:0] out_tag
);

  localparam logic [3:0] LAST_PASS = 4'd11;

  typedef struct packed {
    logic             v;
    logic [3:0]       pass;
    logic [TAG_W-1:0] tag;
  } ctl_t;

  ctl_t    c1, c2, c3, c4;
  kstate_t s1, s2, s3, s4;
  ctl_t    cmux;
  kstate_t smux;
  logic    fb;
  lane_t   rc_a, rc_b;

  keccak_rc u_rc_a (.round_i({c1.pass, 1'b0}), .rc_o(rc_a));
  keccak_rc u_rc_b (.round_i({c3.pass, 1'b1}), .rc_o(rc_b));

  // A state that still needs rounds always takes the feedback path.
  assign fb       = c4.v && (c4.pass != LAST_PASS);
  assign in_ready = !fb;

  always_comb begin
    if (fb) begin
      smux      = s4;
      cmux.v    = 1'b1;
      cmux.pass = c4.pass + 4'd1;
      cmux.tag  = c4.tag;
    end else begin
      smux      = in_state;
      cmux.v    = in_valid;
      cmux.pass = 4'd0;
      cmux.tag  = in_tag;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      c1 <= '0; c2 <= '0; c3 <= '0; c4 <= '0;
    end else begin
      c1 <= cmux; c2 <= c1; c3 <= c2; c4 <= c3;
    end
  end

  always_ff @(posedge clk) begin
    s1 <= theta(smux);
    s2 <= rho_pi_chi_iota(s1, rc_a);
    s3 <= theta(s2);
    s4 <= rho_pi_chi_iota(s3, rc_b);
  end

  assign out_valid = c4.v && (c4.pass == LAST_PASS);
  assign out_state = s4;
  assign out_tag   = c4.tag;

endmodule
