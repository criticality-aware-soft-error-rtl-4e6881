// sha3_512: SHA-3-512 (Keccak[c=1024], rate r=576) sponge over streams of
// 32-bit words, used as the error detection function: the signature of a
// task's configuration frames is computed once when the task is loaded and
// again on every readback, and any difference means the task is corrupted.
//
// N_MSG independent messages can be hashed at the same time (the paper's
// N_msg).  Each has its own input port, 18-word block buffer and chaining
// state; they share one pipelined Keccak-f (keccak_f_pipe), whose ring of
// four registers holds up to four states, tagged with their message index.
// Since the ring has four slots, N_MSG is at most 4.
//
// Absorbing: words are packed into the message's 576-bit block buffer, word
// i at rate bits [32i+31:32i], bytes little-endian, as FIPS 202 orders
// them.  A full block is XORed into the rate part of the chaining state and
// the state enters the ring (48 cycles).  The buffer refills meanwhile; if
// the next block is complete when the state leaves the ring, the state goes
// straight back in with that block XORed in, so a long message costs 48
// cycles per block and four messages together absorb 4 x 576 bits every 48
// cycles.  When several buffers are full, the one whose state is just
// leaving the ring goes first, then the lowest message index.  After the
// word flagged in_last, SHA-3 padding (0x06 ... 0x80) is added, in a block
// of its own if the message ended on a block boundary.  Squeezing:
// 512 < 576, so the digest is the first 512 bits of the state after the
// last permutation; no further permutation is needed.
//
// Interface: per message, valid/ready word input with in_last on the final
// word; messages are whole words and at least one word long.  A digest
// appears on digest_o with digest_valid high for one cycle and digest_ctx
// naming its message; digest_o keeps its value until the next digest.  On
// one input a new message is taken only after the previous digest is out.
//
// Following the paper: SHA-3-512, r = 576, c = 1024, the sub-pipelined and
// unrolled permutation and several messages in flight.  The word width,
// the handshake, the buffering and the launch order are this design's own.
module sha3_512
  import keccak_pkg::*;
#(
  parameter int unsigned N_MSG = 4,
  localparam int unsigned CTX_W = (N_MSG > 1) ? $clog2(N_MSG) : 1
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic [N_MSG-1:0]           in_valid,
  output logic [N_MSG-1:0]           in_ready,
  input  logic [N_MSG-1:0][31:0]     in_data,
  input  logic [N_MSG-1:0]           in_last,
  output logic                       digest_valid,
  output logic [CTX_W-1:0]           digest_ctx,
  output logic [DIGEST_W-1:0]        digest_o
);

  localparam int unsigned BLK_WORDS = RATE_W / 32;   // 18

  logic [N_MSG-1:0][BLK_WORDS-1:0][31:0] blk;
  logic [N_MSG-1:0][4:0] wcnt;
  logic [N_MSG-1:0] full;        // blk holds a complete block
  logic [N_MSG-1:0] blk_final;   // blk holds the padded final block
  logic [N_MSG-1:0] closing;     // last word taken, digest not yet out
  logic [N_MSG-1:0] pad_pend;    // padding still to be added
  logic [N_MSG-1:0] busy;        // the message's state is in the ring
  logic [N_MSG-1:0] run_final;   // that state carries the final block
  kstate_t          st [N_MSG];  // chaining state while not in the ring

  logic             launch, direct;
  logic [CTX_W-1:0] sel;
  logic             p_ready, p_out_valid;
  kstate_t          p_out, p_in;
  logic [CTX_W-1:0] p_out_tag;

  assign in_ready = ~full & ~closing;

  // Launch choice: the state leaving the ring re-enters at once when its
  // next block is ready; otherwise the lowest-index idle message with a
  // full buffer takes the free slot.
  always_comb begin
    launch = 1'b0;
    direct = 1'b0;
    sel    = '0;
    if (p_ready) begin
      if (p_out_valid && !run_final[p_out_tag] && full[p_out_tag]) begin
        launch = 1'b1;
        direct = 1'b1;
        sel    = p_out_tag;
      end else begin
        for (int c = N_MSG - 1; c >= 0; c--) begin
          if (full[c] && !busy[c]) begin
            launch = 1'b1;
            sel    = CTX_W'(c);
          end
        end
      end
    end
    p_in = (direct ? p_out : st[sel]) ^ {{(STATE_W-RATE_W){1'b0}}, blk[sel]};
  end

  keccak_f_pipe #(.TAG_W(CTX_W)) u_perm (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (launch),
    .in_ready  (p_ready),
    .in_state  (p_in),
    .in_tag    (sel),
    .out_valid (p_out_valid),
    .out_state (p_out),
    .out_tag   (p_out_tag)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      blk          <= '0;
      wcnt         <= '0;
      full         <= '0;
      blk_final    <= '0;
      closing      <= '0;
      pad_pend     <= '0;
      busy         <= '0;
      run_final    <= '0;
      for (int c = 0; c < N_MSG; c++) st[c] <= '0;
      digest_valid <= 1'b0;
      digest_ctx   <= '0;
      digest_o     <= '0;
    end else begin
      digest_valid <= 1'b0;
      for (int c = 0; c < N_MSG; c++) begin
        // state leaving the ring
        if (p_out_valid && p_out_tag == CTX_W'(c)) begin
          busy[c] <= 1'b0;
          if (run_final[c]) begin
            digest_o     <= p_out[DIGEST_W-1:0];
            digest_ctx   <= CTX_W'(c);
            digest_valid <= 1'b1;
            st[c]        <= '0;
            closing[c]   <= 1'b0;
            run_final[c] <= 1'b0;
          end else begin
            st[c] <= p_out;
          end
        end
        // block buffer
        if (in_valid[c] && in_ready[c]) begin
          blk[c][wcnt[c]] <= in_data[c];
          wcnt[c]         <= wcnt[c] + 5'd1;
          if (wcnt[c] == 5'(BLK_WORDS - 1)) full[c] <= 1'b1;
          if (in_last[c]) begin
            closing[c]  <= 1'b1;
            pad_pend[c] <= 1'b1;
          end
        end else if (pad_pend[c] && !full[c]) begin
          blk[c][wcnt[c]]       <= blk[c][wcnt[c]] ^ 32'h0000_0006;
          blk[c][BLK_WORDS-1]   <= blk[c][BLK_WORDS-1] ^ 32'h8000_0000
                                   ^ ((wcnt[c] == 5'(BLK_WORDS - 1)) ? 32'h0000_0006 : 32'h0);
          full[c]               <= 1'b1;
          blk_final[c]          <= 1'b1;
          pad_pend[c]           <= 1'b0;
        end else if (launch && sel == CTX_W'(c)) begin
          blk[c]       <= '0;
          wcnt[c]      <= '0;
          full[c]      <= 1'b0;
          blk_final[c] <= 1'b0;
          busy[c]      <= 1'b1;
          run_final[c] <= blk_final[c];
        end
      end
    end
  end

endmodule
