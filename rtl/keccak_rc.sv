// keccak_rc: Keccak-f[1600] round constant generator.
//
// A Keccak round constant can only have ones at bit positions 2^j-1
// (j = 0..6), i.e. bits 0, 1, 3, 7, 15, 31 and 63.  Following the paper's
// "simplified round constant generator", only those 7 bits are stored per
// round (a 24 x 7 bit table) and the 64-bit constant is rebuilt by placing
// them at their positions; all other bits are wired to zero.
//
// Interface: round index in (0..23), 64-bit constant out.  Purely
// combinational; the permutation pipeline reads two of these per clock
// (one per unrolled round).  Indices above 23 return zero.  57 of the 64
// output bits are therefore constant zero; that is the point of the block.
module keccak_rc (
  input  logic [4:0]  round_i,
  output logic [63:0] rc_o
);

  // Bit j of an entry is bit 2^j-1 of the round constant.
  localparam logic [6:0] RC_BITS [24] = '{
    7'h01, 7'h1a, 7'h5e, 7'h70, 7'h1f, 7'h21, 7'h79, 7'h55,
    7'h0e, 7'h0c, 7'h35, 7'h26, 7'h3f, 7'h4f, 7'h5d, 7'h53,
    7'h52, 7'h48, 7'h16, 7'h66, 7'h79, 7'h58, 7'h21, 7'h74
  };

  logic [6:0] bits;

  always_comb begin
    bits = (round_i < 5'd24) ? RC_BITS[round_i] : 7'h00;
    rc_o = '0;
    for (int j = 0; j < 7; j++)
      rc_o[(1 << j) - 1] = bits[j];
  end

endmodule
