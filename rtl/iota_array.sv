// iota_array: the Iota crossbar array, a read-only store of the 24 round
// constants RC[0..23] of 64 bits each, one column per round. The column of
// the current round drives the horizontal wire of lane 0 of the Chi array,
// where it is XORed into A[0, 0].
//
// The constants are those of the SHA3 standard; here they are produced at
// elaboration by the standard's LFSR (sha3_pkg::round_const) rather than
// listed. Read is combinational: rc_o is the constant of round round_i;
// rounds above 23 read zero.
module iota_array
  import sha3_pkg::*;
(
  input  logic [4:0] round_i,
  output lane_t      rc_o
);

  typedef lane_t [NR-1:0] rc_table_t;

  function automatic rc_table_t build_table();
    rc_table_t t;
    for (int unsigned i = 0; i < NR; i++) t[i] = round_const(i);
    return t;
  endfunction

  localparam rc_table_t RC = build_table();

  assign rc_o = (round_i < 5'(NR)) ? RC[round_i] : '0;

endmodule
