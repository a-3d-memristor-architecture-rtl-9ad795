// state_array: the state array A and its complement array NA, 64 parallel
// crossbar slices of 5x5 memristors each (11x11 with the routing row and
// column), holding the 1600-bit Keccak state and, next to it, a second copy
// that Theta, Pi and Chi use as scratch and as the complemented state.
//
// A memristor in the low-resistance state (LRS) stores logic 1, one in the
// high-resistance state (HRS) logic 0. The arrays are modelled as flip-flops
// with the access patterns the crossbars have: whole-array programming to HRS
// or LRS (one cycle each), writing one plane y of A (five lanes, each lane
// individually enabled by a_pl_we_i), and writing one lane (x, y) of NA. All
// 3200 bits are readable at once, since every slice is wired to the
// multiplexers, the Chi array and the Theta XOR gates in parallel.
//
// Timing: writes take effect at the rising clock edge; reads are the current
// contents. If a whole-array operation and a plane or lane write fall in the
// same cycle, the plane or lane write wins (the sequencer never issues both).
// Reset clears both arrays to HRS; reset behaviour is this design's choice.
module state_array
  import sha3_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  // whole-array programming
  input  logic        a_clr_i,    // A  -> HRS (all 0)
  input  logic        a_set_i,    // A  -> LRS (all 1)
  input  logic        na_clr_i,   // NA -> HRS
  input  logic        na_set_i,   // NA -> LRS
  // plane write into A
  input  logic [4:0]  a_pl_we_i,  // one enable per lane x of the plane
  input  logic [2:0]  a_pl_y_i,
  input  plane_t      a_pl_d_i,
  // lane write into NA
  input  logic        na_ln_we_i,
  input  logic [2:0]  na_ln_x_i,
  input  logic [2:0]  na_ln_y_i,
  input  lane_t       na_ln_d_i,
  // contents
  output state_t      a_o,
  output state_t      na_o
);

  state_t a_q, na_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_q <= '0;
    end else begin
      if (a_clr_i)      a_q <= '0;
      else if (a_set_i) a_q <= '1;
      for (int x = 0; x < 5; x++)
        if (a_pl_we_i[x]) a_q[x][a_pl_y_i] <= a_pl_d_i[x];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      na_q <= '0;
    end else begin
      if (na_clr_i)      na_q <= '0;
      else if (na_set_i) na_q <= '1;
      if (na_ln_we_i) na_q[na_ln_x_i][na_ln_y_i] <= na_ln_d_i;
    end
  end

  assign a_o  = a_q;
  assign na_o = na_q;

  // Indices are 0..4, and HRS and LRS are never requested together.
  a_plane_idx: assert property (@(posedge clk) disable iff (!rst_n)
                                (|a_pl_we_i) |-> a_pl_y_i < 3'd5);
  na_lane_idx: assert property (@(posedge clk) disable iff (!rst_n)
                                na_ln_we_i |-> (na_ln_x_i < 3'd5 && na_ln_y_i < 3'd5));
  a_prog_excl: assert property (@(posedge clk) disable iff (!rst_n) !(a_clr_i && a_set_i));
  na_prog_excl: assert property (@(posedge clk) disable iff (!rst_n) !(na_clr_i && na_set_i));

endmodule
