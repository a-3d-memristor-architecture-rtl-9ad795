// rho_array: the Rho array R, five stacked crossbar planes of 5x64 memristors
// that hold the rotated lanes coming out of the multiplexer box. It is a pure
// memory: Theta parks rot(A[x],1) here, and Rho leaves rho(A) here for Pi to
// route back into the state array.
//
// Writes go one sheet x at a time (the five lanes (x, 0..4) produced by the
// multiplexers in one cycle); the whole array can be programmed to HRS
// (logic 0) in one cycle. All lanes are readable at once by the routing sheet
// and by the Theta XOR gates.
//
// Timing: writes at the rising clock edge; a sheet write in the same cycle as
// the clear wins. Reset clears the array (own choice).
module rho_array
  import sha3_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        clr_i,     // whole array -> HRS
  input  logic        sh_we_i,   // write sheet sh_x_i
  input  logic [2:0]  sh_x_i,
  input  sheet_t      sh_d_i,    // sh_d_i[y]: lane (sh_x_i, y)
  output state_t      r_o
);

  state_t r_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r_q <= '0;
    end else begin
      if (clr_i)   r_q <= '0;
      if (sh_we_i) r_q[sh_x_i] <= sh_d_i;
    end
  end

  assign r_o = r_q;

  sheet_idx: assert property (@(posedge clk) disable iff (!rst_n) sh_we_i |-> sh_x_i < 3'd5);

endmodule
