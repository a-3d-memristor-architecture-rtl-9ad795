// pi_router: the routing sheet and the transmission gates that carry lanes of
// the Rho array back into the state array for the Pi step.
//
// Pi moves lane (x, y) to (y, 2x + 3y) mod 5. The router is addressed by the
// destination (dx, dy) and selects its source lane, (sx, sy) =
// (3(dy - 3dx) mod 5, dx), one lane per cycle, so the step takes 25 cycles.
// Combinational; r_i is the whole Rho array, lane_o the routed lane.
module pi_router
  import sha3_pkg::*;
(
  input  state_t     r_i,
  input  logic [2:0] dx_i,
  input  logic [2:0] dy_i,
  output lane_t      lane_o
);

  logic [2:0] sx, sy;

  always_comb begin
    sy = dx_i;
    sx = 3'(mod5(3 * (int'(dy_i) - 3 * int'(dx_i))));
    lane_o = (dx_i < 3'd5 && dy_i < 3'd5) ? r_i[sx][sy] : '0;
  end

endmodule
