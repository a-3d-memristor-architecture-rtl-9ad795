// rho_mux_bank: the CMOS multiplexer box between the state array and the Rho
// array, five lanes of 64 multiplexers, one lane per plane y.
//
// With select x the box rotates all five lanes of sheet x of the source array
// by their Rho offsets r[x][y] in one cycle, so the whole Rho step takes five
// cycles, one per sheet. With select 5 it rotates the five lanes of rot1_i by
// one bit, which is step 1 of Theta. The source array (the state array A or its
// complement array NA) is chosen outside, by the column transmission gates.
//
// Purely combinational. src_i[x][y] is lane (x, y) of the source array,
// rot1_i[y] lane y of the sheet to rotate by one, sheet_o[y] the five rotated
// lanes written into one sheet of the Rho array.
module rho_mux_bank
  import sha3_pkg::*;
(
  input  state_t      src_i,
  input  sheet_t      rot1_i,
  input  logic  [2:0] sel_i,
  output sheet_t      sheet_o
);

  for (genvar y = 0; y < 5; y++) begin : g_lane
    lane_t [4:0] plane_lanes;
    for (genvar x = 0; x < 5; x++) begin : g_x
      assign plane_lanes[x] = src_i[x][y];
    end
    rho_mux_lane #(.Y(y)) u_lane (
      .sheets_i (plane_lanes),
      .rot1_i   (rot1_i[y]),
      .sel_i    (sel_i),
      .lane_o   (sheet_o[y])
    );
  end

endmodule
