// rho_mux_lane: one lane of the Rho multiplexer box, 64 CMOS multiplexers that
// connect plane Y of the state array to plane Y of the Rho array.
//
// Every multiplexer input is hard-wired to one sheet x of the state array with
// that sheet's rotation already applied by the wiring: input x of the
// multiplexer for bit z carries bit (z - r[x][Y]) mod 64 of lane (x, Y), where
// r is the Rho offset table. All 64 multiplexers of the lane share one 3-bit
// select, so select value x rotates lane (x, Y) by r[x][Y] in a single cycle.
// Select value 5 is the extra input added for Theta: it carries the lane on
// rot1_i rotated by one bit. The description gives this sixth input to the
// planes Y = 1..4 only, since plane 0 already has offset 1 (at x = 1); here
// plane 0 gets it as well so that the 1-bit rotation can be applied to any
// sheet, which Theta needs. Select values 6 and 7 are unused and give zero.
//
// Purely combinational. Interface: sheets_i[x] is lane (x, Y) of the source
// array, rot1_i the lane to rotate by one, sel_i the shared select, lane_o the
// rotated lane written into the Rho array.
module rho_mux_lane
  import sha3_pkg::*;
#(
  parameter int unsigned Y = 0    // plane of the state array this lane serves
) (
  input  lane_t [4:0] sheets_i,
  input  lane_t       rot1_i,
  input  logic  [2:0] sel_i,
  output lane_t       lane_o
);

  lane_t [4:0] rotated;

  // The fixed wiring: one rotation per multiplexer input.
  for (genvar x = 0; x < 5; x++) begin : g_in
    assign rotated[x] = rotl(sheets_i[x], rho_off(x, Y));
  end

  always_comb begin
    unique case (sel_i)
      3'd0, 3'd1, 3'd2, 3'd3, 3'd4: lane_o = rotated[sel_i];
      3'd5:                         lane_o = rotl(rot1_i, 1);
      default:                      lane_o = '0;
    endcase
  end

endmodule
