// tb_rho_mux_lane: checks the five multiplexer lanes (Y = 0..4) against
// rotations computed with the reference model's rho offsets, for every
// select value and random lane contents. Combinational, so each check is
// made after a short settling delay.
module tb_rho_mux_lane;
  import sha3_pkg::*;
  import keccak_ref_pkg::*;

  int checks = 0, failures = 0;
  lane_t [4:0] sheets;
  lane_t       rot1;
  logic  [2:0] sel;
  lane_t       out [5];

  for (genvar y = 0; y < 5; y++) begin : g_dut
    rho_mux_lane #(.Y(y)) dut (.sheets_i(sheets), .rot1_i(rot1), .sel_i(sel), .lane_o(out[y]));
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    lane_t exp;
    for (int it = 0; it < 20; it++) begin
      for (int x = 0; x < 5; x++) sheets[x] = {$urandom, $urandom};
      rot1 = {$urandom, $urandom};
      for (int s = 0; s < 8; s++) begin
        sel = 3'(s);
        #1;
        for (int y = 0; y < 5; y++) begin
          if (s < 5)       exp = rol(sheets[s], ref_rho_off(s, y));
          else if (s == 5) exp = rol(rot1, 1);
          else             exp = '0;
          checks++;
          if (out[y] !== exp) begin
            failures++;
            if (failures < 10) $display("mismatch Y=%0d sel=%0d: %h exp %h", y, s, out[y], exp);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
