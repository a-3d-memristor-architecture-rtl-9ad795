// tb_rho_mux_bank: drives a random source array through the multiplexer box
// and checks that select x yields the five lanes of sheet x rotated by the
// reference rho offsets, and select 5 the rot1 sheet rotated by one.
module tb_rho_mux_bank;
  import sha3_pkg::*;
  import keccak_ref_pkg::*;

  int checks = 0, failures = 0;
  state_t     src;
  sheet_t     rot1, out;
  logic [2:0] sel;

  rho_mux_bank dut (.src_i(src), .rot1_i(rot1), .sel_i(sel), .sheet_o(out));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    lane_t exp;
    for (int it = 0; it < 20; it++) begin
      for (int x = 0; x < 5; x++)
        for (int y = 0; y < 5; y++) src[x][y] = {$urandom, $urandom};
      for (int y = 0; y < 5; y++) rot1[y] = {$urandom, $urandom};
      for (int s = 0; s < 6; s++) begin
        sel = 3'(s);
        #1;
        for (int y = 0; y < 5; y++) begin
          exp = (s < 5) ? rol(src[s][y], ref_rho_off(s, y)) : rol(rot1[y], 1);
          checks++;
          if (out[y] !== exp) begin
            failures++;
            if (failures < 10) $display("mismatch sel=%0d y=%0d", s, y);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
