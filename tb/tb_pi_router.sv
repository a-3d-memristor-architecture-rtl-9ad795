// tb_pi_router: fills the Rho array with random lanes and, for every source
// lane (x, y), addresses the router with the Pi destination (y, 2x + 3y) and
// checks that the source lane comes out.
module tb_pi_router;
  import sha3_pkg::*;

  int checks = 0, failures = 0;
  state_t     r;
  logic [2:0] dx, dy;
  lane_t      lane;

  pi_router dut (.r_i(r), .dx_i(dx), .dy_i(dy), .lane_o(lane));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 10; it++) begin
      for (int x = 0; x < 5; x++)
        for (int y = 0; y < 5; y++) r[x][y] = {$urandom, $urandom};
      for (int x = 0; x < 5; x++)
        for (int y = 0; y < 5; y++) begin
          dx = 3'(y);
          dy = 3'((2 * x + 3 * y) % 5);
          #1;
          checks++;
          if (lane !== r[x][y]) begin
            failures++;
            if (failures < 10) $display("mismatch src (%0d,%0d)", x, y);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
