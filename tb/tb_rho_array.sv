// tb_rho_array: random sheet writes and clears of the Rho array, checked
// against a shadow copy after every clock edge.
module tb_rho_array;
  import sha3_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic clr, we;
  logic [2:0] sx;
  sheet_t d;
  state_t r, er;

  rho_array dut (.clk, .rst_n, .clr_i(clr), .sh_we_i(we), .sh_x_i(sx), .sh_d_i(d), .r_o(r));

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    clr = 0; we = 0; sx = 0; d = '0; er = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 600; it++) begin
      @(negedge clk);
      checks++;
      if (r !== er) begin
        failures++;
        if (failures < 10) $display("mismatch at %0d", it);
      end
      clr = ($urandom_range(0, 15) == 0);
      we  = ($urandom_range(0, 3) != 0) && !clr;
      sx  = 3'($urandom_range(0, 4));
      for (int y = 0; y < 5; y++) d[y] = {$urandom, $urandom};
      if (clr) er = '0;
      if (we) er[sx] = d;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
