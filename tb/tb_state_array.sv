// tb_state_array: random sequences of whole-array programming, plane writes
// into A and lane writes into NA, checked cycle by cycle against a shadow
// copy kept in the testbench.
module tb_state_array;
  import sha3_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic a_clr, a_set, na_clr, na_set, na_ln_we;
  logic [4:0] a_pl_we;
  logic [2:0] a_pl_y, na_ln_x, na_ln_y;
  plane_t a_pl_d;
  lane_t  na_ln_d;
  state_t a, na, ea, ena;

  state_array dut (
    .clk, .rst_n, .a_clr_i(a_clr), .a_set_i(a_set), .na_clr_i(na_clr), .na_set_i(na_set),
    .a_pl_we_i(a_pl_we), .a_pl_y_i(a_pl_y), .a_pl_d_i(a_pl_d),
    .na_ln_we_i(na_ln_we), .na_ln_x_i(na_ln_x), .na_ln_y_i(na_ln_y), .na_ln_d_i(na_ln_d),
    .a_o(a), .na_o(na));

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare();
    checks++;
    if (a !== ea || na !== ena) begin
      failures++;
      if (failures < 10) $display("mismatch at check %0d", checks);
    end
  endtask

  initial begin
    {a_clr, a_set, na_clr, na_set, na_ln_we} = '0;
    a_pl_we = '0; a_pl_y = '0; a_pl_d = '0; na_ln_x = '0; na_ln_y = '0; na_ln_d = '0;
    ea = '0; ena = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    compare();
    for (int it = 0; it < 1000; it++) begin
      int k;
      k = $urandom_range(0, 9);
      a_clr  = (k == 0);
      a_set  = (k == 1);
      na_clr = (k == 2);
      na_set = (k == 3);
      a_pl_we = (k >= 4 && k <= 6) ? 5'($urandom) : 5'd0;
      a_pl_y  = 3'($urandom_range(0, 4));
      for (int x = 0; x < 5; x++) a_pl_d[x] = {$urandom, $urandom};
      na_ln_we = (k >= 6);
      na_ln_x  = 3'($urandom_range(0, 4));
      na_ln_y  = 3'($urandom_range(0, 4));
      na_ln_d  = {$urandom, $urandom};
      // shadow model
      if (a_clr) ea = '0;
      if (a_set) ea = '1;
      for (int x = 0; x < 5; x++) if (a_pl_we[x]) ea[x][a_pl_y] = a_pl_d[x];
      if (na_clr) ena = '0;
      if (na_set) ena = '1;
      if (na_ln_we) ena[na_ln_x][na_ln_y] = na_ln_d;
      @(negedge clk);
      compare();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
