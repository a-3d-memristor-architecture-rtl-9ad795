// tb_chi_array: loads a random plane with its complement, evaluates the five
// AND-XOR wires in the array's order (x = 3, 4, 0, 1, 2) and checks the gate
// contents against Chi computed in the testbench; then checks the XOR-in
// path used for message mapping (all lanes) and for Iota (lane 0 only).
module tb_chi_array;
  import sha3_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  plane_t a, na, vin, g;
  logic [4:0] ginit, xin;
  logic ax;
  logic [2:0] axx;

  chi_array dut (.clk, .rst_n, .a_pl_i(a), .na_pl_i(na), .ginit_i(ginit), .ax_i(ax),
                 .ax_x_i(axx), .xin_i(xin), .vin_i(vin), .g_o(g));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(plane_t got, plane_t exp, string what);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("%s mismatch", what);
    end
  endtask

  initial begin
    plane_t exp;
    int order [5] = '{3, 4, 0, 1, 2};
    ginit = '0; xin = '0; ax = 0; axx = '0; a = '0; na = '0; vin = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 50; it++) begin
      for (int x = 0; x < 5; x++) begin a[x] = {$urandom, $urandom}; na[x] = ~a[x]; end
      for (int x = 0; x < 5; x++) exp[x] = a[x] ^ (~a[(x+1)%5] & a[(x+2)%5]);
      @(negedge clk); ginit = '1;
      @(negedge clk); ginit = '0;
      check(g, '1, "init");
      for (int i = 0; i < 5; i++) begin
        ax = 1; axx = 3'(order[i]);
        @(negedge clk);
      end
      ax = 0;
      check(g, exp, "chi");
      // message mapping: all five lanes
      for (int x = 0; x < 5; x++) vin[x] = {$urandom, $urandom};
      xin = '1;
      @(negedge clk); xin = '0;
      for (int x = 0; x < 5; x++) exp[x] = a[x] ^ vin[x];
      check(g, exp, "map");
      // iota: lane 0 only
      ginit = 5'b00001;
      @(negedge clk); ginit = '0;
      xin = 5'b00001;
      @(negedge clk); xin = '0;
      exp[0] = a[0] ^ vin[0];
      check(g, exp, "iota");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
