// tb_theta_xor_bank: runs the Theta gate sequence of one sheet (load, nine
// re-arm/accumulate pairs, then five init/XOR lane steps) with random
// operands and checks the column parity X and each lane result T against
// values computed in the testbench, including the 19-cycle count of the
// parity step.
module tb_theta_xor_bank;
  import sha3_pkg::*;

  int checks = 0, failures = 0;
  logic  clk = 0, rst_n = 0;
  logic  load, arm, acc, tinit, txor;
  lane_t opnd, lane, xo, to;

  theta_xor_bank dut (.clk, .rst_n, .load_i(load), .arm_i(arm), .acc_i(acc), .opnd_i(opnd),
                      .tinit_i(tinit), .txor_i(txor), .lane_i(lane), .x_o(xo), .t_o(to));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(lane_t got, lane_t exp, string what);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("%s mismatch: %h exp %h", what, got, exp);
    end
  endtask

  initial begin
    lane_t ops [10];
    lane_t par, l;
    int cyc;
    {load, arm, acc, tinit, txor} = '0;
    opnd = '0; lane = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 50; it++) begin
      par = '0;
      for (int k = 0; k < 10; k++) begin
        ops[k] = {$urandom, $urandom};
        par ^= ops[k];
      end
      cyc = 0;
      @(negedge clk); load = 1; opnd = ops[0]; cyc++;
      for (int k = 1; k < 10; k++) begin
        @(negedge clk); load = 0; arm = 1; acc = 0; opnd = '0; cyc++;
        @(negedge clk); arm = 0; acc = 1; opnd = ops[k]; cyc++;
      end
      @(negedge clk); acc = 0;
      check(xo, par, "parity");
      checks++;
      if (cyc != 19) begin failures++; $display("parity took %0d cycles", cyc); end
      for (int y = 0; y < 5; y++) begin
        l = {$urandom, $urandom};
        tinit = 1;
        @(negedge clk); tinit = 0;
        check(to, '1, "tinit");
        txor = 1; lane = l;
        @(negedge clk); txor = 0;
        check(to, par ^ l, "lane");
        check(xo, par, "parity kept");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
