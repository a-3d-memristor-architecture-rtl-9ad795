// tb_sha3_rates: the accelerator at the other block sizes of the
// description: 576-bit blocks (9 lanes, the SHA3-512 rate, 2-plane mapping
// of 6 cycles) and 320-bit blocks (5 lanes, one plane, 3 cycles). For the
// 576-bit instance the empty message is hashed and compared with the
// published SHA3-512 digest of ""; both instances then absorb a random
// two-block message checked against the reference model. Latencies checked:
// 2 + 3 * planes + 24 * 263 for a first block, 2 less for a chained one.
module tb_sha3_rates;
  import sha3_pkg::*;
  import keccak_ref_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic start9 = 0, first9 = 0, start5 = 0, first5 = 0;
  logic [9*64-1:0] blk9;
  logic [5*64-1:0] blk5;
  logic busy9, done9, busy5, done5;
  logic [1599:0] st9, st5;

  sha3_accel #(.RATE_LANES(9)) dut9 (.clk, .rst_n, .start_i(start9), .first_i(first9),
    .block_i(blk9), .busy_o(busy9), .done_o(done9), .state_o(st9));
  sha3_accel #(.RATE_LANES(5)) dut5 (.clk, .rst_n, .start_i(start5), .first_i(first5),
    .block_i(blk5), .busy_o(busy5), .done_o(done5), .state_o(st5));

  always #5 clk = ~clk;

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_eq(int got, int exp, string what);
    checks++;
    if (got != exp) begin
      failures++;
      $display("%s: got %0d expected %0d", what, got, exp);
    end
  endtask

  function automatic kstate_t to_k(logic [1599:0] v);
    kstate_t k;
    for (int i = 0; i < 25; i++) k[i] = v[64*i +: 64];
    return k;
  endfunction

  task automatic run9(logic [9*64-1:0] b, bit with_init);
    int cycles = 0;
    blk9 = b;
    @(negedge clk); start9 = 1; first9 = with_init;
    @(negedge clk); start9 = 0; first9 = 0;
    while (busy9 && cycles < 10000) begin cycles++; @(negedge clk); end
    expect_eq(done9, 1, "576-bit done");
    expect_eq(cycles, (with_init ? 2 : 0) + 6 + 24 * 263, "576-bit latency");
  endtask

  task automatic run5(logic [5*64-1:0] b, bit with_init);
    int cycles = 0;
    blk5 = b;
    @(negedge clk); start5 = 1; first5 = with_init;
    @(negedge clk); start5 = 0; first5 = 0;
    while (busy5 && cycles < 10000) begin cycles++; @(negedge clk); end
    expect_eq(done5, 1, "320-bit done");
    expect_eq(cycles, (with_init ? 2 : 0) + 3 + 24 * 263, "320-bit latency");
  endtask

  initial begin
    logic [511:0] exp512;
    logic [9*64-1:0] b9;
    logic [5*64-1:0] b5;
    kstate_t ref9, ref5, k;
    blk9 = '0; blk5 = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;

    b9 = '0;
    b9[7:0] = 8'h06;
    b9[9*64-1 -: 8] = 8'h80;
    run9(b9, 1'b1);
    exp512 = 512'ha69f73cca23a9ac5c8b567dc185a756e97c982164fe25859e0d1dcc1475c80a6_15b2123af1f5f94c11e3e9402c3ac558f500199d95b6d3e301758586281dcd26;
    for (int i = 0; i < 64; i++) begin
      checks++;
      if (st9[8*i +: 8] !== exp512[511 - 8*i -: 8]) begin
        failures++;
        $display("SHA3-512 byte %0d: %h expected %h", i, st9[8*i +: 8], exp512[511 - 8*i -: 8]);
      end
    end

    ref9 = '0; ref5 = '0;
    for (int n = 0; n < 2; n++) begin
      for (int i = 0; i < 18; i++) b9[32*i +: 32] = $urandom;
      for (int i = 0; i < 10; i++) b5[32*i +: 32] = $urandom;
      k = '0; for (int i = 0; i < 9; i++) k[i] = b9[64*i +: 64];
      ref9 = absorb(ref9, k, 9);
      k = '0; for (int i = 0; i < 5; i++) k[i] = b5[64*i +: 64];
      ref5 = absorb(ref5, k, 5);
      fork
        run9(b9, n == 0);
        run5(b5, n == 0);
      join
      checks++;
      if (to_k(st9) !== ref9) begin failures++; $display("576-bit state differs, block %0d", n); end
      checks++;
      if (to_k(st5) !== ref5) begin failures++; $display("320-bit state differs, block %0d", n); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
