// tb_sha3_accel: end-to-end test of the accelerator at its default size
// (1088-bit blocks, the SHA3-256 rate). It hashes
//   1. the empty message (one padded block) and compares the first 256 bits
//      of the state with the published SHA3-256 digest of "";
//   2. a random three-block message, block by block, against the reference
//      Keccak model;
// and checks the latency of each block (6326 cycles with initialisation,
// 6324 without), that the state never shows on state_o while busy, and that
// every micro-operation of the sequence, the initialisation and the
// no-initialisation path were each exercised at least once.
module tb_sha3_accel;
  import sha3_pkg::*;
  import keccak_ref_pkg::*;

  localparam int RL = 17;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, start = 0, first = 0;
  logic [RL*64-1:0] blk;
  logic busy, done;
  logic [1599:0] st;
  int op_cnt [32];
  int masked_seen = 0, noinit_blocks = 0, init_blocks = 0;

  sha3_accel dut (.clk, .rst_n, .start_i(start), .first_i(first), .block_i(blk),
                  .busy_o(busy), .done_o(done), .state_o(st));

  always #5 clk = ~clk;

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && busy) begin
    op_cnt[int'(dut.ctrl.op)]++;
    if (st != '0) begin
      failures++;
      $display("state visible while busy");
    end else masked_seen++;
  end

  task automatic expect_eq(int got, int exp, string what);
    checks++;
    if (got != exp) begin
      failures++;
      $display("%s: got %0d expected %0d", what, got, exp);
    end
  endtask

  task automatic run_block(logic [RL*64-1:0] b, bit with_init);
    int cycles;
    blk = b;
    @(negedge clk); start = 1; first = with_init;
    @(negedge clk); start = 0; first = 0;
    cycles = 0;
    while (busy && cycles < 10000) begin
      cycles++;
      @(negedge clk);
    end
    expect_eq(done, 1, "done pulse");
    expect_eq(cycles, with_init ? 6326 : 6324, "block latency");
    if (with_init) init_blocks++; else noinit_blocks++;
  endtask

  function automatic kstate_t to_k(logic [1599:0] v);
    kstate_t k;
    for (int i = 0; i < 25; i++) k[i] = v[64*i +: 64];
    return k;
  endfunction

  initial begin
    logic [255:0] exp_digest;
    logic [RL*64-1:0] b;
    kstate_t ref_st, blk_k;
    foreach (op_cnt[i]) op_cnt[i] = 0;
    blk = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;

    // 1. SHA3-256("") : padding 0x06 ... 0x80 in a 136-byte block.
    b = '0;
    b[7:0] = 8'h06;
    b[RL*64-1 -: 8] = 8'h80;
    run_block(b, 1'b1);
    exp_digest = 256'ha7ffc6f8bf1ed76651c14756a061d662f580ff4de43b49fa82d80a4b80f8434a;
    for (int i = 0; i < 32; i++) begin
      checks++;
      if (st[8*i +: 8] !== exp_digest[255 - 8*i -: 8]) begin
        failures++;
        $display("digest byte %0d: %h expected %h", i, st[8*i +: 8], exp_digest[255 - 8*i -: 8]);
      end
    end

    // 2. random three-block message against the reference model.
    ref_st = '0;
    for (int n = 0; n < 3; n++) begin
      for (int i = 0; i < RL*2; i++) b[32*i +: 32] = $urandom;
      blk_k = '0;
      for (int i = 0; i < RL; i++) blk_k[i] = b[64*i +: 64];
      ref_st = absorb(ref_st, blk_k, RL);
      run_block(b, n == 0);
      checks++;
      if (to_k(st) !== ref_st) begin
        failures++;
        $display("state after block %0d differs from the reference", n);
      end
    end

    // Every mechanism must have happened.
    for (int o = int'(OP_INIT_HRS); o <= int'(OP_IO_STORE); o++) begin
      checks++;
      if (op_cnt[o] == 0) begin
        failures++;
        $display("operation %s never issued", op_e'(o));
      end
    end
    checks++; if (init_blocks == 0)   begin failures++; $display("no initialised block"); end
    checks++; if (noinit_blocks == 0) begin failures++; $display("no chained block"); end
    checks++; if (masked_seen == 0)   begin failures++; $display("output mask never seen"); end
    $display("blocks with init %0d, chained %0d, Theta rot1 %0d, Rho %0d, Pi %0d, Chi wires %0d, Iota %0d",
             init_blocks, noinit_blocks, op_cnt[OP_TH_ROT1], op_cnt[OP_RHO], op_cnt[OP_PI],
             op_cnt[OP_CHI_AX], op_cnt[OP_IO_XOR]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
