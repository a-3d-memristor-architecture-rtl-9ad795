// tb_keccak_ctrl: runs the sequencer for a first block (with initialisation)
// and a following block, and checks: the latency in cycles (6326 and 6324 for
// 17-lane blocks), the number of times each micro-operation is issued, that
// the steps of every round come in the order Theta, Rho-array init, Rho,
// state init, Pi, complement, Chi, Iota, the sheet order of Rho, the wire
// order of Chi, and the round index used by Iota.
module tb_keccak_ctrl;
  import sha3_pkg::*;

  int checks = 0, failures = 0;
  logic  clk = 0, rst_n = 0, start = 0, first = 0;
  ctrl_t ctrl;
  logic  busy, done;

  keccak_ctrl dut (.clk, .rst_n, .start_i(start), .first_i(first), .ctrl_o(ctrl),
                   .busy_o(busy), .done_o(done));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
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

  // Step number of each operation inside a round (Fig.-11 numbering).
  function automatic int step_of(op_e op);
    case (op)
      OP_TH_ROT1, OP_TH_LOAD, OP_TH_PREP, OP_TH_ACC,
      OP_TH_TINIT, OP_TH_TXOR, OP_TH_TSTORE:          return 5;
      OP_R_INIT:                                       return 6;
      OP_RHO:                                          return 7;
      OP_S_HRS, OP_S_LRS:                              return 8;
      OP_PI:                                           return 9;
      OP_CPL:                                          return 10;
      OP_CHI_GINIT, OP_CHI_AX, OP_CHI_PHRS,
      OP_CHI_PLRS, OP_CHI_STORE:                       return 11;
      OP_IO_GINIT, OP_IO_XOR, OP_IO_HRS,
      OP_IO_LRS, OP_IO_STORE:                          return 12;
      default:                                         return 0;
    endcase
  endfunction

  task automatic run_block(bit with_init, int exp_cycles);
    int cnt [32];
    int cycles, last_step, rho_next, ax_idx, io_round, pi_seen;
    int ax_order [5] = '{3, 4, 0, 1, 2};
    foreach (cnt[i]) cnt[i] = 0;
    cycles = 0; last_step = 0; rho_next = 0; ax_idx = 0; io_round = 0; pi_seen = 0;
    @(negedge clk); start = 1; first = with_init;
    @(negedge clk); start = 0; first = 0;
    while (busy) begin
      int st;
      cycles++;
      cnt[int'(ctrl.op)]++;
      st = step_of(ctrl.op);
      if (st != 0) begin
        if (st < last_step && !(st == 5 && last_step == 12)) begin
          failures++;
          $display("step %0d after step %0d", st, last_step);
        end
        last_step = st;
      end
      if (ctrl.op == OP_RHO) begin
        expect_eq(ctrl.x, rho_next, "rho sheet order");
        rho_next = (rho_next + 1) % 5;
      end
      if (ctrl.op == OP_CHI_AX) begin
        expect_eq(ctrl.x, ax_order[ax_idx], "chi wire order");
        ax_idx = (ax_idx + 1) % 5;
      end
      if (ctrl.op == OP_IO_XOR) begin
        expect_eq(ctrl.round, io_round, "iota round");
        io_round++;
      end
      if (ctrl.op == OP_PI) pi_seen += (1 << (int'(ctrl.x) + 5 * int'(ctrl.y))) != 0;
      @(negedge clk);
      if (cycles > 7000) break;
    end
    expect_eq(done, 1, "done pulse");
    expect_eq(cycles, exp_cycles, "latency");
    expect_eq(cnt[OP_INIT_HRS], with_init, "INIT_HRS");
    expect_eq(cnt[OP_INIT_LRS], with_init, "INIT_LRS");
    expect_eq(cnt[OP_MAP_XOR], 4, "MAP_XOR");
    expect_eq(cnt[OP_MAP_PINIT], 4, "MAP_PINIT");
    expect_eq(cnt[OP_MAP_STORE], 4, "MAP_STORE");
    expect_eq(cnt[OP_TH_ROT1], 120, "TH_ROT1");
    expect_eq(cnt[OP_TH_LOAD], 120, "TH_LOAD");
    expect_eq(cnt[OP_TH_PREP], 1080, "TH_PREP");
    expect_eq(cnt[OP_TH_ACC], 1080, "TH_ACC");
    expect_eq(cnt[OP_TH_TINIT], 600, "TH_TINIT");
    expect_eq(cnt[OP_TH_TXOR], 600, "TH_TXOR");
    expect_eq(cnt[OP_TH_TSTORE], 600, "TH_TSTORE");
    expect_eq(cnt[OP_R_INIT], 24, "R_INIT");
    expect_eq(cnt[OP_RHO], 120, "RHO");
    expect_eq(cnt[OP_S_HRS], 24, "S_HRS");
    expect_eq(cnt[OP_S_LRS], 24, "S_LRS");
    expect_eq(cnt[OP_PI], 600, "PI");
    expect_eq(pi_seen, 600, "PI lanes");
    expect_eq(cnt[OP_CPL], 120, "CPL");
    expect_eq(cnt[OP_CHI_GINIT], 120, "CHI_GINIT");
    expect_eq(cnt[OP_CHI_AX], 600, "CHI_AX");
    expect_eq(cnt[OP_CHI_PHRS], 120, "CHI_PHRS");
    expect_eq(cnt[OP_CHI_PLRS], 120, "CHI_PLRS");
    expect_eq(cnt[OP_CHI_STORE], 120, "CHI_STORE");
    expect_eq(cnt[OP_IO_GINIT], 24, "IO_GINIT");
    expect_eq(cnt[OP_IO_XOR], 24, "IO_XOR");
    expect_eq(cnt[OP_IO_STORE], 24, "IO_STORE");
    expect_eq(cnt[OP_NOP], 0, "NOP while busy");
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    expect_eq(busy, 0, "idle after reset");
    expect_eq(int'(ctrl.op), int'(OP_NOP), "NOP when idle");
    run_block(1'b1, 2 + 12 + 24 * 263);
    run_block(1'b0, 12 + 24 * 263);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
