// tb_iota_array: reads all 24 round constants and compares them with the
// constants listed in the reference model; rounds 24..31 must read zero.
module tb_iota_array;
  import sha3_pkg::*;
  import keccak_ref_pkg::*;

  int checks = 0, failures = 0;
  logic [4:0] round;
  lane_t      rc;

  iota_array dut (.round_i(round), .rc_o(rc));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 32; i++) begin
      round = 5'(i);
      #1;
      checks++;
      if (rc !== ((i < 24) ? RC_LIST[i] : 64'd0)) begin
        failures++;
        $display("round %0d: %h", i, rc);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
