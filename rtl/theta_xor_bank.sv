// theta_xor_bank: the 64 multi-input volistor XOR gates at the corner of the
// state-array slices (one per slice z), which compute the Theta column parity
// and then the Theta output lane by lane.
//
// Column parity: each gate folds ten operand bits into its running value X,
// one operand per step. The first operand is loaded in one cycle (load_i);
// every later operand needs two cycles, one to re-arm the gate's input
// memristors (arm_i) and one to XOR the operand into X (acc_i), so ten
// operands take 1 + 9 x 2 = 19 cycles, the count given for this step. The
// ten operands of sheet x are the five lanes A[x-1, y] and the five lanes
// R[x+1, y] = rot(A[x+1, y], 1); the caller routes them to opnd_i.
// Lane output: for each lane y a result gate T is initialised (tinit_i),
// loaded with X ^ A[x, y] (txor_i) and then copied into the state array by
// the caller, three cycles per lane.
//
// The gates are modelled as registers holding the memristor state. An
// accumulate without a preceding re-arm is a sequencing error and is flagged
// by an assertion. Reset clears X and T (own choice).
module theta_xor_bank
  import sha3_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  load_i,    // X <= opnd_i
  input  logic  arm_i,     // re-arm gate inputs for the next operand
  input  logic  acc_i,     // X <= X ^ opnd_i
  input  lane_t opnd_i,    // one operand bit per slice
  input  logic  tinit_i,   // T <= all ones (LRS)
  input  logic  txor_i,    // T <= X ^ lane_i
  input  lane_t lane_i,
  output lane_t x_o,       // column parity per slice
  output lane_t t_o        // lane result per slice
);

  lane_t x_q, t_q;
  logic  armed_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x_q     <= '0;
      t_q     <= '0;
      armed_q <= 1'b0;
    end else begin
      if (load_i)     x_q <= opnd_i;
      else if (acc_i) x_q <= x_q ^ opnd_i;
      if (arm_i)                armed_q <= 1'b1;
      else if (acc_i || load_i) armed_q <= 1'b0;
      if (tinit_i)     t_q <= '1;
      else if (txor_i) t_q <= x_q ^ lane_i;
    end
  end

  assign x_o = x_q;
  assign t_o = t_q;

  acc_needs_arm: assert property (@(posedge clk) disable iff (!rst_n) acc_i |-> armed_q);
  one_x_op:      assert property (@(posedge clk) disable iff (!rst_n)
                                  $onehot0({load_i, arm_i, acc_i}));

endmodule
