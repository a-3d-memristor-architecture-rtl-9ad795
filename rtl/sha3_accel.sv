// sha3_accel: the SHA3 (Keccak-f[1600]) in-memory accelerator built from
// crossbar arrays: the state array A with its complement array NA, the Rho
// array R, the CMOS multiplexer box between them, the Theta XOR gates, the
// Chi array with its XNOR gates, the Iota array of round constants and the
// Pi routing sheet, driven by a sequencer that issues one micro-operation per
// clock cycle.
//
// Operation: with start_i (and first_i for the first block of a message) the
// message block block_i, RATE_LANES lanes in the standard bit order (bit i of
// the block is bit i mod 64 of lane i/64, lane index x + 5y), is XORed into the
// state, plane by plane, through the Chi array, and the 24 rounds of
// Keccak-f follow, 263 cycles each. The first block of a message takes
// 2 + 3*ceil(RATE_LANES/5) + 24*263 cycles (6326 for 1088-bit blocks); each
// later block 2 cycles less. Padding and digest extraction are the host's job:
// the result is the content of A, read on state_o in the same bit order.
//
// Interface timing: block_i must stay stable from start_i until busy_o
// falls (it is sampled during the mapping cycles, as the message voltages are
// in the accelerator). done_o pulses for one cycle when the block is done.
// state_o reads zero while busy_o is high, so intermediate values never reach
// the pins; this masking is this design's reading of the claim that the
// accelerator hides intermediate values from its I/O.
//
// The datapath wiring below (which array feeds the multiplexers, which lanes
// are the Theta operands, which plane drives the Chi array) follows the
// figures of the architecture; the transmission gates and voltage drivers are
// folded into these selections.
module sha3_accel
  import sha3_pkg::*;
#(
  parameter int unsigned RATE_LANES = 17   // 1088-bit blocks (SHA3-256)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start_i,
  input  logic                    first_i,
  input  logic [RATE_LANES*W-1:0] block_i,
  output logic                    busy_o,
  output logic                    done_o,
  output logic [25*W-1:0]         state_o
);

  ctrl_t  ctrl;
  state_t a, na, r;
  sheet_t mux_out, rot1_sheet;
  state_t mux_src;
  lane_t  theta_opnd, theta_t, pi_lane, rc;
  plane_t a_pl, na_pl, chi_g, msg_pl, chi_vin;
  logic [2:0] mux_sel;
  op_e    op;

  assign op = ctrl.op;

  keccak_ctrl #(.RATE_LANES(RATE_LANES)) u_ctrl (
    .clk, .rst_n, .start_i, .first_i,
    .ctrl_o (ctrl),
    .busy_o,
    .done_o
  );

  // ---------------------------------------------------------------- arrays
  logic [4:0] a_pl_we;
  plane_t     a_pl_d;
  logic       na_ln_we;
  lane_t      na_ln_d;

  always_comb begin
    a_pl_we = '0;
    a_pl_d  = '0;
    unique case (op)
      OP_MAP_PINIT, OP_CHI_PLRS: begin a_pl_we = '1;       a_pl_d = '1;      end
      OP_MAP_STORE, OP_CHI_STORE:begin a_pl_we = '1;       a_pl_d = chi_g;   end
      OP_CPL:                    begin a_pl_we = '1;       a_pl_d = ~na_pl;  end
      OP_CHI_PHRS:               begin a_pl_we = '1;       a_pl_d = '0;      end
      OP_IO_HRS:                 begin a_pl_we = 5'b00001; a_pl_d = '0;      end
      OP_IO_LRS:                 begin a_pl_we = 5'b00001; a_pl_d = '1;      end
      OP_IO_STORE:               begin a_pl_we = 5'b00001; a_pl_d = chi_g;   end
      default: ;
    endcase
    na_ln_we = (op == OP_TH_TSTORE) || (op == OP_PI);
    na_ln_d  = (op == OP_PI) ? ~pi_lane : theta_t;
  end

  // Iota always works on plane 0.
  logic [2:0] pl_y;
  assign pl_y = (op inside {OP_IO_GINIT, OP_IO_XOR, OP_IO_HRS, OP_IO_LRS, OP_IO_STORE})
              ? 3'd0 : ctrl.y;

  state_array u_state (
    .clk, .rst_n,
    .a_clr_i    (op == OP_INIT_HRS || op == OP_S_HRS),
    .a_set_i    (op == OP_S_LRS),
    .na_clr_i   (op == OP_INIT_HRS || op == OP_S_HRS),
    .na_set_i   (op == OP_INIT_LRS || op == OP_S_LRS),
    .a_pl_we_i  (a_pl_we),
    .a_pl_y_i   (pl_y),
    .a_pl_d_i   (a_pl_d),
    .na_ln_we_i (na_ln_we),
    .na_ln_x_i  (ctrl.x),
    .na_ln_y_i  (ctrl.y),
    .na_ln_d_i  (na_ln_d),
    .a_o        (a),
    .na_o       (na)
  );

  // ------------------------------------------------ multiplexers and Rho array
  // Rho reads the Theta result held in NA; the 1-bit rotation of Theta reads A.
  assign mux_src    = (op == OP_RHO) ? na : a;
  assign rot1_sheet = a[ctrl.x];
  assign mux_sel    = (op == OP_TH_ROT1) ? 3'd5 : ctrl.x;

  rho_mux_bank u_mux (
    .src_i   (mux_src),
    .rot1_i  (rot1_sheet),
    .sel_i   (mux_sel),
    .sheet_o (mux_out)
  );

  rho_array u_rho (
    .clk, .rst_n,
    .clr_i   (op == OP_INIT_HRS || op == OP_R_INIT),
    .sh_we_i (op == OP_TH_ROT1 || op == OP_RHO),
    .sh_x_i  (ctrl.x),
    .sh_d_i  (mux_out),
    .r_o     (r)
  );

  // ------------------------------------------------------------ Theta gates
  // Operands 0..4: lanes A[x-1, k]; operands 5..9: lanes R[x+1, k-5].
  logic [2:0] xm1, xp1;
  assign xm1 = (ctrl.x == 3'd0) ? 3'd4 : ctrl.x - 3'd1;
  assign xp1 = (ctrl.x == 3'd4) ? 3'd0 : ctrl.x + 3'd1;

  always_comb begin
    if (ctrl.k < 4'd5) theta_opnd = a[xm1][ctrl.k[2:0]];
    else               theta_opnd = r[xp1][3'(ctrl.k - 4'd5)];
  end

  theta_xor_bank u_theta (
    .clk, .rst_n,
    .load_i  (op == OP_TH_LOAD),
    .arm_i   (op == OP_TH_PREP),
    .acc_i   (op == OP_TH_ACC),
    .opnd_i  (theta_opnd),
    .tinit_i (op == OP_TH_TINIT),
    .txor_i  (op == OP_TH_TXOR),
    .lane_i  (a[ctrl.x][ctrl.y]),
    .x_o     (),
    .t_o     (theta_t)
  );

  // ---------------------------------------------------------------- Pi
  pi_router u_pi (
    .r_i    (r),
    .dx_i   (ctrl.x),
    .dy_i   (ctrl.y),
    .lane_o (pi_lane)
  );

  // ------------------------------------------------ Chi array and Iota array
  always_comb begin
    for (int unsigned x = 0; x < 5; x++) begin
      a_pl[x]  = a[x][pl_y];
      na_pl[x] = na[x][pl_y];
      msg_pl[x] = '0;
      for (int unsigned y = 0; y < 5; y++)
        if (3'(y) == pl_y && x + 5 * y < RATE_LANES)
          msg_pl[x] = block_i[(x + 5 * y) * W +: W];
    end
  end

  iota_array u_iota (
    .round_i (ctrl.round),
    .rc_o    (rc)
  );

  always_comb begin
    chi_vin    = msg_pl;
    if (op == OP_IO_XOR) begin
      chi_vin    = '0;
      chi_vin[0] = rc;
    end
  end

  chi_array u_chi (
    .clk, .rst_n,
    .a_pl_i  (a_pl),
    .na_pl_i (na_pl),
    .ginit_i ((op == OP_CHI_GINIT) ? 5'b11111 : (op == OP_IO_GINIT) ? 5'b00001 : 5'b00000),
    .ax_i    (op == OP_CHI_AX),
    .ax_x_i  (ctrl.x),
    .xin_i   ((op == OP_MAP_XOR) ? 5'b11111 : (op == OP_IO_XOR) ? 5'b00001 : 5'b00000),
    .vin_i   (chi_vin),
    .g_o     (chi_g)
  );

  // ---------------------------------------------------------------- output
  always_comb begin
    state_o = '0;
    if (!busy_o)
      for (int unsigned x = 0; x < 5; x++)
        for (int unsigned y = 0; y < 5; y++)
          state_o[(x + 5 * y) * W +: W] = a[x][y];
  end

endmodule
