// keccak_ctrl: the sequencer that plays the control words of the CMOS drivers,
// one micro-operation per clock cycle, in the order and with the cycle counts
// of the step list of the accelerator:
//
//   0  initialise state and Rho arrays                  2 cycles (first block)
//   3  map message block X_i into A (X_i ^ r)          3 cycles per plane
//      per round j = 0..23:
//   5  Theta, output into NA                          175 (5 sheets x 35)
//   6  initialise Rho array                             1
//   7  Rho, NA -> R through the multiplexers            5 (one sheet each)
//   8  initialise A and NA                              2
//   9  Pi, R -> NA (complemented)                      25 (one lane each)
//  10  complement NA into A                             5 (one plane each)
//  11  Chi, planes of A                                45 (5 planes x 9)
//  12  Iota on A[0,0]                                   5
//
// One round is 263 cycles; a first block of r = 1088 bits (17 lanes, 4
// planes) takes 2 + 12 + 24 x 263 = 6326 cycles.
// In the accelerator these control bits come from an external memory; here a
// counter-based state machine produces the same per-cycle sequence, which is
// this design's own choice. Each phase has a counter cnt_q and the fields of
// ctrl_o are decoded from it (sheet, plane, operand index).
//
// Interface: start_i (while idle) begins one block; first_i with it selects
// the initialisation of step 0 (start of a new message). busy_o is high from
// the cycle after start_i until the last Iota cycle; done_o pulses in the
// cycle after the last Iota cycle. ctrl_o is the micro-operation of the
// current cycle (OP_NOP when idle).
module keccak_ctrl
  import sha3_pkg::*;
#(
  parameter int unsigned RATE_LANES = 17    // lanes per message block (1088 bits)
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start_i,
  input  logic  first_i,
  output ctrl_t ctrl_o,
  output logic  busy_o,
  output logic  done_o
);

  localparam int unsigned NPL     = (RATE_LANES + 4) / 5;   // planes touched
  localparam int unsigned CYC_MAP = CYC_MAP_PL * NPL;

  // The per-step counts must add up to the per-loop counts they are decoded with.
  if (CYC_THETA != 5 * CYC_THETA_X || CYC_CHI != 5 * CYC_CHI_Y || CYC_ROUND != 263) begin : g_bad_counts
    $error("inconsistent cycle counts in sha3_pkg");
  end

  typedef enum logic [3:0] {
    PH_IDLE, PH_INIT, PH_MAP, PH_THETA, PH_RINIT, PH_RHO, PH_SINIT,
    PH_PI, PH_CPL, PH_CHI, PH_IOTA
  } phase_e;

  phase_e     ph_q, ph_d;
  logic [7:0] cnt_q, cnt_d;
  logic [4:0] round_q, round_d;
  logic       done_q, done_d;

  function automatic logic [7:0] phase_len(phase_e p);
    case (p)
      PH_INIT:  return 8'(CYC_INIT);
      PH_MAP:   return 8'(CYC_MAP);
      PH_THETA: return 8'(CYC_THETA);
      PH_RINIT: return 8'(CYC_RINIT);
      PH_RHO:   return 8'(CYC_RHO);
      PH_SINIT: return 8'(CYC_SINIT);
      PH_PI:    return 8'(CYC_PI);
      PH_CPL:   return 8'(CYC_CPL);
      PH_CHI:   return 8'(CYC_CHI);
      PH_IOTA:  return 8'(CYC_IOTA);
      default:  return 8'd1;
    endcase
  endfunction

  // Phase and counter update.
  always_comb begin
    ph_d    = ph_q;
    cnt_d   = cnt_q + 8'd1;
    round_d = round_q;
    done_d  = 1'b0;
    if (ph_q == PH_IDLE) begin
      cnt_d = '0;
      if (start_i) begin
        ph_d    = first_i ? PH_INIT : PH_MAP;
        round_d = '0;
      end
    end else if (cnt_q == phase_len(ph_q) - 8'd1) begin
      cnt_d = '0;
      unique case (ph_q)
        PH_INIT:  ph_d = PH_MAP;
        PH_MAP:   ph_d = PH_THETA;
        PH_THETA: ph_d = PH_RINIT;
        PH_RINIT: ph_d = PH_RHO;
        PH_RHO:   ph_d = PH_SINIT;
        PH_SINIT: ph_d = PH_PI;
        PH_PI:    ph_d = PH_CPL;
        PH_CPL:   ph_d = PH_CHI;
        PH_CHI:   ph_d = PH_IOTA;
        PH_IOTA: begin
          if (round_q == 5'(NR - 1)) begin
            ph_d   = PH_IDLE;
            done_d = 1'b1;
          end else begin
            ph_d    = PH_THETA;
            round_d = round_q + 5'd1;
          end
        end
        default:  ph_d = PH_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ph_q    <= PH_IDLE;
      cnt_q   <= '0;
      round_q <= '0;
      done_q  <= 1'b0;
    end else begin
      ph_q    <= ph_d;
      cnt_q   <= cnt_d;
      round_q <= round_d;
      done_q  <= done_d;
    end
  end

  // Decode of the micro-operation of the current cycle.
  logic [2:0] x_chi [5];
  assign x_chi = '{3'd3, 3'd4, 3'd0, 3'd1, 3'd2};   // wire order of the Chi array

  always_comb begin
    logic [7:0] s, t, j;
    logic [2:0] xi;
    ctrl_o       = '0;
    ctrl_o.op    = OP_NOP;
    ctrl_o.round = round_q;
    s = '0; t = '0; j = '0; xi = '0;
    unique case (ph_q)
      PH_INIT: ctrl_o.op = (cnt_q == 8'd0) ? OP_INIT_HRS : OP_INIT_LRS;
      PH_MAP: begin
        ctrl_o.y = 3'(cnt_q / 8'(CYC_MAP_PL));
        unique case (cnt_q % 8'(CYC_MAP_PL))
          8'd0:    ctrl_o.op = OP_MAP_XOR;
          8'd1:    ctrl_o.op = OP_MAP_PINIT;
          default: ctrl_o.op = OP_MAP_STORE;
        endcase
      end
      PH_THETA: begin
        xi = 3'(cnt_q / 8'(CYC_THETA_X));
        s  = cnt_q % 8'(CYC_THETA_X);
        ctrl_o.x = xi;
        if (s == 8'd0) begin
          ctrl_o.op = OP_TH_ROT1;
          ctrl_o.x  = (xi == 3'd4) ? 3'd0 : xi + 3'd1;
        end else if (s < 8'd20) begin
          j = s - 8'd1;                       // 0..18
          ctrl_o.k = 4'((j + 8'd1) / 8'd2);   // operand 0..9
          if (j == 8'd0)     ctrl_o.op = OP_TH_LOAD;
          else if (j[0])     ctrl_o.op = OP_TH_PREP;
          else               ctrl_o.op = OP_TH_ACC;
        end else begin
          t = s - 8'd20;                      // 0..14
          ctrl_o.y = 3'(t / 8'd3);
          unique case (t % 8'd3)
            8'd0:    ctrl_o.op = OP_TH_TINIT;
            8'd1:    ctrl_o.op = OP_TH_TXOR;
            default: ctrl_o.op = OP_TH_TSTORE;
          endcase
        end
      end
      PH_RINIT: ctrl_o.op = OP_R_INIT;
      PH_RHO: begin
        ctrl_o.op = OP_RHO;
        ctrl_o.x  = 3'(cnt_q);
      end
      PH_SINIT: ctrl_o.op = (cnt_q == 8'd0) ? OP_S_HRS : OP_S_LRS;
      PH_PI: begin
        ctrl_o.op = OP_PI;
        ctrl_o.x  = 3'(cnt_q % 8'd5);
        ctrl_o.y  = 3'(cnt_q / 8'd5);
      end
      PH_CPL: begin
        ctrl_o.op = OP_CPL;
        ctrl_o.y  = 3'(cnt_q);
      end
      PH_CHI: begin
        ctrl_o.y = 3'(cnt_q / 8'(CYC_CHI_Y));
        s = cnt_q % 8'(CYC_CHI_Y);
        if (s == 8'd0)      ctrl_o.op = OP_CHI_GINIT;
        else if (s < 8'd6) begin
          ctrl_o.op = OP_CHI_AX;
          ctrl_o.x  = x_chi[3'(s - 8'd1)];
        end
        else if (s == 8'd6) ctrl_o.op = OP_CHI_PHRS;
        else if (s == 8'd7) ctrl_o.op = OP_CHI_PLRS;
        else                ctrl_o.op = OP_CHI_STORE;
      end
      PH_IOTA: begin
        unique case (cnt_q)
          8'd0:    ctrl_o.op = OP_IO_GINIT;
          8'd1:    ctrl_o.op = OP_IO_XOR;
          8'd2:    ctrl_o.op = OP_IO_HRS;
          8'd3:    ctrl_o.op = OP_IO_LRS;
          default: ctrl_o.op = OP_IO_STORE;
        endcase
      end
      default: ctrl_o.op = OP_NOP;
    endcase
  end

  assign busy_o = (ph_q != PH_IDLE);
  assign done_o = done_q;

  rate_ok: assert property (@(posedge clk) RATE_LANES >= 1 && RATE_LANES <= 25);
  no_start_busy: assert property (@(posedge clk) disable iff (!rst_n)
                                  start_i |-> !busy_o);

endmodule
