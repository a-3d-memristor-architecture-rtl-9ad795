// sha3_pkg: shared types, constants and helper functions of the crossbar SHA3
// accelerator.
//
// The Keccak state is kept as a 5x5 array of 64-bit lanes, indexed [x][y] with
// x the sheet (column) and y the plane (row), as in the SHA3 standard. The same
// layout is used for the state array A, its complement array NA and the Rho
// array R, so lanes move between them without renaming.
//
// What follows the paper: the lane width and round count, the Rho offsets of
// the 5x5 offset table, the round constants, and the number of clock cycles
// of every step of one round (175 Theta, 1 Rho-array initialisation, 5 Rho,
// 2 state initialisation, 25 Pi, 5 complement, 45 Chi, 5 Iota = 263), of the
// 2-cycle initialisation and of the 3-cycle-per-plane message mapping.
// Own choices: the round constants are computed here with the standard's
// 8-bit LFSR instead of being typed in as a table, and the micro-operation
// encoding (op_e, ctrl_t) that the sequencer hands to the arrays each cycle.
package sha3_pkg;

  localparam int unsigned W  = 64;   // lane width (bits per lane, slices)
  localparam int unsigned NR = 24;   // rounds of Keccak-f[1600]

  typedef logic [W-1:0]  lane_t;
  typedef lane_t [4:0]   plane_t;       // plane_t[x]: lanes of one plane y
  typedef lane_t [4:0]   sheet_t;       // sheet_t[y]: lanes of one sheet x
  typedef sheet_t [4:0]  state_t;       // state_t[x][y]

  // Cycle counts of one round (Fig. 11 of the description this RTL follows).
  localparam int unsigned CYC_INIT   = 2;
  localparam int unsigned CYC_MAP_PL = 3;    // per plane of message block
  localparam int unsigned CYC_THETA  = 175;  // 5 sheets x 35
  localparam int unsigned CYC_THETA_X= 35;   // 1 rot1 + 19 accumulate + 15 lanes
  localparam int unsigned CYC_RINIT  = 1;
  localparam int unsigned CYC_RHO    = 5;
  localparam int unsigned CYC_SINIT  = 2;
  localparam int unsigned CYC_PI     = 25;
  localparam int unsigned CYC_CPL    = 5;
  localparam int unsigned CYC_CHI    = 45;   // 5 planes x 9
  localparam int unsigned CYC_CHI_Y  = 9;
  localparam int unsigned CYC_IOTA   = 5;
  localparam int unsigned CYC_ROUND  = CYC_THETA + CYC_RINIT + CYC_RHO + CYC_SINIT +
                                       CYC_PI + CYC_CPL + CYC_CHI + CYC_IOTA;  // 263

  // Micro-operations issued by the sequencer, one per clock cycle.
  typedef enum logic [4:0] {
    OP_NOP,
    OP_INIT_HRS,    // all arrays to HRS (logic 0)
    OP_INIT_LRS,    // complement array NA to LRS (logic 1): NA = ~A with A = 0
    OP_MAP_XOR,     // Chi-array gates  G[x] = A[x,y] ^ X_i[x,y]   (plane y)
    OP_MAP_PINIT,   // plane y of A to LRS
    OP_MAP_STORE,   // plane y of A <= G
    OP_TH_ROT1,     // R[x] <= rot(A[x],1) through the MUXs (6th input)
    OP_TH_LOAD,     // Theta XOR gates X <= operand k=0
    OP_TH_PREP,     // Theta XOR gates: re-arm for the next operand
    OP_TH_ACC,      // Theta XOR gates X <= X ^ operand k
    OP_TH_TINIT,    // lane result gate T to LRS
    OP_TH_TXOR,     // T <= X ^ A[x,y]
    OP_TH_TSTORE,   // NA[x,y] <= T
    OP_R_INIT,      // Rho array to HRS
    OP_RHO,         // R[x] <= rho(NA[x]) through the MUXs (select x)
    OP_S_HRS,       // A and NA to HRS
    OP_S_LRS,       // A and NA to LRS
    OP_PI,          // NA[x,y] <= ~R[pi source of (x,y)]
    OP_CPL,         // plane y of A <= ~plane y of NA
    OP_CHI_GINIT,   // Chi-array gates to LRS
    OP_CHI_AX,      // G[x] <= A[x,y] ^ (NA[x+1,y] & A[x+2,y])
    OP_CHI_PHRS,    // plane y of A to HRS
    OP_CHI_PLRS,    // plane y of A to LRS
    OP_CHI_STORE,   // plane y of A <= G
    OP_IO_GINIT,    // Chi-array gate of lane x=0 to LRS
    OP_IO_XOR,      // G[0] <= A[0,0] ^ RC[round]
    OP_IO_HRS,      // A[0,0] to HRS
    OP_IO_LRS,      // A[0,0] to LRS
    OP_IO_STORE     // A[0,0] <= G[0]
  } op_e;

  typedef struct packed {
    op_e        op;
    logic [2:0] x;      // sheet index
    logic [2:0] y;      // plane index
    logic [3:0] k;      // operand index of the 10-input Theta XOR
    logic [4:0] round;  // round index 0..23
  } ctrl_t;

  // Rho offsets r[x][y] (TABLE 1).
  function automatic int unsigned rho_off(int unsigned x, int unsigned y);
    int unsigned t [5][5];
    t = '{'{ 0, 36,  3, 41, 18},    // x = 0, y = 0..4
          '{ 1, 44, 10, 45,  2},    // x = 1
          '{62,  6, 43, 15, 61},    // x = 2
          '{28, 55, 25, 21, 56},    // x = 3
          '{27, 20, 39,  8, 14}};   // x = 4
    return t[x][y];
  endfunction

  // Left circular rotation of a lane by n bits (bit z moves to z+n).
  function automatic lane_t rotl(lane_t v, int unsigned n);
    lane_t r;
    for (int unsigned z = 0; z < W; z++) r[(z + n) % W] = v[z];
    return r;
  endfunction

  function automatic int unsigned mod5(int v);
    return unsigned'((v % 5 + 5) % 5);
  endfunction

  // Round constant bit rc(t) of the SHA3 standard (8-bit LFSR,
  // x^8 + x^6 + x^5 + x^4 + 1).
  function automatic logic rc_bit(int unsigned t);
    logic [7:0] r;
    logic [8:0] s;
    r = 8'h01;
    for (int unsigned i = 0; i < t % 255; i++) begin
      s = {r, 1'b0};
      s[0] = s[0] ^ s[8];
      s[4] = s[4] ^ s[8];
      s[5] = s[5] ^ s[8];
      s[6] = s[6] ^ s[8];
      r = s[7:0];
    end
    return r[0];
  endfunction

  // 64-bit round constant RC of round ir (0-based): bit 2^j-1 is rc(j+7*ir).
  function automatic lane_t round_const(int unsigned ir);
    lane_t c;
    c = '0;
    for (int unsigned j = 0; j < 7; j++) c[(1 << j) - 1] = rc_bit(j + 7 * ir);
    return c;
  endfunction

endpackage
