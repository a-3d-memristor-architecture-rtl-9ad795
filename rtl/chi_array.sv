// chi_array: the Chi crossbar array with its 2-input volistor XNOR gates, five
// gates per slice row (one per lane x of a plane), 320 in all. It computes
// Chi one plane at a time, and the same gates do the two other XORs of the
// design: absorbing a message block into the state (X_i ^ r) and Iota.
//
// Chi: each horizontal wire of the array is a diode wired-OR gate fed with
// the negated inputs, so it yields ~A[x+1, y] & A[x+2, y]; its XNOR gate
// combines that with A[x, y]. One wire, and so one lane x, is evaluated per
// cycle (ax_i with ax_x_i), giving G[x] = A[x,y] ^ (~A[x+1,y] & A[x+2,y]).
// The complemented input comes from the complement array NA, which holds
// ~A when Chi runs, so na_pl_i[x+1] is used directly as ~A[x+1, y].
// XOR with an external vector: xin_i enables, per lane x, G[x] = A[x,y] ^
// vin_i[x]. The message block X_i arrives this way on the horizontal wires,
// and the Iota constant on the wire of lane 0.
// ginit_i programs the selected gates to LRS (all ones) before use.
//
// Interface: a_pl_i / na_pl_i are the plane of A / NA selected by the column
// drivers; g_o holds the gate results until they are stored back. Writes at
// the rising edge; reset clears the gates (own choice). ax_i and xin_i must
// not coincide (assertion).
module chi_array
  import sha3_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  plane_t     a_pl_i,
  input  plane_t     na_pl_i,
  input  logic [4:0] ginit_i,   // per lane x: gate -> LRS
  input  logic       ax_i,      // evaluate AND-XOR wire of lane ax_x_i
  input  logic [2:0] ax_x_i,
  input  logic [4:0] xin_i,     // per lane x: G[x] <= A[x] ^ vin_i[x]
  input  plane_t     vin_i,
  output plane_t     g_o
);

  plane_t g_q;

  function automatic lane_t and_xor(plane_t a, plane_t na, int unsigned x);
    return a[x] ^ (na[(x + 1) % 5] & a[(x + 2) % 5]);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      g_q <= '0;
    end else begin
      for (int unsigned x = 0; x < 5; x++) begin
        if (ginit_i[x])                g_q[x] <= '1;
        else if (ax_i && ax_x_i == 3'(x))  g_q[x] <= and_xor(a_pl_i, na_pl_i, x);
        else if (xin_i[x])             g_q[x] <= a_pl_i[x] ^ vin_i[x];
      end
    end
  end

  assign g_o = g_q;

  ax_idx:  assert property (@(posedge clk) disable iff (!rst_n) ax_i |-> ax_x_i < 3'd5);
  ax_excl: assert property (@(posedge clk) disable iff (!rst_n) !(ax_i && (|xin_i)));

endmodule
