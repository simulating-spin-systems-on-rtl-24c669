// potts_update_cell: Metropolis update cell of the four-state glassy Potts
// model, H = - sum_<ij> delta(s_i, pi_ij(s_j)).
//
// Spins are 2-bit values 0..3. Each bond carries an 8-bit coupling holding a
// permutation pi of (0,1,2,3): pi(v) = perm[2v+1:2v]. The bond to the +d
// neighbour is stored at the site itself and is satisfied when
// s_i == pi(s_j); the bond to the -d neighbour is stored at that neighbour and
// is satisfied when s_j == pi(s_i). Neighbours come in the order +x, -x, +y,
// -y, +z, -z. The random word supplies the proposal s' = s ^ rnd[RW-1:RW-2]
// (a move to one of the three other values, or no move) and the remaining
// RW-2 bits, scaled by 4, are compared with the LUT word. The cell computes
// dE = (satisfied bonds of s) - (satisfied bonds of s'), presents
// lut_idx = dE + 6 (0..12) and takes s' when rnd' < lut_val; the LUT holds
// min(1, exp(-beta dE)) * 2^RW. Purely combinational.
//
// From the paper: 2-bit spins, 8-bit couplings, the Hamiltonian, an energy
// index of 0..15 into a LUT compared with a random number. Design choice: the
// permutation encoding, the Metropolis proposal and the split of the random
// word between proposal and acceptance (the paper gives no insides of this cell).
module potts_update_cell #(
  parameter int unsigned RW = spin_pkg::RW_DEF
) (
  input  logic [1:0]        s_old,
  input  logic [5:0][1:0]   nb,
  input  logic [5:0][7:0]   perm,
  output logic [3:0]        lut_idx,
  input  logic [RW-1:0]     lut_val,
  input  logic [RW-1:0]     rnd,
  output logic              accept,
  output logic [1:0]        s_new
);

  function automatic logic [1:0] apply(input logic [7:0] p, input logic [1:0] v);
    return p[2*v +: 2];
  endfunction

  // number of satisfied bonds if the site held value v
  function automatic logic [2:0] n_sat(input logic [1:0] v, input logic [5:0][1:0] n,
                                       input logic [5:0][7:0] p);
    logic [2:0] c = '0;
    for (int j = 0; j < 6; j++)
      if (j % 2 == 0) c += {2'b0, v == apply(p[j], n[j])};
      else            c += {2'b0, n[j] == apply(p[j], v)};
    return c;
  endfunction

  logic [1:0] s_prop;
  logic [RW-1:0] r_acc;

  always_comb begin
    s_prop  = s_old ^ rnd[RW-1 -: 2];
    r_acc   = {rnd[RW-3:0], 2'b00};
    lut_idx = 4'd6 + 4'(n_sat(s_old, nb, perm)) - 4'(n_sat(s_prop, nb, perm));
    accept  = r_acc < lut_val;
    s_new   = accept ? s_prop : s_old;
  end

endmodule
