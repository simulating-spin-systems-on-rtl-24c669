// ising_update_cell: one update cell for Ising-like models (EA, RFIM, DAFF).
//
// Encoding: a bit value 1 stands for +1 and 0 for -1 (spins s, couplings J,
// field sign h); a dilution bit x is 1 for an occupied site. The six
// neighbours come in the order +x, -x, +y, -y, +z, -z with the coupling of the
// bond to each. The cell forms
//   e = sum_j J_ij x_j s_j                     (heat bath,  -6..6)
//   e = s_i * sum_j J_ij x_j s_j               (Metropolis, -6..6)
//   f = field_en & (h_i == +1)                 (heat bath)
//   f = field_en & (h_i * s_i == +1)           (Metropolis)
// and presents lut_idx = {f, e + 6}. The LUT word returned for that index is
// compared with the random number: Metropolis flips s_i when rnd < lut_val
// (the LUT holds min(1, exp(-beta*dE)) * 2^RW with dE = 2(e + f'|h|), f' = +-1);
// heat bath sets s_i = +1 when rnd < lut_val (the LUT holds
// 2^RW / (1 + exp(-2 beta (e + f'|h|)))). An empty site (x_i = 0) keeps its
// value. Purely combinational: index, LUT read and compare happen in the same
// clock as the rest of the update.
//
// From the paper: the inputs (couplings, neighbours, field, dilution, old spin
// for Metropolis), the energy used as a LUT pointer, the comparison with a
// random number, both algorithms. Design choice: the bit encoding, the index
// layout and the strict "<" comparison.
module ising_update_cell #(
  parameter int unsigned RW = spin_pkg::RW_DEF
) (
  input  spin_pkg::algo_e                algo,
  input  logic                           field_en,
  input  logic                           s_old,
  input  logic                           x_self,
  input  logic                           h_bit,
  input  logic [5:0]                     nb,
  input  logic [5:0]                     jc,
  input  logic [5:0]                     xn,
  output logic [spin_pkg::LUT_AW-1:0]    lut_idx,
  input  logic [RW-1:0]                  lut_val,
  input  logic [RW-1:0]                  rnd,
  output logic                           s_new
);
  import spin_pkg::*;

  logic [2:0] n_pos, n_neg;   // terms J*x*s equal to +1 / -1
  logic [3:0] e_off;          // e + 6, 0..12
  logic       f;
  logic       hit;

  always_comb begin
    n_pos = '0;
    n_neg = '0;
    for (int j = 0; j < 6; j++) begin
      n_pos += {2'b0, xn[j] & ~(jc[j] ^ nb[j])};
      n_neg += {2'b0, xn[j] &  (jc[j] ^ nb[j])};
    end
    if (algo == ALG_METROPOLIS && !s_old)
      e_off = 4'd6 + 4'(n_neg) - 4'(n_pos);
    else
      e_off = 4'd6 + 4'(n_pos) - 4'(n_neg);
    f = (algo == ALG_METROPOLIS) ? field_en & ~(h_bit ^ s_old) : field_en & h_bit;
    lut_idx = {f, e_off};
    hit = rnd < lut_val;
    if (!x_self)                     s_new = s_old;
    else if (algo == ALG_METROPOLIS) s_new = s_old ^ hit;
    else                             s_new = hit;
  end

endmodule
