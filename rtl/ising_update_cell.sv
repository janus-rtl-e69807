// ising_update_cell: update logic for one site of a 3D Ising spin glass.
//
// Inputs are the site's spin, its six neighbours, the six couplings to them
// and a 32-bit random number. Bits code +1 as 1 and -1 as 0, so the product
// J*s_i*s_j of three +-1 values is +1 exactly when the xor of their bits is 1.
// The cell turns the local energy into a small integer that points into the
// probability table (prob_lut) and compares the table entry with the random
// number, as described in the paper:
//   Metropolis: idx = number of satisfied bonds m (0..6); flipping the spin
//               changes the energy by dE = 4m-12. The spin flips (the only
//               other value of an Ising spin is the proposed new value) when
//               rnd < LUT[m], LUT[m] = 2^32 * min(1, exp(-beta*dE)).
//   Heat bath:  idx = number of neighbours with J_ij*s_j = +1 (k = 0..6), the
//               local field is 2k-6 and the new spin is +1 when rnd < LUT[k]
//               (the 7-entry HBT table of the paper's listing).
// Purely combinational; the table is read through lut_idx / lut_val.
module ising_update_cell
  import janus_pkg::*;
(
  input  alg_e        alg,
  input  logic        s,
  input  logic [5:0]  nb,
  input  logic [5:0]  j,
  input  logic [31:0] rnd,
  output logic [2:0]  lut_idx,
  input  logic [31:0] lut_val,
  output logic        s_new
);
  logic [5:0] sat;   // bond satisfied: J*s*s_nb = +1
  logic [5:0] fld;   // neighbour contributes +1 to the local field
  logic [2:0] n_sat, n_fld;
  logic       hit;

  always_comb begin
    sat   = {6{s}} ^ nb ^ j;
    fld   = ~(nb ^ j);
    n_sat = '0;
    n_fld = '0;
    for (int i = 0; i < 6; i++) begin
      n_sat = n_sat + 3'(sat[i]);
      n_fld = n_fld + 3'(fld[i]);
    end
    lut_idx = (alg == ALG_METROPOLIS) ? n_sat : n_fld;
    hit     = rnd < lut_val;
    s_new   = (alg == ALG_METROPOLIS) ? (s ^ hit) : hit;
  end
endmodule
