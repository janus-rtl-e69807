// potts_update_cell: Metropolis update logic for one site of the 3D
// disordered 4-state Potts model, E = -sum J_ij delta(s_i, s_j), J_ij = +-1.
//
// The cell gets the site's spin s (2 bits, values 0..3), its six neighbours,
// the six couplings (1 = +1, 0 = -1), a proposed new value s_try taken from
// random bits, and a 32-bit random number. Following the paper's three
// Metropolis steps it computes the integer energy change
//     dE = sum_k J_k * (delta(s, n_k) - delta(s_try, n_k)),   -6 <= dE <= 6,
// uses dE+6 (13 values, the paper's "not more than 13") as the pointer into
// the probability table, and accepts s_try when rnd < LUT[dE+6].
// Purely combinational.
module potts_update_cell (
  input  logic [1:0]      s,
  input  logic [5:0][1:0] nb,
  input  logic [5:0]      j,
  input  logic [1:0]      s_try,
  input  logic [31:0]     rnd,
  output logic [3:0]      lut_idx,
  input  logic [31:0]     lut_val,
  output logic [1:0]      s_new
);
  logic signed [4:0] de;

  always_comb begin
    de = '0;
    for (int k = 0; k < 6; k++) begin
      automatic logic signed [4:0] d = 5'(nb[k] == s) - 5'(nb[k] == s_try);
      de = j[k] ? de + d : de - d;
    end
    lut_idx = 4'(de + 5'sd6);
    s_new   = (rnd < lut_val) ? s_try : s;
  end
endmodule
