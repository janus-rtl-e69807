// tb_ising_update_cell: drives the cell with random spins, couplings and
// random numbers in both algorithms and compares the table index and the new
// spin with the energy computed in +-1 arithmetic.
module tb_ising_update_cell;
  import janus_pkg::*;
  alg_e alg;
  logic s, s_new;
  logic [5:0] nb, j;
  logic [31:0] rnd, lut_val;
  logic [2:0] lut_idx;
  logic [31:0] tab [8];
  int checks = 0, failures = 0;

  ising_update_cell dut (.*);
  assign lut_val = tab[lut_idx];

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 8; i++) tab[i] = $urandom;
    for (int n = 0; n < 4000; n++) begin
      automatic int si, h, de, idx_ref;
      automatic logic exp_s;
      alg = alg_e'(n % 2);
      s = 1'($urandom); nb = 6'($urandom); j = 6'($urandom); rnd = $urandom;
      #1;
      si = s ? 1 : -1;
      h = 0;
      for (int k = 0; k < 6; k++) h += (j[k] ? 1 : -1) * (nb[k] ? 1 : -1);
      if (alg == ALG_METROPOLIS) begin
        de = 2 * si * h;              // E(-s) - E(s), E(s) = -s*h
        idx_ref = (de + 12) / 4;      // dE = 4m - 12
        exp_s = (rnd < tab[idx_ref]) ? ~s : s;
      end else begin
        idx_ref = (h + 6) / 2;        // h = 2k - 6
        exp_s = (rnd < tab[idx_ref]);
      end
      checks += 2;
      if (lut_idx !== 3'(idx_ref)) failures++;
      if (s_new !== exp_s) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
