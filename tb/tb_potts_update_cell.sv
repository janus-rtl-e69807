// tb_potts_update_cell: random spins, neighbours, couplings, proposals and
// random numbers; the table index must be dE+6 with dE computed from the
// Potts energy E = -sum J delta(s, n), and the new spin must follow the
// comparison of the random number with the table entry.
module tb_potts_update_cell;
  logic [1:0] s, s_try, s_new;
  logic [5:0][1:0] nb;
  logic [5:0] j;
  logic [31:0] rnd, lut_val;
  logic [3:0] lut_idx;
  logic [31:0] tab [16];
  int checks = 0, failures = 0;

  potts_update_cell dut (.*);
  assign lut_val = tab[lut_idx];

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 16; i++) tab[i] = $urandom;
    for (int n = 0; n < 4000; n++) begin
      automatic int e_old = 0, e_new = 0;
      s = 2'($urandom); s_try = 2'($urandom); nb = 12'($urandom); j = 6'($urandom); rnd = $urandom;
      #1;
      for (int k = 0; k < 6; k++) begin
        e_old -= (j[k] ? 1 : -1) * int'(nb[k] == s);
        e_new -= (j[k] ? 1 : -1) * int'(nb[k] == s_try);
      end
      checks += 2;
      if (lut_idx !== 4'(e_new - e_old + 6)) failures++;
      if (s_new !== ((rnd < tab[e_new - e_old + 6]) ? s_try : s)) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
