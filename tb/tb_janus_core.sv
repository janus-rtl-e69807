// tb_janus_core: end-to-end test of a JANUS core at a reduced lattice size
// (4 x 4 x 4 per SP; SPs 12..15 carry the Potts firmware, the others the
// Ising one). The host drives the IOP with worms and:
//  - seeds each SP's generator and loads a different random spin-glass
//    instance (two replicas in mixed layout) into each SP (one-SP worms);
//  - reads one SP's memories back through the merged return stream;
//  - broadcasts a zero-temperature Metropolis table and a run command to all
//    16 SPs (one worm), and checks per SP that the total energy of the two
//    replicas never rises and that the sweep took 2*(LZ+3) clocks (Ising
//    and Potts energies alike);
//  - broadcasts a heat bath run with a probability-one table and checks that
//    every spin is +1;
//  - has every SP send a word to each neighbour and checks the mailboxes,
//    including the torus wrap-around;
//  - uses the staging memory while SP replies compete for the return stream,
//    with random back-pressure, and sends a worm to a device not built here.
// Every mechanism above is counted and must occur at least once.
module tb_janus_core;
  import janus_pkg::*;
  localparam int unsigned LX = 4, LY = 4, LZ = 4, NS = LX*LY, NCH = NS/16;
  localparam int unsigned NWH = (NS + 23) / 24;

  logic clk = 0, rst_n = 1;   // pulsed low at start to trigger the asynchronous reset
  logic in_dv = 0, tx_valid, tx_ready = 1;
  logic [15:0] in_data = '0, tx_data;
  logic [2:0] tx_dev;
  logic [3:0] tx_sp;
  dev_bus_t dev_bus;

  janus_core #(.LX(LX), .LY(LY), .LZ(LZ), .PLX(LX), .PLY(LY), .PLZ(LZ), .STAGE_AW(8)) dut (.*);
  localparam logic [15:0] POTTS = 16'hF000;   // default firmware map of janus_core
  function automatic bit is_potts(int s); return POTTS[s]; endfunction
  function automatic int ntgt(int s); return is_potts(s) ? 7 : 5; endfunction
  function automatic int jbase(int s); return is_potts(s) ? 4 : 2; endfunction
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  logic [15:0] sp_rx [N_SP][$];
  logic [15:0] mem_rx [$];
  bit random_ready = 0;

  // mechanism counters
  int n_broadcast = 0, n_metro = 0, n_heat = 0, n_nn_wrap = 0, n_nn = 0;
  int n_potts_drop = 0, n_backpressure = 0, n_contention = 0, n_stage_rd = 0, n_other_dev = 0, n_e_drop = 0;

  `include "janus_host.svh"

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if (tx_valid && tx_ready) begin
      if (tx_dev == 3'(DEV_SPS)) sp_rx[tx_sp].push_back(tx_data);
      else                       mem_rx.push_back(tx_data);
    end
    if (tx_valid && !tx_ready) n_backpressure++;
    if (dut.u_iop.mem_valid && dut.u_iop.sp_valid) n_contention++;
    if (dev_bus.dv && dev_bus.first && dev_bus.devsel[DEV_TEMP]) n_other_dev++;
    tx_ready <= random_ready ? ($urandom_range(2) != 0) : 1'b1;
  end

  task automatic check(logic c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---- host copy of every SP's memories ---------------------------------------
  logic [NS-1:0] mem [N_SP][7][LZ];

  task automatic read_back(int s);
    logic [15:0] w [$];
    for (int t = 0; t < ntgt(s); t++)
      for (int z = 0; z < LZ; z++) begin
        automatic word_q_t q = {};
        for (int c = 0; c < NCH; c++) c_rd16(q, t, z, c);
        sp_send(16'(1 << s), q);
        get_words(s, NCH, w);
        for (int c = 0; c < NCH; c++) mem[s][t][z][c*16 +: 16] = w[c];
      end
  endtask

  // spin of replica rep at (x,y,z): replica A (rep 0) lives in M0 on even
  // sites and in M1 on odd ones. Ising: +-1. Potts: value 0..3 from two bits.
  function automatic int spin(int s, int rep, int x, int y, int z);
    automatic int p = (x + y + z) % 2;
    automatic int m = (p == 0) ? rep : 1 - rep;
    automatic int i = y*LX + x;
    if (is_potts(s)) return {mem[s][2*m+1][z][i], mem[s][2*m][z][i]};
    return mem[s][m][z][i] ? 1 : -1;
  endfunction
  function automatic int jv(int s, int t, int x, int y, int z);
    return mem[s][jbase(s) + t][z][y*LX + x] ? 1 : -1;
  endfunction
  function automatic int bond(int s, int a, int b);
    return is_potts(s) ? int'(a == b) : a * b;
  endfunction
  function automatic int energy(int s);
    automatic int e = 0;
    for (int rep = 0; rep < 2; rep++)
      for (int z = 0; z < LZ; z++)
        for (int y = 0; y < LY; y++)
          for (int x = 0; x < LX; x++) begin
            automatic int si = spin(s, rep, x, y, z);
            e -= jv(s, 0, x, y, z) * bond(s, si, spin(s, rep, (x+1)%LX, y, z));
            e -= jv(s, 1, x, y, z) * bond(s, si, spin(s, rep, x, (y+1)%LY, z));
            e -= jv(s, 2, x, y, z) * bond(s, si, spin(s, rep, x, y, (z+1)%LZ));
          end
    return e;
  endfunction

  initial begin
    logic [NS-1:0] ref_mem [N_SP][7][LZ];
    int e0 [N_SP];
    int sw, cyc;
    logic [15:0] w [$];

    #1 rst_n = 0;
    repeat (3) @(negedge clk); rst_n = 1;

    // ---- per-SP seeds and instances -------------------------------------------
    for (int s = 0; s < N_SP; s++) begin
      automatic word_q_t q = {};
      for (int j = 0; j < 62*(is_potts(s) ? 2*NWH : NWH); j++) c_seed(q, $urandom);
      for (int t = 0; t < ntgt(s); t++)
        for (int z = 0; z < LZ; z++)
          for (int c = 0; c < NCH; c++) begin
            automatic logic [15:0] d = 16'($urandom);
            ref_mem[s][t][z][c*16 +: 16] = d;
            c_wr16(q, t, z, c, d);
          end
      sp_send(16'(1 << s), q);
    end
    read_back(5);
    for (int t = 0; t < 5; t++)
      for (int z = 0; z < LZ; z++) check(mem[5][t][z] == ref_mem[5][t][z], "load read-back");
    for (int s = 0; s < N_SP; s++) begin
      for (int t = 0; t < ntgt(s); t++) for (int z = 0; z < LZ; z++) mem[s][t][z] = ref_mem[s][t][z];
      e0[s] = energy(s);
    end

    // ---- zero-temperature Metropolis on all SPs (broadcast) ---------------------
    begin
      automatic word_q_t q = {};
      automatic word_q_t qp = {}, qr = {};
      for (int i = 0; i < 7; i++) c_lut(q, i, (i < 3) ? 32'hFFFF_FFFF : 32'h0);    // Ising dE = 4i-12 < 0
      sp_send(~POTTS, q);
      for (int i = 0; i < 13; i++) c_lut(qp, i, (i < 6) ? 32'hFFFF_FFFF : 32'h0);  // Potts dE = i-6 < 0
      sp_send(POTTS, qp);
      c_run(qr, 3, ALG_METROPOLIS);
      sp_send(16'hFFFF, qr);
      n_broadcast++;
    end
    for (int s = 0; s < N_SP; s++) begin
      wait_idle(s, sw, cyc);
      check(sw == 3 && cyc == 2*(LZ+3)*3, $sformatf("SP %0d sweeps %0d cycles %0d", s, sw, cyc));
      read_back(s);
      check(energy(s) <= e0[s], $sformatf("SP %0d energy rose %0d -> %0d", s, e0[s], energy(s)));
      if (energy(s) < e0[s]) n_e_drop++;
      if (is_potts(s) && energy(s) < e0[s]) n_potts_drop++;
      for (int t = jbase(s); t < ntgt(s); t++) for (int z = 0; z < LZ; z++)
        check(mem[s][t][z] == ref_mem[s][t][z], "couplings untouched");
    end
    n_metro++;

    // ---- heat bath, probability-one table -------------------------------------
    begin
      automatic word_q_t q = {};
      for (int i = 0; i < 7; i++) c_lut(q, i, 32'hFFFF_FFFF);
      c_run(q, 1, ALG_HEATBATH);
      sp_send(~POTTS, q);
      n_broadcast++;
    end
    for (int s = 0; s < 12; s += 5) begin
      wait_idle(s, sw, cyc);
      read_back(s);
      for (int z = 0; z < LZ; z++) check(mem[s][0][z] == '1 && mem[s][1][z] == '1, "heat bath all up");
    end
    n_heat++;

    // ---- nearest-neighbour links ----------------------------------------------
    for (int d = 0; d < 4; d++) begin
      for (int s = 0; s < N_SP; s++) begin
        automatic word_q_t q = {};
        c_nn_send(q, d, {16'(s), 16'(d)});
        sp_send(16'(1 << s), q);
      end
      repeat (4) @(negedge clk);
      for (int s = 0; s < N_SP; s++) begin
        // the word sent towards d arrives at the neighbour on its opposite side
        automatic int x = s % 4, y = s / 4, nx = x, ny = y, r;
        automatic word_q_t q = {};
        case (d)
          0: nx = (x+1)%4;  1: nx = (x+3)%4;
          2: ny = (y+1)%4;  default: ny = (y+3)%4;
        endcase
        r = ny*4 + nx;
        c_nn_read(q, d ^ 1);
        sp_send(16'(1 << r), q);
        get_words(r, 2, w);
        check({w[0], w[1]} == {16'(s), 16'(d)}, $sformatf("nn %0d -> %0d dir %0d", s, r, d));
        n_nn++;
        if (nx != x + ((d==0) ? 1 : (d==1) ? -1 : 0) || ny != y + ((d==2) ? 1 : (d==3) ? -1 : 0)) n_nn_wrap++;
      end
    end

    // ---- staging memory while SPs reply, with back-pressure ---------------------
    random_ready = 1;
    begin
      automatic word_q_t wq = {16'h0000, 16'd16};
      automatic logic [15:0] sh [$];
      for (int i = 0; i < 32; i++) begin sh.push_back(16'($urandom)); wq.push_back(sh[i]); end
      worm(8'h01, wq);
      worm(8'h40, '{16'h0001, 16'h0002});        // temperature device: not built here
      worm(8'h08, '{16'h8000, 16'd16, 16'd32});  // read back (ID 3)
      begin
        automatic word_q_t q = {};
        for (int z = 0; z < LZ; z++) c_rd16(q, 4, z, 0);   // Jz (Ising) / Jx (Potts)
        sp_send(16'hFFFF, q);                     // all 16 SPs reply at once
        n_broadcast++;
      end
      for (int g = 0; g < 3000 && mem_rx.size() < 32; g++) @(negedge clk);
      n_stage_rd = mem_rx.size();
      for (int i = 0; i < 32; i++) check(mem_rx.size() > 0 && mem_rx.pop_front() == sh[i], "staging read");
      for (int s = 0; s < N_SP; s++) begin
        get_words(s, LZ, w);
        for (int z = 0; z < LZ; z++) check(w[z] == ref_mem[s][4][z][15:0], "broadcast read");
      end
    end
    random_ready = 0;

    $display("potts_energy_drops=%0d", n_potts_drop);
    $display("broadcast=%0d metropolis=%0d heatbath=%0d energy_drops=%0d nn=%0d nn_wrap=%0d backpressure=%0d contention=%0d staging_reads=%0d other_dev=%0d",
             n_broadcast, n_metro, n_heat, n_e_drop, n_nn, n_nn_wrap, n_backpressure, n_contention, n_stage_rd, n_other_dev);
    check(n_broadcast > 0, "broadcast happened");
    check(n_metro > 0 && n_e_drop > 0, "Metropolis lowered an energy");
    check(n_heat > 0, "heat bath happened");
    check(n_potts_drop > 0, "Potts Metropolis lowered an energy");
    check(n_nn > 0 && n_nn_wrap > 0, "torus wrap-around used");
    check(n_backpressure > 0, "back-pressure happened");
    check(n_contention > 0, "return-stream contention happened");
    check(n_stage_rd > 0, "staging memory read");
    check(n_other_dev > 0, "device bus to external device");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
