// tb_ising_engine: loads a random spin-glass instance (two mixed replicas and
// the three coupling directions) into a small engine, runs Metropolis and heat
// bath sweeps and compares every stored bit with a site-by-site software model
// that uses the same Parisi-Rapuano numbers. Also checks the rate: one plane
// per clock, 2*(LZ+3) clocks per sweep.
module tb_ising_engine;
  import janus_pkg::*;
  localparam int unsigned LX = 8, LY = 4, LZ = 6, K = 24;
  localparam int unsigned NS = LX*LY, NCH = NS/16;
  localparam int unsigned NWH = (NS + K - 1) / K;
  localparam int unsigned MAXR = 62 + 64*K;

  logic clk = 0, rst_n = 1;   // pulsed low at start to trigger the asynchronous reset
  logic h_we = 0, h_re = 0, lut_we = 0, seed_we = 0, start = 0;
  logic [2:0] h_tgt = '0, lut_idx = '0;
  logic [15:0] h_z = '0, h_chunk = '0, h_wdata = '0, h_rdata, n_sweeps = '0, sweeps_done;
  logic h_rvalid, busy;
  logic [31:0] lut_data = '0, seed_data = '0, cycles;
  alg_e alg = ALG_METROPOLIS;

  ising_engine #(.LX(LX), .LY(LY), .LZ(LZ), .RNG_K(K)) dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- software model ----------------------------------------------------------
  logic [NS-1:0] mem [5][LZ];     // M0, M1, Jx, Jy, Jz
  logic [31:0]   tab [7];
  logic [31:0]   seq [NWH][MAXR];
  int            rstep = 0;       // planes computed so far (random steps)

  function automatic logic [31:0] rnd_of(int n);
    automatic int w = n / K, k = 62 + rstep*K + n % K;
    return seq[w][k] ^ seq[w][k-61];
  endfunction

  function automatic int sp(logic b); return b ? 1 : -1; endfunction

  task automatic model_sweeps(int n, alg_e a);
    for (int sw = 0; sw < n; sw++)
      for (int r = 0; r < 2; r++)
        for (int z = 0; z < LZ; z++) begin
          for (int y = 0; y < LY; y++)
            for (int x = 0; x < LX; x++) begin
              automatic int i = y*LX + x;
              automatic int xp = y*LX + (x+1)%LX, xm = y*LX + (x+LX-1)%LX;
              automatic int yp = ((y+1)%LY)*LX + x, ym = ((y+LY-1)%LY)*LX + x;
              automatic int zp = (z+1)%LZ, zm = (z+LZ-1)%LZ;
              automatic int h = 0, si = sp(mem[r][z][i]);
              automatic logic [31:0] rv = rnd_of(i);
              h += sp(mem[2][z][i])  * sp(mem[1-r][z][xp]);
              h += sp(mem[2][z][xm]) * sp(mem[1-r][z][xm]);
              h += sp(mem[3][z][i])  * sp(mem[1-r][z][yp]);
              h += sp(mem[3][z][ym]) * sp(mem[1-r][z][ym]);
              h += sp(mem[4][z][i])  * sp(mem[1-r][zp][i]);
              h += sp(mem[4][zm][i]) * sp(mem[1-r][zm][i]);
              if (a == ALG_METROPOLIS) begin
                automatic int de = 2*si*h;            // energy change of a flip
                if (rv < tab[(de+12)/4]) mem[r][z][i] = ~mem[r][z][i];
              end else begin
                mem[r][z][i] = (rv < tab[(h+6)/2]);
              end
            end
          rstep++;
        end
  endtask

  // ---- host helpers -------------------------------------------------------------
  task automatic wr16(int t, int z, int c, logic [15:0] d);
    @(negedge clk); h_we = 1; h_tgt = 3'(t); h_z = 16'(z); h_chunk = 16'(c); h_wdata = d;
    @(negedge clk); h_we = 0;
  endtask

  task automatic check_mem(string tag);
    for (int t = 0; t < 5; t++)
      for (int z = 0; z < LZ; z++)
        for (int c = 0; c < NCH; c++) begin
          @(negedge clk); h_re = 1; h_tgt = 3'(t); h_z = 16'(z); h_chunk = 16'(c);
          @(negedge clk); h_re = 0;
          checks++;
          if (!h_rvalid || h_rdata !== mem[t][z][c*16 +: 16]) begin
            failures++;
            if (failures < 6) $display("%s: mem %0d z %0d chunk %0d: %h vs %h", tag, t, z, c, h_rdata, mem[t][z][c*16 +: 16]);
          end
        end
  endtask

  task automatic run(int n, alg_e a);
    int t0, t1;
    @(negedge clk); start = 1; n_sweeps = 16'(n); alg = a;
    @(negedge clk); start = 0;
    t0 = $time;
    // host writes while busy are ignored
    h_we = 1; h_tgt = 3'd2; h_z = 0; h_chunk = 0; h_wdata = ~mem[2][0][15:0];
    @(negedge clk); h_we = 0;
    while (busy) @(negedge clk);
    checks += 2;
    if (cycles !== 32'(2*(LZ+3)*n)) begin
      failures++; $display("cycles %0d, expected %0d", cycles, 2*(LZ+3)*n);
    end
    if (sweeps_done !== 16'(n)) failures++;
    model_sweeps(n, a);
  endtask

  initial begin
    for (int w = 0; w < NWH; w++) begin
      for (int j = 0; j < 62; j++) seq[w][j] = $urandom;
      for (int k = 62; k < MAXR; k++) seq[w][k] = seq[w][k-24] + seq[w][k-55];
    end
    for (int t = 0; t < 5; t++)
      for (int z = 0; z < LZ; z++)
        for (int i = 0; i < NS; i++) mem[t][z][i] = 1'($urandom);
    // finite temperature tables: random thresholds, favouring order
    for (int i = 0; i < 7; i++) tab[i] = (i < 3) ? 32'hFFFF_FFFF - $urandom_range(1000) : $urandom;

    #1 rst_n = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int w = 0; w < NWH; w++)
      for (int j = 0; j < 62; j++) begin
        @(negedge clk); seed_we = 1; seed_data = seq[w][j];
      end
    @(negedge clk); seed_we = 0;
    for (int i = 0; i < 7; i++) begin
      @(negedge clk); lut_we = 1; lut_idx = 3'(i); lut_data = tab[i];
    end
    @(negedge clk); lut_we = 0;
    for (int t = 0; t < 5; t++)
      for (int z = 0; z < LZ; z++)
        for (int c = 0; c < NCH; c++) wr16(t, z, c, mem[t][z][c*16 +: 16]);
    check_mem("load");
    run(3, ALG_METROPOLIS);
    check_mem("metropolis");
    run(2, ALG_HEATBATH);
    check_mem("heatbath");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
