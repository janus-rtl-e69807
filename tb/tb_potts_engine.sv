// tb_potts_engine: loads a random disordered 4-state Potts instance into a
// small engine, runs Metropolis sweeps with a random 13-entry table and
// compares every stored bit with a site-by-site software model using the same
// Parisi-Rapuano numbers (cell i: proposal from number NS+i, acceptance from
// number i). Also checks 2*(LZ+3) clocks per sweep.
module tb_potts_engine;
  localparam int unsigned LX = 8, LY = 4, LZ = 6, K = 24;
  localparam int unsigned NS = LX*LY, NCH = NS/16;
  localparam int unsigned NWH = (2*NS + K - 1) / K;
  localparam int unsigned MAXR = 62 + 64*K;

  logic clk = 0, rst_n = 1;   // pulsed low at start to trigger the asynchronous reset
  logic h_we = 0, h_re = 0, lut_we = 0, seed_we = 0, start = 0;
  logic [2:0] h_tgt = '0;
  logic [3:0] lut_idx = '0;
  logic [15:0] h_z = '0, h_chunk = '0, h_wdata = '0, h_rdata, n_sweeps = '0, sweeps_done;
  logic h_rvalid, busy;
  logic [31:0] lut_data = '0, seed_data = '0, cycles;

  potts_engine #(.LX(LX), .LY(LY), .LZ(LZ), .RNG_K(K)) dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0, accepted = 0;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [NS-1:0] mem [7][LZ];     // M0.b0, M0.b1, M1.b0, M1.b1, Jx, Jy, Jz
  logic [31:0]   tab [13];
  logic [31:0]   seq [NWH][MAXR];
  int            rstep = 0;

  function automatic logic [31:0] rnd_of(int n);
    automatic int w = n / K, k = 62 + rstep*K + n % K;
    return seq[w][k] ^ seq[w][k-61];
  endfunction
  function automatic int sp(int q, int z, int i);
    return {mem[2*q+1][z][i], mem[2*q][z][i]};
  endfunction
  function automatic int jj(int t, int z, int i); return mem[t][z][i] ? 1 : -1; endfunction

  task automatic model_sweeps(int n);
    for (int sw = 0; sw < n; sw++)
      for (int r = 0; r < 2; r++)
        for (int z = 0; z < LZ; z++) begin
          for (int y = 0; y < LY; y++)
            for (int x = 0; x < LX; x++) begin
              automatic int i = y*LX + x, o = 1 - r;
              automatic int xp = y*LX + (x+1)%LX, xm = y*LX + (x+LX-1)%LX;
              automatic int yp = ((y+1)%LY)*LX + x, ym = ((y+LY-1)%LY)*LX + x;
              automatic int zp = (z+1)%LZ, zm = (z+LZ-1)%LZ;
              automatic int s = sp(r, z, i), st = rnd_of(NS + i) >> 30;
              automatic int nbv [6] = '{sp(o, z, xp), sp(o, z, xm), sp(o, z, yp), sp(o, z, ym), sp(o, zp, i), sp(o, zm, i)};
              automatic int jv [6]  = '{jj(4, z, i), jj(4, z, xm), jj(5, z, i), jj(5, z, ym), jj(6, z, i), jj(6, zm, i)};
              automatic int e_old = 0, e_new = 0;
              for (int k = 0; k < 6; k++) begin
                e_old -= jv[k] * (nbv[k] == s);
                e_new -= jv[k] * (nbv[k] == st);
              end
              if (rnd_of(i) < tab[e_new - e_old + 6]) begin
                if (st != s) accepted++;
                mem[2*r][z][i] = st[0]; mem[2*r+1][z][i] = st[1];
              end
            end
          rstep++;
        end
  endtask

  task automatic check_mem(string tag);
    for (int t = 0; t < 7; t++)
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

  initial begin
    for (int w = 0; w < NWH; w++) begin
      for (int j = 0; j < 62; j++) seq[w][j] = $urandom;
      for (int k = 62; k < MAXR; k++) seq[w][k] = seq[w][k-24] + seq[w][k-55];
    end
    for (int t = 0; t < 7; t++)
      for (int z = 0; z < LZ; z++)
        for (int i = 0; i < NS; i++) mem[t][z][i] = 1'($urandom);
    for (int i = 0; i < 13; i++) tab[i] = (i <= 6) ? 32'hFFFF_FFFF : $urandom >> (i - 6);

    #1 rst_n = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int w = 0; w < NWH; w++)
      for (int j = 0; j < 62; j++) begin
        @(negedge clk); seed_we = 1; seed_data = seq[w][j];
      end
    @(negedge clk); seed_we = 0;
    for (int i = 0; i < 13; i++) begin
      @(negedge clk); lut_we = 1; lut_idx = 4'(i); lut_data = tab[i];
    end
    @(negedge clk); lut_we = 0;
    for (int t = 0; t < 7; t++)
      for (int z = 0; z < LZ; z++)
        for (int c = 0; c < NCH; c++) begin
          @(negedge clk); h_we = 1; h_tgt = 3'(t); h_z = 16'(z); h_chunk = 16'(c); h_wdata = mem[t][z][c*16 +: 16];
        end
    @(negedge clk); h_we = 0;
    check_mem("load");
    @(negedge clk); start = 1; n_sweeps = 16'd3;
    @(negedge clk); start = 0;
    while (busy) @(negedge clk);
    checks += 2;
    if (cycles !== 32'(2*(LZ+3)*3)) begin failures++; $display("cycles %0d", cycles); end
    if (sweeps_done !== 16'd3) failures++;
    model_sweeps(3);
    check_mem("metropolis");
    checks++;
    if (accepted == 0) begin failures++; $display("no move accepted"); end
    $display("accepted moves in the model: %0d", accepted);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
