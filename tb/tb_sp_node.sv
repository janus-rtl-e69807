// tb_sp_node: talks to one SP over its IOP link with the SP command set:
// seeds the generator, fills the probability table, loads and reads back all
// memories, runs sweeps and polls the status, and exercises the neighbour
// mailboxes. Outcomes are checked with tables that make the result
// deterministic: all-ones Metropolis table flips every spin once per sweep,
// all-zero table leaves them, all-ones heat bath table sets every spin to +1.
module tb_sp_node;
  import janus_pkg::*;
  localparam int unsigned LX = 4, LY = 4, LZ = 4, NS = LX*LY, NCH = NS/16;

  logic clk = 0, rst_n = 1;   // pulsed low at start to trigger the asynchronous reset
  iop_word_t dn, up;
  nn_word_t [3:0] nn_in, nn_out;

  sp_node #(.LX(LX), .LY(LY), .LZ(LZ)) dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  logic [15:0] rx_q [$];
  logic [NS-1:0] mem [5][LZ];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (up.valid) rx_q.push_back(up.data);

  task automatic send(logic [15:0] w);
    @(negedge clk); dn.valid = 1; dn.data = w;
  endtask
  task automatic idle(int n = 1);
    repeat (n) begin @(negedge clk); dn.valid = 0; end
  endtask
  task automatic expect_words(int n, output logic [15:0] w [2]);
    int guard = 0;
    while (rx_q.size() < n && guard < 100) begin @(negedge clk); guard++; end
    for (int i = 0; i < n; i++) w[i] = (rx_q.size() > 0) ? rx_q.pop_front() : 16'hDEAD;
  endtask
  task automatic check(logic c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic read_all(string tag);
    logic [15:0] w [2];
    for (int t = 0; t < 5; t++)
      for (int z = 0; z < LZ; z++)
        for (int c = 0; c < NCH; c++) begin
          send({SP_RD16, 9'd0, 3'(t)}); send(16'(z)); send(16'(c)); idle();
          expect_words(1, w);
          check(w[0] === mem[t][z][c*16 +: 16], $sformatf("%s mem %0d z %0d got %h exp %h", tag, t, z, w[0], mem[t][z][c*16 +: 16]));
        end
  endtask

  task automatic set_lut(logic [31:0] v);
    for (int i = 0; i < 7; i++) begin send({SP_WR_LUT, 9'd0, 3'(i)}); send(v[31:16]); send(v[15:0]); end
  endtask

  task automatic run_and_wait(int n, alg_e a);
    logic [15:0] w [2];
    send({SP_RUN, 11'd0, 1'(a)}); send(16'(n)); idle();
    do begin
      idle(5); send({SP_STATUS, 12'd0}); idle();
      expect_words(2, w);
    end while (w[0][15]);
    check(w[0][14:0] == 15'(n), "sweeps done");
    check(w[1] == 16'(2*(LZ+3)*n), $sformatf("cycles %0d", w[1]));
  endtask

  initial begin
    logic [15:0] w [2];
    dn = '0; nn_in = '0;
    #1 rst_n = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    // seeds: back-to-back commands, no idle clocks in between
    for (int j = 0; j < 62; j++) begin automatic logic [31:0] s = $urandom; send({SP_SEED, 12'd0}); send(s[31:16]); send(s[15:0]); end
    for (int t = 0; t < 5; t++)
      for (int z = 0; z < LZ; z++)
        for (int c = 0; c < NCH; c++) begin
          mem[t][z][c*16 +: 16] = 16'($urandom);
          send({SP_WR16, 9'd0, 3'(t)}); send(16'(z)); send(16'(c)); send(mem[t][z][c*16 +: 16]);
        end
    idle();
    read_all("load");
    // Metropolis with probability-one table: every spin flips
    set_lut(32'hFFFF_FFFF);
    run_and_wait(1, ALG_METROPOLIS);
    for (int z = 0; z < LZ; z++) begin mem[0][z] = ~mem[0][z]; mem[1][z] = ~mem[1][z]; end
    read_all("flip");
    // zero table: nothing changes over two sweeps
    set_lut(32'h0);
    run_and_wait(2, ALG_METROPOLIS);
    read_all("frozen");
    // heat bath with probability-one table: all spins become +1
    set_lut(32'hFFFF_FFFF);
    run_and_wait(1, ALG_HEATBATH);
    for (int z = 0; z < LZ; z++) begin mem[0][z] = '1; mem[1][z] = '1; end
    read_all("heatbath");
    // neighbour mailboxes
    for (int d = 0; d < 4; d++) begin
      automatic logic [31:0] v = $urandom;
      send({SP_NN_SEND, 10'd0, 2'(d)}); send(v[31:16]); send(v[15:0]); idle(2);
      check(nn_out[d].valid && nn_out[d].data == v, $sformatf("nn send %0d", d));
      for (int e = 0; e < 4; e++) if (e != d) check(!nn_out[e].valid, "nn other dir idle");
      @(negedge clk); nn_in[d] = {1'b1, ~v}; @(negedge clk); nn_in[d] = '0;
      send({SP_NN_READ, 10'd0, 2'(d)}); idle();
      expect_words(2, w);
      check({w[0], w[1]} == ~v, $sformatf("nn read %0d", d));
    end
    idle(5);
    check(rx_q.size() == 0, "no stray replies");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
