// tb_sp_if: sends SP-interface worms with random SP masks and checks that
// every selected link (and no other) carries each payload word one clock
// later; then injects bursts of reply words on all 16 uplinks at once and
// checks that the merged stream returns every word, tagged with its SP, in
// per-link order, under random back-pressure.
module tb_sp_if;
  import janus_pkg::*;
  logic clk = 0, rst_n = 1;   // pulsed low at start to trigger the asynchronous reset
  dev_bus_t bus;
  iop_word_t [N_SP-1:0] dn, up;
  logic out_valid, out_ready;
  logic [15:0] out_data;
  logic [3:0] out_sp;
  logic [15:0] exp_q [N_SP][$];
  logic [15:0] dn_q [N_SP][$];
  int checks = 0, failures = 0, got = 0;

  sp_if dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    for (int i = 0; i < N_SP; i++)
      if (dn[i].valid) begin
        checks++;
        if (dn_q[i].size() == 0 || dn_q[i].pop_front() !== dn[i].data) failures++;
      end
    if (out_valid && out_ready) begin
      checks++; got++;
      if (exp_q[out_sp].size() == 0 || exp_q[out_sp].pop_front() !== out_data) failures++;
    end
    out_ready <= ($urandom_range(3) != 0);
  end

  initial begin
    bus = '0; up = '0;
    #1 rst_n = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int n = 0; n < 20; n++) begin
      automatic logic [15:0] mask = 16'($urandom);
      automatic int len = $urandom_range(1, 8);
      @(negedge clk); bus = '0; bus.devsel[DEV_SPS] = 1; bus.dv = 1; bus.data = mask; bus.first = 1;
      for (int i = 0; i < len; i++) begin
        automatic logic [15:0] d = 16'($urandom);
        @(negedge clk); bus.first = 0; bus.data = d; bus.last = (i == len-1);
        for (int s = 0; s < N_SP; s++) if (mask[s]) dn_q[s].push_back(d);
      end
      @(negedge clk); bus = '0;
      // a worm for the memory device must not reach the SPs
      @(negedge clk); bus.devsel[DEV_MEM0] = 1; bus.dv = 1; bus.data = 16'hFFFF; bus.first = 1;
      @(negedge clk); bus.first = 0; bus.data = 16'h1234; bus.last = 1;
      @(negedge clk); bus = '0;
    end
    repeat (3) @(negedge clk);
    for (int s = 0; s < N_SP; s++) begin checks++; if (dn_q[s].size() != 0) failures++; end
    // uplink bursts: 6 words on every link in 6 consecutive clocks
    for (int b = 0; b < 6; b++) begin
      @(negedge clk);
      for (int s = 0; s < N_SP; s++) begin
        up[s].valid = 1; up[s].data = 16'($urandom);
        exp_q[s].push_back(up[s].data);
      end
    end
    @(negedge clk); up = '0;
    for (int g = 0; g < 500 && got < 96; g++) @(negedge clk);
    checks++;
    if (got != 96) begin failures++; $display("only %0d reply words", got); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
