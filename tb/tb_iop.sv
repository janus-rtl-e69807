// tb_iop: host-side view of the IOP. Worms enter on in_dv/in_data; the test
// writes and reads the staging memory, broadcasts words to masked SP links,
// checks that worms for the devices not built here appear on dev_bus, and
// checks that memory and SP replies merged on tx_* keep their order and tags
// while tx_ready is randomly low (memory and SP replies compete on purpose).
module tb_iop;
  import janus_pkg::*;
  logic clk = 0, rst_n = 1;   // pulsed low at start to trigger the asynchronous reset
  logic in_dv = 0, tx_valid, tx_ready = 1;
  logic [15:0] in_data = '0, tx_data;
  logic [2:0] tx_dev;
  logic [3:0] tx_sp;
  dev_bus_t dev_bus;
  iop_word_t [N_SP-1:0] sp_dn, sp_up;
  int checks = 0, failures = 0, prog_words = 0, contention = 0;
  logic [15:0] mem_q [$];
  logic [15:0] sp_q [N_SP][$];
  logic [15:0] dn_q [N_SP][$];

  iop #(.STAGE_AW(10)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if (tx_valid && tx_ready) begin
      checks++;
      if (tx_dev == 3'(DEV_MEM0)) begin
        if (mem_q.size() == 0 || mem_q.pop_front() !== tx_data) failures++;
      end else if (tx_dev == 3'(DEV_SPS)) begin
        if (sp_q[tx_sp].size() == 0 || sp_q[tx_sp].pop_front() !== tx_data) failures++;
      end else failures++;
    end
    if (dut.mem_valid && dut.sp_valid) contention++;
    for (int i = 0; i < N_SP; i++)
      if (sp_dn[i].valid) begin
        checks++;
        if (dn_q[i].size() == 0 || dn_q[i].pop_front() !== sp_dn[i].data) failures++;
      end
    if (dev_bus.dv && dev_bus.devsel[DEV_PROG1]) prog_words++;
    tx_ready <= ($urandom_range(2) != 0);
  end

  task automatic put(logic [15:0] w);
    @(negedge clk); in_dv = 1; in_data = w;
  endtask
  task automatic worm(logic [7:0] mask, logic [15:0] w [$]);
    put({8'h00, mask}); put(16'(w.size()));
    foreach (w[i]) put(w[i]);
    @(negedge clk); in_dv = 0;
  endtask

  initial begin
    logic [15:0] shadow [1024];
    sp_up = '0;
    #1 rst_n = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    // staging memory: write 64 words, SP links: broadcast to a mask
    begin
      automatic logic [15:0] w [$] = {16'h0000, 16'd100};
      for (int i = 0; i < 64; i++) begin shadow[100+i] = 16'($urandom); w.push_back(shadow[100+i]); end
      worm(8'h01, w);
    end
    begin
      automatic logic [15:0] m = 16'hA5C3;
      automatic logic [15:0] w [$] = {m};
      for (int i = 0; i < 10; i++) begin
        automatic logic [15:0] d = 16'($urandom);
        w.push_back(d);
        for (int s = 0; s < N_SP; s++) if (m[s]) dn_q[s].push_back(d);
      end
      worm(8'h10, w);
    end
    // program-interface worm: only visible on dev_bus
    worm(8'h02, '{16'h1111, 16'h2222, 16'h3333});
    // read 64 words back (ID 3) while the SPs reply at the same time
    for (int i = 0; i < 64; i++) mem_q.push_back(shadow[100+i]);
    worm(8'h08, '{16'h8000, 16'd100, 16'd64});
    for (int b = 0; b < 8; b++) begin
      @(negedge clk);
      for (int s = 0; s < N_SP; s++) begin
        sp_up[s].valid = ($urandom_range(1) == 0);
        sp_up[s].data  = 16'($urandom);
        if (sp_up[s].valid) sp_q[s].push_back(sp_up[s].data);
      end
    end
    @(negedge clk); sp_up = '0;
    repeat (600) @(negedge clk);
    checks += 4;
    if (mem_q.size() != 0) begin failures++; $display("memory words missing %0d", mem_q.size()); end
    for (int s = 0; s < N_SP; s++) if (sp_q[s].size() != 0 || dn_q[s].size() != 0) begin failures++; break; end
    if (prog_words != 3) begin failures++; $display("program words %0d", prog_words); end
    if (contention == 0) begin failures++; $display("no contention on the return stream"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
