// tb_prob_lut: fills the 7-entry table and reads it on both ports at once.
module tb_prob_lut;
  logic clk = 0, we = 0;
  logic [2:0] waddr = '0, addr_a = '0, addr_b = '0;
  logic [31:0] wdata = '0, data_a, data_b;
  logic [31:0] ref_tab [7];
  int checks = 0, failures = 0;

  prob_lut #(.N(7), .AW(3)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 7; i++) begin
      @(negedge clk); we = 1; waddr = 3'(i); wdata = $urandom; ref_tab[i] = wdata;
    end
    @(negedge clk); we = 0;
    for (int a = 0; a < 7; a++)
      for (int b = 0; b < 7; b++) begin
        addr_a = 3'(a); addr_b = 3'(b); #1;
        checks += 2;
        if (data_a !== ref_tab[a]) failures++;
        if (data_b !== ref_tab[b]) failures++;
      end
    addr_a = 3'd7; #1; checks++;
    if (data_a !== 32'd0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
