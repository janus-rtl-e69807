// tb_staging_mem: random writes and reads against a shadow array, checking
// the one-clock read latency.
module tb_staging_mem;
  localparam int unsigned AW = 8;
  logic clk = 0, en = 0, we = 0;
  logic [AW-1:0] addr = '0;
  logic [15:0] wdata = '0, rdata;
  logic [15:0] shadow [2**AW];
  logic        known [2**AW];
  int checks = 0, failures = 0;

  staging_mem #(.AW(AW)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 2**AW; i++) known[i] = 0;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      en = 1; addr = AW'($urandom); we = ($urandom_range(1) == 0) || !known[addr];
      wdata = 16'($urandom);
      if (we) begin shadow[addr] = wdata; known[addr] = 1; end
      else begin
        automatic logic [15:0] e = shadow[addr];
        @(negedge clk); en = 0;
        checks++;
        if (rdata !== e) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
