// tb_bit_plane_mem: writes whole planes and single 16-bit chunks, then reads
// every plane back against a shadow copy, checking the one-clock read latency.
module tb_bit_plane_mem;
  localparam int unsigned W = 64, D = 8, NCH = W/16;
  logic clk = 0, rd_en = 0, we = 0;
  logic [2:0] rd_addr = '0, wr_addr = '0;
  logic [W-1:0] rd_data, wr_data = '0;
  logic [NCH-1:0] wr_mask = '0;
  logic [W-1:0] shadow [D];
  int checks = 0, failures = 0;

  bit_plane_mem #(.W(W), .D(D)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_all();
    for (int z = 0; z < D; z++) begin
      @(negedge clk); rd_en = 1; rd_addr = 3'(z);
      @(negedge clk); rd_en = 0;
      checks++;
      if (rd_data !== shadow[z]) begin
        failures++; $display("plane %0d: %h vs %h", z, rd_data, shadow[z]);
      end
    end
  endtask

  initial begin
    for (int z = 0; z < D; z++) begin
      @(negedge clk); we = 1; wr_addr = 3'(z); wr_mask = '1;
      wr_data = {$urandom, $urandom}; shadow[z] = wr_data;
    end
    @(negedge clk); we = 0;
    check_all();
    for (int n = 0; n < 20; n++) begin
      automatic int z = $urandom_range(D-1), c = $urandom_range(NCH-1);
      automatic logic [15:0] v = 16'($urandom);
      @(negedge clk); we = 1; wr_addr = 3'(z); wr_mask = '0; wr_mask[c] = 1'b1;
      wr_data = {NCH{v}}; shadow[z][c*16 +: 16] = v;
    end
    @(negedge clk); we = 0;
    check_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
