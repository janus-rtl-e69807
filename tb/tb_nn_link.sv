// tb_nn_link: sends random words both ways every clock and checks that each
// arrives unchanged after exactly LAT clocks.
module tb_nn_link;
  import janus_pkg::*;
  localparam int unsigned LAT = 2;
  logic clk = 0, rst_n = 1;   // pulsed low at start to trigger the asynchronous reset
  nn_word_t a_tx, a_rx, b_tx, b_rx;
  nn_word_t hist_a [64], hist_b [64];
  int checks = 0, failures = 0;

  nn_link #(.LAT(LAT)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    a_tx = '0; b_tx = '0;
    #1 rst_n = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 64; t++) begin
      @(negedge clk);
      if (t >= LAT) begin
        checks += 2;
        if (b_rx !== hist_a[t-LAT]) failures++;
        if (a_rx !== hist_b[t-LAT]) failures++;
      end
      a_tx = {1'($urandom), 32'($urandom)};
      b_tx = {1'($urandom), 32'($urandom)};
      hist_a[t] = a_tx; hist_b[t] = b_tx;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
