// tb_pr_rng_bank: checks the Parisi-Rapuano bank against a software model of
// I(k) = I(k-24) + I(k-55), R(k) = I(k) ^ I(k-61), including the seed chain
// order, the slot mapping of outputs to wheels and the rate of K numbers per
// wheel per clock.
module tb_pr_rng_bank;
  localparam int unsigned N_OUT = 50;
  localparam int unsigned K     = 24;
  localparam int unsigned NWH   = (N_OUT + K - 1) / K;
  localparam int unsigned STEPS = 6;

  logic clk = 0, en = 0, seed_we = 0;
  logic [31:0] seed_data = '0;
  logic [N_OUT-1:0][31:0] rnd;
  int checks = 0, failures = 0;

  pr_rng_bank #(.N_OUT(N_OUT), .K(K)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [31:0] seq [NWH][62 + STEPS*K];

  initial begin
    for (int w = 0; w < NWH; w++)
      for (int j = 0; j < 62; j++) seq[w][j] = $urandom;
    for (int w = 0; w < NWH; w++)
      for (int k = 62; k < 62 + STEPS*K; k++) seq[w][k] = seq[w][k-24] + seq[w][k-55];
    // shift the seeds in, wheel 0 first
    for (int w = 0; w < NWH; w++)
      for (int j = 0; j < 62; j++) begin
        @(negedge clk); seed_we = 1; seed_data = seq[w][j];
      end
    @(negedge clk); seed_we = 0;
    for (int t = 0; t < STEPS; t++) begin
      @(negedge clk);
      for (int n = 0; n < N_OUT; n++) begin
        automatic int w = n / K, i = n % K;
        automatic int k = 62 + t*K + i;
        checks++;
        if (rnd[n] !== (seq[w][k] ^ seq[w][k-61])) begin
          failures++;
          if (failures < 5) $display("mismatch step %0d out %0d: %h vs %h", t, n, rnd[n], seq[w][k] ^ seq[w][k-61]);
        end
      end
      en = 1;            // one clock consumes exactly K numbers per wheel
      @(negedge clk); en = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
