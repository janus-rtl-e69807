// pr_rng_bank: a bank of Parisi-Rapuano wheels giving N_OUT independent 32-bit
// random numbers per clock, one for every update cell of the Ising engine.
//
// The paper states that the SP generates hundreds of 32-bit Parisi-Rapuano
// numbers per clock; how is published elsewhere. This design's choice is the
// simplest one that reaches the rate: ceil(N_OUT/K) wheels (see pr_wheel), each
// producing K numbers per clock. Output n comes from wheel n/K, slot n%K.
//
// Seeding: the 62-word states of all wheels form one shift chain. Each
// seed_we clock shifts seed_data into the newest slot of the last wheel; the
// oldest word of wheel w moves into wheel w-1. After 62*N_WHEEL writes
// s_0 ... s_{M-1}, wheel w holds s_{62w} (oldest) ... s_{62w+61} (newest).
// Timing: rnd is valid from the state; en advances every wheel by K numbers.
module pr_rng_bank #(
  parameter int unsigned N_OUT = 1024,
  parameter int unsigned K     = 24
) (
  input  logic                   clk,
  input  logic                   en,
  input  logic                   seed_we,
  input  logic [31:0]            seed_data,
  output logic [N_OUT-1:0][31:0] rnd
);
  localparam int unsigned N_WHEEL = (N_OUT + K - 1) / K;

  logic [N_WHEEL:0][31:0]         chain;
  logic [N_WHEEL-1:0][K-1:0][31:0] wout;

  assign chain[N_WHEEL] = seed_data;

  for (genvar g = 0; g < N_WHEEL; g++) begin : g_wheel
    pr_wheel #(.K(K)) u_wheel (
      .clk     (clk),
      .en      (en),
      .seed_we (seed_we),
      .seed_in (chain[g+1]),
      .seed_out(chain[g]),
      .rnd     (wout[g])
    );
  end

  for (genvar n = 0; n < N_OUT; n++) begin : g_out
    assign rnd[n] = wout[n/K][n%K];
  end
endmodule
