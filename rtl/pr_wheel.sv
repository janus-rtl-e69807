// pr_wheel: one Parisi-Rapuano shift-register random number generator that
// delivers K 32-bit numbers per clock.
//
// The generator keeps the last 62 values of the sequence
//     I(k) = I(k-24) + I(k-55)   (mod 2^32)
// and returns R(k) = I(k) xor I(k-61). The recurrence is the standard
// Parisi-Rapuano one (the paper names the generator; the taps 24, 55 and 61
// are the published ones). Because the shortest tap is 24, up to 24 new values
// depend only on values already held, so K <= 24 numbers come out of one add
// and one xor each, with no carry chain between them.
//
// Interface: rnd shows the next K numbers combinationally from the state;
// asserting en consumes them (the state advances by K). seed_we shifts
// seed_in into the newest slot and moves every word one slot older; the
// oldest word leaves on seed_out, so wheels can be chained for seeding.
// Timing: one clock per K numbers. No reset: the state is loaded by seeding.
module pr_wheel #(
  parameter int unsigned K = 24
) (
  input  logic               clk,
  input  logic               en,
  input  logic               seed_we,
  input  logic [31:0]        seed_in,
  output logic [31:0]        seed_out,
  output logic [K-1:0][31:0] rnd
);
  localparam int unsigned NW = 62;

  // w[j] = I(n-62+j): w[61] is the newest value, w[0] the oldest.
  logic [NW-1:0][31:0] w;
  logic [K-1:0][31:0]  inew;

  always_comb begin
    for (int unsigned i = 0; i < K; i++) begin
      inew[i] = w[38+i] + w[7+i];     // I(n+i) = I(n+i-24) + I(n+i-55)
      rnd[i]  = inew[i] ^ w[1+i];     // R(n+i) = I(n+i) ^ I(n+i-61)
    end
  end

  assign seed_out = w[0];

  always_ff @(posedge clk) begin
    if (seed_we) begin
      for (int unsigned j = 0; j < NW-1; j++) w[j] <= w[j+1];
      w[NW-1] <= seed_in;
    end else if (en) begin
      for (int unsigned j = 0; j < NW-K; j++) w[j] <= w[j+K];
      for (int unsigned i = 0; i < K; i++) w[NW-K+i] <= inew[i];
    end
  end

  initial assert (K >= 1 && K <= 24) else $error("pr_wheel: K must be 1..24");
endmodule
