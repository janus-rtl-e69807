// prob_lut: table of transition probabilities, stored as 32-bit integers so
// they compare directly with 32-bit random numbers.
//
// As in the paper, it is a small distributed RAM with two read ports, so one
// table serves two update cells; the engine holds one copy per pair of cells
// and the host writes all copies at once. N entries (7 for the Ising model:
// the index is a count of bonds, 0..6).
// Interface: asynchronous reads on ports a and b; synchronous write. Not reset.
module prob_lut #(
  parameter int unsigned N  = 7,
  parameter int unsigned AW = 3
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [31:0]   wdata,
  input  logic [AW-1:0] addr_a,
  output logic [31:0]   data_a,
  input  logic [AW-1:0] addr_b,
  output logic [31:0]   data_b
);
  logic [31:0] tab [N];

  always_ff @(posedge clk)
    if (we && waddr < AW'(N)) tab[waddr] <= wdata;

  assign data_a = (addr_a < AW'(N)) ? tab[addr_a] : '0;
  assign data_b = (addr_b < AW'(N)) ? tab[addr_b] : '0;
endmodule
