// staging_mem: the IOP's bank of staging memory, modelled as a single-port
// synchronous RAM of 2^AW 16-bit words. The paper states only that such a
// bank exists; its size and organisation are this design's assumptions.
// Timing: rdata holds the word at addr one clock after en with !we; a write
// (en && we) stores wdata. Not reset.
module staging_mem #(
  parameter int unsigned AW = 16
) (
  input  logic          clk,
  input  logic          en,
  input  logic          we,
  input  logic [AW-1:0] addr,
  input  logic [15:0]   wdata,
  output logic [15:0]   rdata
);
  logic [15:0] mem [2**AW];

  always_ff @(posedge clk)
    if (en) begin
      if (we) mem[addr] <= wdata;
      else    rdata     <= mem[addr];
    end
endmodule
