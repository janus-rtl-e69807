// sync_fifo: small synchronous first-in first-out buffer (helper).
//
// DEPTH entries of W bits, registered storage, show-ahead output: rd_data is
// the oldest entry whenever !empty, and rd pops it. A push into a full FIFO is
// dropped and flagged by an assertion; callers size the FIFO so that it cannot
// happen. Reset empties it.
module sync_fifo #(
  parameter int unsigned W     = 16,
  parameter int unsigned DEPTH = 8
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         wr,
  input  logic [W-1:0] wr_data,
  input  logic         rd,
  output logic [W-1:0] rd_data,
  output logic         empty,
  output logic         full
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [W-1:0] mem [DEPTH];
  logic [AW-1:0] wp, rp;
  logic [AW:0]   cnt;

  assign empty   = (cnt == 0);
  assign full    = (cnt == (AW+1)'(DEPTH));
  assign rd_data = mem[rp];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp  <= '0;
      rp  <= '0;
      cnt <= '0;
    end else begin
      if (wr && !full) wp <= (wp == AW'(DEPTH-1)) ? '0 : wp + 1'b1;
      if (rd && !empty) rp <= (rp == AW'(DEPTH-1)) ? '0 : rp + 1'b1;
      cnt <= cnt + (AW+1)'(wr && !full) - (AW+1)'(rd && !empty);
    end
  end

  always_ff @(posedge clk)
    if (wr && !full) mem[wp] <= wr_data;

  property p_no_overflow;
    @(posedge clk) disable iff (!rst_n) !(wr && full && !rd);
  endproperty
  a_no_overflow: assert property (p_no_overflow) else $error("sync_fifo: overflow");
endmodule
