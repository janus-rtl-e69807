// nn_link: one full-duplex nearest-neighbour link between two SPs, carrying
// 4 bytes per clock in each direction. The paper gives the link a latency of
// "one or two clock cycles"; this model registers the word once on each side
// of the board trace (sender output and receiver input), LAT = 2 clocks by
// default. Words are never dropped or reordered; flow control is left to the
// application, as in the paper.
module nn_link
  import janus_pkg::*;
#(
  parameter int unsigned LAT = 2
) (
  input  logic     clk,
  input  logic     rst_n,
  input  nn_word_t a_tx,
  output nn_word_t a_rx,
  input  nn_word_t b_tx,
  output nn_word_t b_rx
);
  nn_word_t ab [LAT];
  nn_word_t ba [LAT];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < LAT; i++) begin
        ab[i] <= '0;
        ba[i] <= '0;
      end
    end else begin
      ab[0] <= a_tx;
      ba[0] <= b_tx;
      for (int i = 1; i < LAT; i++) begin
        ab[i] <= ab[i-1];
        ba[i] <= ba[i-1];
      end
    end
  end

  assign b_rx = ab[LAT-1];
  assign a_rx = ba[LAT-1];

  initial assert (LAT >= 1) else $error("nn_link: LAT must be at least 1");
endmodule
