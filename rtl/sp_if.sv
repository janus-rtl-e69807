// sp_if: the multidev "SPs Interface" device (device ID 4 in the IOP block
// diagram). It drives the 16 full-duplex point-to-point IOP-SP links, each
// carrying 2 bytes per clock per direction, and merges the SPs' replies into
// one stream towards the host.
//
// Downstream (this design's format): the first payload word of a worm is a
// 16-bit mask selecting SPs; every further word is sent, one clock later, on
// the link of every selected SP at once, so one worm can load the same data
// into many SPs (the paper lets the SP interface perform functions common to
// all SPs of a thread; broadcast is the one built here).
// Upstream: each link enters a FIFO of UP_DEPTH words; a round-robin arbiter
// picks one non-empty FIFO per clock and presents its word with the SP index
// on a valid/ready stream.
module sp_if
  import janus_pkg::*;
#(
  parameter int unsigned UP_DEPTH = 16
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  dev_bus_t              bus,
  output iop_word_t [N_SP-1:0]  dn,
  input  iop_word_t [N_SP-1:0]  up,
  output logic                  out_valid,
  output logic [15:0]           out_data,
  output logic [3:0]            out_sp,
  input  logic                  out_ready
);
  logic            sel;
  logic [N_SP-1:0] mask;

  assign sel = bus.dv && bus.devsel[DEV_SPS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mask <= '0;
      dn   <= '0;
    end else begin
      for (int i = 0; i < N_SP; i++) begin
        dn[i].valid <= 1'b0;
        dn[i].data  <= bus.data;
      end
      if (sel) begin
        if (bus.first) mask <= bus.data;
        else
          for (int i = 0; i < N_SP; i++) dn[i].valid <= mask[i];
      end
    end
  end

  // ---- upstream merge --------------------------------------------------------
  logic [N_SP-1:0]        f_empty, f_rd;
  logic [N_SP-1:0][15:0]  f_data;
  logic [3:0]             rr;         // next SP to be favoured
  logic [3:0]             pick;
  logic                   any;

  for (genvar i = 0; i < N_SP; i++) begin : g_fifo
    logic unused_full;
    sync_fifo #(.W(16), .DEPTH(UP_DEPTH)) u_f (
      .clk(clk), .rst_n(rst_n), .wr(up[i].valid), .wr_data(up[i].data),
      .rd(f_rd[i]), .rd_data(f_data[i]), .empty(f_empty[i]), .full(unused_full)
    );
  end

  always_comb begin
    any  = 1'b0;
    pick = rr;
    for (int k = N_SP-1; k >= 0; k--) begin
      if (!f_empty[4'(rr + 4'(k))]) begin
        any  = 1'b1;
        pick = 4'(rr + 4'(k));
      end
    end
  end

  logic take;
  assign take = any && (!out_valid || out_ready);
  always_comb begin
    f_rd = '0;
    if (take) f_rd[pick] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
      out_sp    <= '0;
      rr        <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (take) begin
        out_valid <= 1'b1;
        out_data  <= f_data[pick];
        out_sp    <= pick;
        rr        <= pick + 1'b1;
      end
    end
  end
endmodule
