// stream_router: the IOP's Stream Router. It takes the word stream that the
// IOlink delivers from the host (dv, dataIn) and forwards each "data-worm" to
// the multidev devices selected by a mask carried in the worm, on the shared
// device bus (devSel, dv, dataIn) of the IOP block diagram.
//
// Worm format (this design's choice; the paper only says that a mask is
// encoded in the stream and that the worm is not interpreted by the IOP):
//   word 0   header: [7:0] device mask, bit i selects device ID i
//   word 1   payload length N in words
//   words 2 .. N+1   payload, forwarded unchanged
// A worm with N = 0 or an empty mask forwards nothing. The payload comes out
// one clock after it enters, with devsel held for the whole worm and first /
// last marking its ends, so a device needs no length counter of its own.
module stream_router
  import janus_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_dv,
  input  logic [15:0] in_data,
  output dev_bus_t    bus,
  output logic [15:0] worms        // worms forwarded so far
);
  typedef enum logic [1:0] {R_HDR, R_LEN, R_PAY} rstate_e;

  rstate_e          st;
  logic [N_DEV-1:0] mask;
  logic [15:0]      left;
  logic             first;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st    <= R_HDR;
      mask  <= '0;
      left  <= '0;
      first <= 1'b0;
      bus   <= '0;
      worms <= '0;
    end else begin
      bus.dv    <= 1'b0;
      bus.first <= 1'b0;
      bus.last  <= 1'b0;
      if (in_dv) begin
        unique case (st)
          R_HDR: begin
            mask <= in_data[N_DEV-1:0];
            st   <= R_LEN;
          end
          R_LEN: begin
            left  <= in_data;
            first <= 1'b1;
            st    <= (in_data == 0) ? R_HDR : R_PAY;
            if (in_data != 0 && mask != 0) worms <= worms + 1;
          end
          R_PAY: begin
            bus.devsel <= mask;
            bus.data   <= in_data;
            bus.dv     <= (mask != 0);
            bus.first  <= first;
            bus.last   <= (left == 16'd1);
            first      <= 1'b0;
            left       <= left - 1;
            if (left == 16'd1) st <= R_HDR;
          end
          default: st <= R_HDR;
        endcase
      end
    end
  end
endmodule
