// memory_if: the multidev "Memory Interface" device (device ID 0 or 3 in the
// IOP block diagram), giving the host access to the staging memory.
//
// Worm payload (this design's choice):
//   word 0   command: bit 15 = 1 read, 0 write
//   word 1   start address
//   write:   words 2 .. end are stored at consecutive addresses
//   read:    word 2 is the number of words to return
// Read data leave on a valid/ready stream towards the host. The paper does not
// say why the device has two IDs; here both select it and behave alike.
// Timing: one write per clock; a read returns one word every two clocks while
// out_ready is high. Worms arriving during a read burst are ignored.
module memory_if
  import janus_pkg::*;
#(
  parameter int unsigned AW = 16
) (
  input  logic          clk,
  input  logic          rst_n,
  input  dev_bus_t      bus,
  // staging memory port
  output logic          m_en,
  output logic          m_we,
  output logic [AW-1:0] m_addr,
  output logic [15:0]   m_wdata,
  input  logic [15:0]   m_rdata,
  // read data towards the host
  output logic          out_valid,
  output logic [15:0]   out_data,
  input  logic          out_ready
);
  typedef enum logic [2:0] {M_CMD, M_ADDR, M_WR, M_CNT, M_SKIP, M_RD, M_RDW, M_OUT} mstate_e;

  mstate_e      st;
  logic         sel;
  logic [AW-1:0] addr;
  logic [15:0]  cnt;

  assign sel = bus.dv && (bus.devsel[DEV_MEM0] || bus.devsel[DEV_MEM3]);

  always_comb begin
    m_en    = 1'b0;
    m_we    = 1'b0;
    m_addr  = addr;
    m_wdata = bus.data;
    if (st == M_WR && sel) begin
      m_en = 1'b1;
      m_we = 1'b1;
    end else if (st == M_RD) begin
      m_en = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st        <= M_CMD;
      addr      <= '0;
      cnt       <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      unique case (st)
        M_CMD:  if (sel && bus.first && !bus.last) begin
          cnt[15] <= bus.data[15];       // remember read / write
          st      <= M_ADDR;
        end
        M_ADDR: if (sel) begin
          addr <= bus.data[AW-1:0];
          if (bus.last)      st <= M_CMD;
          else if (cnt[15])  st <= M_CNT;
          else               st <= M_WR;
        end
        M_WR:   if (sel) begin
          addr <= addr + 1'b1;
          if (bus.last) st <= M_CMD;
        end
        M_CNT:  if (sel) begin
          cnt <= bus.data;
          if (bus.data == 0) st <= bus.last ? M_CMD : M_SKIP;
          else               st <= bus.last ? M_RD  : M_SKIP;
        end
        M_SKIP: if (sel && bus.last) st <= (cnt == 0) ? M_CMD : M_RD;
        M_RD:   st <= M_RDW;
        M_RDW: begin
          out_valid <= 1'b1;
          out_data  <= m_rdata;
          st        <= M_OUT;
        end
        M_OUT:  if (out_ready) begin
          out_valid <= 1'b0;
          addr      <= addr + 1'b1;
          cnt       <= cnt - 1;
          st        <= (cnt == 16'd1) ? M_CMD : M_RD;
        end
        default: st <= M_CMD;
      endcase
    end
  end
endmodule
