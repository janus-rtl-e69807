// janus_core: one JANUS core, the computational part of a JANUS module: an
// IOP and a 4 x 4 grid of SPs with nearest-neighbour links along both axes and
// periodic boundary conditions (a torus), configured for Monte Carlo
// simulation of spin models.
//
// Each SP is an FPGA that can carry its own firmware. The default
// configuration loads the 3D Ising spin-glass engine into SPs 0..11 and the
// 3D disordered 4-state Potts engine into SPs 12..15 (the bottom row, set by
// POTTS_SPS); the paper runs up to 16 independent tasks on one core, and this
// mix is only this design's example of that.
//
// SP (x,y) is sp index y*4+x. Its +x link goes to ((x+1)%4, y) and its +y link
// to (x, (y+1)%4), through nn_link (4 bytes per clock each way). Every SP also
// has its own 2-byte full-duplex link to the IOP. The host side is outside:
// the IOlink (gigabit ethernet) hands the host's word stream to in_dv/in_data
// and takes the return stream tx_* (valid/ready); the device bus for the
// program, sync and temperature devices leaves on dev_bus. Parameters LX, LY,
// LZ set the lattice held by each Ising SP (32 x 32 x 32 by default: 1024
// update cells, one plane per clock) and PLX, PLY, PLZ that of each Potts SP
// (32 x 16 x 32: 512 update cells).
module janus_core
  import janus_pkg::*;
#(
  parameter int unsigned LX       = 32,       // Ising SPs: lattice per SP
  parameter int unsigned LY       = 32,
  parameter int unsigned LZ       = 32,
  parameter logic [15:0] POTTS_SPS = 16'hF000, // SPs loaded with the Potts firmware
  parameter int unsigned PLX      = 32,       // Potts SPs: lattice per SP
  parameter int unsigned PLY      = 16,
  parameter int unsigned PLZ      = 32,
  parameter int unsigned STAGE_AW = 16,
  parameter int unsigned NN_LAT   = 2
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_dv,
  input  logic [15:0] in_data,
  output logic        tx_valid,
  output logic [15:0] tx_data,
  output logic [2:0]  tx_dev,
  output logic [3:0]  tx_sp,
  input  logic        tx_ready,
  output dev_bus_t    dev_bus
);
  iop_word_t [N_SP-1:0]      sp_dn, sp_up;
  nn_word_t  [N_SP-1:0][3:0] nn_tx, nn_rx;

  iop #(.STAGE_AW(STAGE_AW)) u_iop (
    .clk(clk), .rst_n(rst_n), .in_dv(in_dv), .in_data(in_data),
    .tx_valid(tx_valid), .tx_data(tx_data), .tx_dev(tx_dev), .tx_sp(tx_sp),
    .tx_ready(tx_ready), .dev_bus(dev_bus), .sp_dn(sp_dn), .sp_up(sp_up)
  );

  for (genvar y = 0; y < GRID_Y; y++) begin : g_row
    for (genvar x = 0; x < GRID_X; x++) begin : g_col
      localparam int unsigned S  = y*GRID_X + x;
      localparam int unsigned SX = y*GRID_X + (x+1) % GRID_X;   // +x neighbour
      localparam int unsigned SY = ((y+1) % GRID_Y)*GRID_X + x; // +y neighbour

      sp_node #(
        .FW(POTTS_SPS[S] ? FW_POTTS : FW_ISING),
        .LX(POTTS_SPS[S] ? PLX : LX), .LY(POTTS_SPS[S] ? PLY : LY), .LZ(POTTS_SPS[S] ? PLZ : LZ)
      ) u_sp (
        .clk(clk), .rst_n(rst_n), .dn(sp_dn[S]), .up(sp_up[S]),
        .nn_in(nn_rx[S]), .nn_out(nn_tx[S])
      );

      nn_link #(.LAT(NN_LAT)) u_xlink (
        .clk(clk), .rst_n(rst_n),
        .a_tx(nn_tx[S][DIR_XP]),  .a_rx(nn_rx[S][DIR_XP]),
        .b_tx(nn_tx[SX][DIR_XM]), .b_rx(nn_rx[SX][DIR_XM])
      );
      nn_link #(.LAT(NN_LAT)) u_ylink (
        .clk(clk), .rst_n(rst_n),
        .a_tx(nn_tx[S][DIR_YP]),  .a_rx(nn_rx[S][DIR_YP]),
        .b_tx(nn_tx[SY][DIR_YM]), .b_rx(nn_rx[SY][DIR_YM])
      );
    end
  end
endmodule
