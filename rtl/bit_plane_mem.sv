// bit_plane_mem: one "memory structure" of the SP: a 3D matrix of one-bit
// variables built, as in the paper, from stacked block RAMs addressed in
// parallel. Coordinate z is the address, and one word holds a whole (x,y)
// plane (bit y*LX+x), so one access moves an entire plane.
//
// Like a block RAM it has one synchronous read port and one write port per
// clock (the paper's "two I/O operations per Block RAM per clock"). Writes
// carry a mask of 16-bit chunks so the host can update a plane 16 bits at a
// time through the 2-byte IOP link, while the update engine writes whole
// planes with all chunk enables set.
// Timing: rd_data holds the word at rd_addr one clock after rd_en. Contents
// are not reset.
module bit_plane_mem #(
  parameter int unsigned W     = 1024,  // bits per plane (LX*LY)
  parameter int unsigned D     = 32,    // planes (LZ)
  parameter int unsigned CHUNK = 16
) (
  input  logic                    clk,
  input  logic                    rd_en,
  input  logic [$clog2(D)-1:0]    rd_addr,
  output logic [W-1:0]            rd_data,
  input  logic                    we,
  input  logic [$clog2(D)-1:0]    wr_addr,
  input  logic [W/CHUNK-1:0]      wr_mask,
  input  logic [W-1:0]            wr_data
);
  logic [W-1:0] mem [D];

  always_ff @(posedge clk) begin
    if (rd_en) rd_data <= mem[rd_addr];
    if (we) begin
      for (int unsigned c = 0; c < W/CHUNK; c++)
        if (wr_mask[c]) mem[wr_addr][c*CHUNK +: CHUNK] <= wr_data[c*CHUNK +: CHUNK];
    end
  end

  initial assert (W % CHUNK == 0) else $error("bit_plane_mem: W must be a multiple of CHUNK");
endmodule
