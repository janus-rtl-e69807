// potts_engine: the SP configured for Metropolis simulation of the 3D
// disordered 4-state Potts model, updating one whole lattice plane per clock.
//
// It is the Ising engine (see ising_engine) with 2-bit spins. As in the paper,
// each mixed replica needs one memory structure per spin bit, so there are
// four spin structures (M0 bit 0, M0 bit 1, M1 bit 0, M1 bit 1) and three
// coupling structures (Jx, Jy, Jz, one bit each: J = +-1). The mixed-replica
// layout, the plane window (z-1, z, z+1), the periodic boundaries and the
// timing are those of ising_engine: LZ+3 clocks per half-sweep, 2*(LZ+3) per
// sweep. Each cell takes two random numbers per plane: one gives the
// proposed new value (its two top bits), the other is compared with the
// 13-entry probability table indexed by dE+6. The table is shared by two cells.
// Host targets: 0 M0.b0, 1 M0.b1, 2 M1.b0, 3 M1.b1, 4 Jx, 5 Jy, 6 Jz.
module potts_engine
  import janus_pkg::*;
#(
  parameter int unsigned LX = 32,
  parameter int unsigned LY = 16,
  parameter int unsigned LZ = 32,
  parameter int unsigned RNG_K = 24
) (
  input  logic        clk,
  input  logic        rst_n,
  // host access to the memory structures
  input  logic        h_we,
  input  logic        h_re,
  input  logic [2:0]  h_tgt,
  input  logic [15:0] h_z,
  input  logic [15:0] h_chunk,
  input  logic [15:0] h_wdata,
  output logic [15:0] h_rdata,
  output logic        h_rvalid,
  // probability table and random generator set-up
  input  logic        lut_we,
  input  logic [3:0]  lut_idx,
  input  logic [31:0] lut_data,
  input  logic        seed_we,
  input  logic [31:0] seed_data,
  // run control
  input  logic        start,
  input  logic [15:0] n_sweeps,
  output logic        busy,
  output logic [15:0] sweeps_done,
  output logic [31:0] cycles
);
  localparam int unsigned NS  = LX * LY;
  localparam int unsigned NCH = NS / 16;
  localparam int unsigned ZW  = (LZ > 1) ? $clog2(LZ) : 1;
  localparam logic [ZW-1:0] ZLAST = ZW'(LZ - 1);

  typedef enum logic [2:0] {S_IDLE, S_PRE0, S_PRE1, S_RUN, S_DRAIN} state_e;
  typedef enum logic [1:0] {PH_NONE, PH_PRE0, PH_PRE1, PH_COMP} phase_e;

  state_e       state;
  phase_e       phase;      // what the read ports return this clock
  logic         r;          // mixed replica being updated
  logic [ZW-1:0] iz;        // plane whose reads are issued
  logic [ZW-1:0] cz;        // plane computed this clock
  logic [15:0]  sweeps_left;

  // ---- memories: 0/1 M0 bits, 2/3 M1 bits, 4 Jx, 5 Jy, 6 Jz ---------------
  logic [6:0]          m_re, m_we;
  logic [6:0][ZW-1:0]  m_raddr;
  logic [ZW-1:0]       m_waddr;
  logic [NCH-1:0]      m_wmask;
  logic [1:0][NS-1:0]  m_wdata;      // bit 0 and bit 1 planes
  logic [6:0][NS-1:0]  m_rdata;

  for (genvar g = 0; g < 7; g++) begin : g_mem
    bit_plane_mem #(.W(NS), .D(LZ)) u_mem (
      .clk(clk), .rd_en(m_re[g]), .rd_addr(m_raddr[g]), .rd_data(m_rdata[g]),
      .we(m_we[g]), .wr_addr(m_waddr), .wr_mask(m_wmask), .wr_data(m_wdata[g % 2])
    );
  end

  // memory index of bit b of mixed replica q
  function automatic logic [2:0] mi(logic q, logic b);
    return {1'b0, q, b};
  endfunction

  // ---- window of neighbour planes and Jz of the previous plane ------------
  logic [1:0][NS-1:0] win_m1, win_0, nb_p1, u_pl, u_new;
  logic [NS-1:0]      jz_m1, jx_pl, jy_pl, jz_pl;

  assign nb_p1 = r ? {m_rdata[1], m_rdata[0]} : {m_rdata[3], m_rdata[2]};
  assign u_pl  = r ? {m_rdata[3], m_rdata[2]} : {m_rdata[1], m_rdata[0]};
  assign jx_pl = m_rdata[4];
  assign jy_pl = m_rdata[5];
  assign jz_pl = m_rdata[6];

  // ---- random numbers and update cells -------------------------------------
  logic [2*NS-1:0][31:0] rnd;
  logic                  comp;
  assign comp = (phase == PH_COMP);

  pr_rng_bank #(.N_OUT(2*NS), .K(RNG_K)) u_rng (
    .clk(clk), .en(comp), .seed_we(seed_we && state == S_IDLE),
    .seed_data(seed_data), .rnd(rnd)
  );

  logic [NS-1:0][3:0]  c_idx;
  logic [NS-1:0][31:0] c_val;

  for (genvar p = 0; p < NS/2; p++) begin : g_lut
    prob_lut #(.N(13), .AW(4)) u_lut (
      .clk(clk), .we(lut_we && state == S_IDLE), .waddr(lut_idx), .wdata(lut_data),
      .addr_a(c_idx[2*p]),   .data_a(c_val[2*p]),
      .addr_b(c_idx[2*p+1]), .data_b(c_val[2*p+1])
    );
  end

  for (genvar y = 0; y < LY; y++) begin : g_y
    for (genvar x = 0; x < LX; x++) begin : g_x
      localparam int unsigned I   = y*LX + x;
      localparam int unsigned IXP = y*LX + (x+1) % LX;
      localparam int unsigned IXM = y*LX + (x+LX-1) % LX;
      localparam int unsigned IYP = ((y+1) % LY)*LX + x;
      localparam int unsigned IYM = ((y+LY-1) % LY)*LX + x;
      logic [1:0] s_new;
      potts_update_cell u_cell (
        .s      ({u_pl[1][I], u_pl[0][I]}),
        .nb     ({win_0[1][IXP], win_0[0][IXP], win_0[1][IXM], win_0[0][IXM],
                  win_0[1][IYP], win_0[0][IYP], win_0[1][IYM], win_0[0][IYM],
                  nb_p1[1][I],   nb_p1[0][I],   win_m1[1][I],  win_m1[0][I]}),
        .j      ({jx_pl[I], jx_pl[IXM], jy_pl[I], jy_pl[IYM], jz_pl[I], jz_m1[I]}),
        .s_try  (rnd[NS+I][31:30]),
        .rnd    (rnd[I]),
        .lut_idx(c_idx[I]),
        .lut_val(c_val[I]),
        .s_new  (s_new)
      );
      assign u_new[0][I] = s_new[0];
      assign u_new[1][I] = s_new[1];
    end
  end

  // ---- memory port control -------------------------------------------------
  logic [ZW-1:0] iz_next;
  assign iz_next = (iz == ZLAST) ? '0 : iz + 1'b1;

  always_comb begin
    m_re    = '0;
    m_we    = '0;
    m_raddr = '0;
    m_waddr = h_z[ZW-1:0];
    m_wmask = '0;
    m_wdata = '0;
    unique case (state)
      S_IDLE: begin
        for (int g = 0; g < 7; g++) begin
          m_raddr[g] = h_z[ZW-1:0];
          m_re[g]    = h_re && (h_tgt == 3'(g));
          m_we[g]    = h_we && (h_tgt == 3'(g));
        end
        for (int c = 0; c < NCH; c++) begin
          m_wmask[c] = (h_chunk == 16'(c));
          m_wdata[0][c*16 +: 16] = h_wdata;
          m_wdata[1][c*16 +: 16] = h_wdata;
        end
      end
      S_PRE0: begin
        for (int b = 0; b < 2; b++) begin
          m_re[mi(~r, b[0])] = 1'b1;  m_raddr[mi(~r, b[0])] = ZLAST;
        end
        m_re[6] = 1'b1;  m_raddr[6] = ZLAST;
      end
      S_PRE1: begin
        for (int b = 0; b < 2; b++) begin
          m_re[mi(~r, b[0])] = 1'b1;  m_raddr[mi(~r, b[0])] = '0;
        end
      end
      S_RUN: begin
        m_re = '1;
        for (int b = 0; b < 2; b++) begin
          m_raddr[mi(~r, b[0])] = iz_next;
          m_raddr[mi(r, b[0])]  = iz;
        end
        m_raddr[4] = iz;  m_raddr[5] = iz;  m_raddr[6] = iz;
      end
      default: ;
    endcase
    if (comp) begin
      m_we[mi(r, 1'b0)] = 1'b1;
      m_we[mi(r, 1'b1)] = 1'b1;
      m_waddr = cz;
      m_wmask = '1;
      m_wdata = u_new;
    end
  end

  // ---- control -------------------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      phase       <= PH_NONE;
      r           <= 1'b0;
      iz          <= '0;
      cz          <= '0;
      sweeps_left <= '0;
      sweeps_done <= '0;
      cycles      <= '0;
    end else begin
      phase <= PH_NONE;
      if (state != S_IDLE) cycles <= cycles + 1;
      unique case (state)
        S_IDLE: if (start && n_sweeps != 0) begin
          state       <= S_PRE0;
          r           <= 1'b0;
          sweeps_left <= n_sweeps;
          sweeps_done <= '0;
          cycles      <= '0;
        end
        S_PRE0: begin state <= S_PRE1; phase <= PH_PRE0; end
        S_PRE1: begin state <= S_RUN;  phase <= PH_PRE1; iz <= '0; end
        S_RUN: begin
          phase <= PH_COMP;
          cz    <= iz;
          iz    <= iz_next;
          if (iz == ZLAST) state <= S_DRAIN;
        end
        S_DRAIN: begin
          // last plane is computed this clock; start the next half-sweep
          r <= ~r;
          if (r) begin
            sweeps_done <= sweeps_done + 1;
            sweeps_left <= sweeps_left - 1;
            state <= (sweeps_left == 16'd1) ? S_IDLE : S_PRE0;
          end else begin
            state <= S_PRE0;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // window registers (no reset needed: always filled by the prologue)
  always_ff @(posedge clk) begin
    unique case (phase)
      PH_PRE0: begin win_0 <= nb_p1; jz_m1 <= jz_pl; end
      PH_PRE1: begin win_m1 <= win_0; win_0 <= nb_p1; end
      PH_COMP: begin win_m1 <= win_0; win_0 <= nb_p1; jz_m1 <= jz_pl; end
      default: ;
    endcase
  end

  // ---- host read-back --------------------------------------------------------
  logic [2:0]  hr_tgt;
  logic [15:0] hr_chunk;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      h_rvalid <= 1'b0;
      hr_tgt   <= '0;
      hr_chunk <= '0;
    end else begin
      h_rvalid <= h_re && state == S_IDLE;
      hr_tgt   <= h_tgt;
      hr_chunk <= h_chunk;
    end
  end
  always_comb begin
    h_rdata = '0;
    for (int g = 0; g < 7; g++)
      for (int c = 0; c < NCH; c++)
        if (hr_tgt == 3'(g) && hr_chunk == 16'(c)) h_rdata = m_rdata[g][c*16 +: 16];
  end

  assign busy = (state != S_IDLE);

  initial begin
    assert (NS % 16 == 0) else $error("ising_engine: LX*LY must be a multiple of 16");
    assert (LX % 2 == 0 && LY % 2 == 0 && LZ % 2 == 0)
      else $error("ising_engine: periodic checkerboard needs even sides");
  end
endmodule
