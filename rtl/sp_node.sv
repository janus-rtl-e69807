// sp_node: one JANUS processing element (SP) configured for spin-model
// simulation. Parameter FW picks the firmware the FPGA is loaded with: the 3D
// Ising spin-glass engine (ising_engine, Metropolis or heat bath) or the 3D
// disordered 4-state Potts engine (potts_engine). The SP wraps the engine with
// the two kinds of links the paper gives an SP: a full-duplex 2-byte point-to-point link to the IOP and four
// full-duplex 4-byte links to its nearest neighbours.
//
// The SP works as a memory-based coprocessor (the paper's software model):
// the host loads couplings, spins, the probability table and the generator
// seeds into the on-chip memories, starts a run, polls for its end and reads
// the results back. The command set on the IOP link is this design's own
// (janus_pkg::sp_op_e): a header word [15:12] opcode, [11:0] operand, then a
// fixed number of argument words. Replies go back on the uplink through an
// 8-word FIFO. The neighbour links are used as simple mailboxes: SP_NN_SEND
// puts one 32-bit word on a link, and the last word received from each
// direction can be read with SP_NN_READ. How the paper's applications share
// data across the links is not given, so no more is built on them.
// Commands that touch the engine are ignored while it runs.
module sp_node
  import janus_pkg::*;
#(
  parameter fw_e         FW = FW_ISING,  // firmware loaded into this SP
  parameter int unsigned LX = 32,
  parameter int unsigned LY = 32,
  parameter int unsigned LZ = 32
) (
  input  logic           clk,
  input  logic           rst_n,
  input  iop_word_t      dn,          // from the IOP
  output iop_word_t      up,          // to the IOP
  input  nn_word_t [3:0] nn_in,       // from the neighbours, indexed by dir_e
  output nn_word_t [3:0] nn_out       // to the neighbours
);
  // ---- command decoder -------------------------------------------------------
  // Words are accepted on every clock. When the last word of a command has
  // arrived, the command is copied into the ex_* registers and executes on the
  // next clock (exec), while the decoder already takes the next header.
  logic         in_args;
  logic [15:0]  hdr;
  logic [1:0][15:0] args;       // arguments collected so far
  logic [1:0]   n_args, got;
  logic         exec;
  logic [15:0]  ex_hdr;
  logic [2:0][15:0] ex_args;
  sp_op_e       op;

  assign op = sp_op_e'(ex_hdr[15:12]);

  function automatic logic [1:0] args_of(logic [3:0] o);
    unique case (sp_op_e'(o))
      SP_WR16:                       return 2'd3;
      SP_RD16, SP_WR_LUT, SP_SEED,
      SP_NN_SEND:                    return 2'd2;
      SP_RUN:                        return 2'd1;
      default:                       return 2'd0;
    endcase
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_args <= 1'b0;
      hdr     <= '0;
      args    <= '0;
      n_args  <= '0;
      got     <= '0;
      exec    <= 1'b0;
      ex_hdr  <= '0;
      ex_args <= '0;
    end else begin
      exec <= 1'b0;
      if (dn.valid) begin
        if (!in_args) begin
          hdr    <= dn.data;
          n_args <= args_of(dn.data[15:12]);
          got    <= '0;
          if (args_of(dn.data[15:12]) == 0) begin
            exec   <= (dn.data[15:12] != SP_NOP);
            ex_hdr <= dn.data;
          end else begin
            in_args <= 1'b1;
          end
        end else if (got + 1'b1 == n_args) begin
          in_args <= 1'b0;
          exec    <= 1'b1;
          ex_hdr  <= hdr;
          ex_args <= {16'h0, args};
          ex_args[got] <= dn.data;
        end else begin
          args[got[0]] <= dn.data;
          got          <= got + 1'b1;
        end
      end
    end
  end

  // ---- engine ---------------------------------------------------------------
  logic        e_busy, h_rvalid;
  logic [15:0] h_rdata, sweeps_done;
  logic [31:0] cycles;

  if (FW == FW_POTTS) begin : g_potts
    potts_engine #(.LX(LX), .LY(LY), .LZ(LZ)) u_eng (
      .clk(clk), .rst_n(rst_n),
      .h_we     (exec && op == SP_WR16),
      .h_re     (exec && op == SP_RD16),
      .h_tgt    (ex_hdr[2:0]),
      .h_z      (ex_args[0]),
      .h_chunk  (ex_args[1]),
      .h_wdata  (ex_args[2]),
      .h_rdata  (h_rdata),
      .h_rvalid (h_rvalid),
      .lut_we   (exec && op == SP_WR_LUT),
      .lut_idx  (ex_hdr[3:0]),
      .lut_data ({ex_args[0], ex_args[1]}),
      .seed_we  (exec && op == SP_SEED),
      .seed_data({ex_args[0], ex_args[1]}),
      .start    (exec && op == SP_RUN),
      .n_sweeps (ex_args[0]),
      .busy     (e_busy),
      .sweeps_done(sweeps_done),
      .cycles   (cycles)
    );
  end else begin : g_ising
    ising_engine #(.LX(LX), .LY(LY), .LZ(LZ)) u_eng (
      .clk(clk), .rst_n(rst_n),
      .h_we     (exec && op == SP_WR16),
      .h_re     (exec && op == SP_RD16),
      .h_tgt    (ex_hdr[2:0]),
      .h_z      (ex_args[0]),
      .h_chunk  (ex_args[1]),
      .h_wdata  (ex_args[2]),
      .h_rdata  (h_rdata),
      .h_rvalid (h_rvalid),
      .lut_we   (exec && op == SP_WR_LUT),
      .lut_idx  (ex_hdr[2:0]),
      .lut_data ({ex_args[0], ex_args[1]}),
      .seed_we  (exec && op == SP_SEED),
      .seed_data({ex_args[0], ex_args[1]}),
      .start    (exec && op == SP_RUN),
      .alg      (alg_e'(ex_hdr[0])),
      .n_sweeps (ex_args[0]),
      .busy     (e_busy),
      .sweeps_done(sweeps_done),
      .cycles   (cycles)
    );
  end

  // ---- neighbour mailboxes ---------------------------------------------------
  logic [3:0][31:0] nn_rx;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      nn_rx  <= '0;
      nn_out <= '0;
    end else begin
      for (int d = 0; d < 4; d++) begin
        if (nn_in[d].valid) nn_rx[d] <= nn_in[d].data;
        nn_out[d].valid <= exec && op == SP_NN_SEND && ex_hdr[1:0] == 2'(d);
        nn_out[d].data  <= {ex_args[0], ex_args[1]};
      end
    end
  end

  // ---- replies ---------------------------------------------------------------
  // Every reply enters the FIFO one clock after its command executes, as one
  // entry {two_words, hi, lo}; the output side sends hi (and lo) in order.
  logic        rq_wr;
  logic [32:0] rq_data;
  logic        f_empty, f_full, f_rd;
  logic [32:0] f_rdata;
  logic        lo_pending;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rq_wr   <= 1'b0;
      rq_data <= '0;
    end else begin
      rq_wr <= exec && (op == SP_STATUS || op == SP_NN_READ);
      if (op == SP_STATUS) rq_data <= {1'b1, e_busy, sweeps_done[14:0], cycles[15:0]};
      else                 rq_data <= {1'b1, nn_rx[ex_hdr[1:0]]};
    end
  end

  sync_fifo #(.W(33), .DEPTH(8)) u_reply (
    .clk(clk), .rst_n(rst_n),
    .wr(h_rvalid || rq_wr),
    .wr_data(h_rvalid ? {1'b0, h_rdata, 16'h0} : rq_data),
    .rd(f_rd), .rd_data(f_rdata), .empty(f_empty), .full(f_full)
  );

  assign f_rd = !f_empty && (!f_rdata[32] || lo_pending);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      up         <= '0;
      lo_pending <= 1'b0;
    end else begin
      up.valid <= !f_empty;
      up.data  <= lo_pending ? f_rdata[15:0] : f_rdata[31:16];
      if (!f_empty && f_rdata[32]) lo_pending <= ~lo_pending;
    end
  end

  // A memory read and a status/mailbox read never reply on the same clock.
  a_one_reply: assert property (@(posedge clk) disable iff (!rst_n) !(h_rvalid && rq_wr))
    else $error("sp_node: reply collision");
endmodule
