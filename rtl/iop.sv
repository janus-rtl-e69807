// iop: firmware of the JANUS I/O processor. It sits between the host link
// (IOlink, outside this RTL) and the 16 SPs and, as in the paper, streams
// data from the host to the selected device and back under the host's control
// without interpreting it.
//
// Structure (from the IOP block diagram): the stream_router decodes the worm
// header and drives the shared device bus (devSel, dv, dataIn); the multidev
// devices listen on it. Built here are the Memory Interface (memory_if with
// the staging_mem bank) and the SPs Interface (sp_if). The Program, Sync and
// Temperature interfaces are not built; the device bus leaves the IOP on
// dev_bus so they can be attached. The return stream towards the host merges
// the memory and SP replies with round-robin priority and tags each word with
// its source device ID and, for SP words, the SP index.
module iop
  import janus_pkg::*;
#(
  parameter int unsigned STAGE_AW = 16
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // from the IOlink
  input  logic                  in_dv,
  input  logic [15:0]           in_data,
  // towards the IOlink
  output logic                  tx_valid,
  output logic [15:0]           tx_data,
  output logic [2:0]            tx_dev,
  output logic [3:0]            tx_sp,
  input  logic                  tx_ready,
  // device bus for the devices not built here
  output dev_bus_t              dev_bus,
  // IOP-SP links
  output iop_word_t [N_SP-1:0]  sp_dn,
  input  iop_word_t [N_SP-1:0]  sp_up
);
  dev_bus_t bus;
  logic [15:0] worms;

  stream_router u_router (
    .clk(clk), .rst_n(rst_n), .in_dv(in_dv), .in_data(in_data),
    .bus(bus), .worms(worms)
  );
  assign dev_bus = bus;

  // ---- memory interface and staging memory ---------------------------------
  logic                m_en, m_we;
  logic [STAGE_AW-1:0] m_addr;
  logic [15:0]         m_wdata, m_rdata;
  logic                mem_valid, mem_ready;
  logic [15:0]         mem_data;

  memory_if #(.AW(STAGE_AW)) u_memif (
    .clk(clk), .rst_n(rst_n), .bus(bus),
    .m_en(m_en), .m_we(m_we), .m_addr(m_addr), .m_wdata(m_wdata), .m_rdata(m_rdata),
    .out_valid(mem_valid), .out_data(mem_data), .out_ready(mem_ready)
  );

  staging_mem #(.AW(STAGE_AW)) u_stage (
    .clk(clk), .en(m_en), .we(m_we), .addr(m_addr), .wdata(m_wdata), .rdata(m_rdata)
  );

  // ---- SP interface ------------------------------------------------------------
  logic        sp_valid, sp_ready;
  logic [15:0] sp_data;
  logic [3:0]  sp_idx;

  sp_if u_spif (
    .clk(clk), .rst_n(rst_n), .bus(bus), .dn(sp_dn), .up(sp_up),
    .out_valid(sp_valid), .out_data(sp_data), .out_sp(sp_idx), .out_ready(sp_ready)
  );

  // ---- return stream: round robin between the two sources --------------------
  logic last_sp;   // the SP interface was served last
  logic pick_sp;

  always_comb begin
    if (mem_valid && sp_valid) pick_sp = !last_sp;
    else                       pick_sp = sp_valid;
  end

  assign tx_valid  = mem_valid || sp_valid;
  assign tx_data   = pick_sp ? sp_data : mem_data;
  assign tx_dev    = pick_sp ? 3'(DEV_SPS) : 3'(DEV_MEM0);
  assign tx_sp     = pick_sp ? sp_idx : 4'd0;
  assign mem_ready = tx_ready && !pick_sp;
  assign sp_ready  = tx_ready && pick_sp;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                    last_sp <= 1'b0;
    else if (tx_valid && tx_ready) last_sp <= pick_sp;
  end

  // valid/ready rule of the return stream: data hold until accepted
  a_tx_hold: assert property (@(posedge clk) disable iff (!rst_n)
    tx_valid && !tx_ready |=> tx_valid) else $error("iop: tx_valid dropped before ready");
endmodule
