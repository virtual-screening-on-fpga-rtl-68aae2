// vms_top: the virtual-screening accelerator, NUM_KERNELS copies of
// vms_kernel side by side, one per FPGA die region, each with its own AXI4
// master to its own external memory bank.
//
// Each kernel holds a full copy of the model; the model load port is
// broadcast to all of them, so one load sequence programs every kernel. The
// kernels are started and finish independently: the host splits a screen over
// them and runs them concurrently (per-kernel start/num_compounds/in_addr/
// out_addr, busy and done). All ports are arrays indexed by kernel; the AXI
// ports connect to one memory controller each.
// Several kernel instances, one per die region with its own memory interface,
// follow the paper; three kernels is the number of die regions of the card the
// paper uses, and the broadcast model load is this design's choice.
module vms_top
  import vms_pkg::*;
#(
  parameter int unsigned NUM_KERNELS  = 3,
  parameter int unsigned NUM_FEATURES = 1024,
  parameter int unsigned NUM_LATENT   = 32,
  parameter int unsigned NUM_SAMPLES  = 16,
  parameter int unsigned NUM_TARGETS  = 32,
  parameter int unsigned NUM_PAR      = 2,
  parameter int unsigned LAT_SHIFT    = 7,
  parameter int unsigned PRED_SHIFT   = 7,
  parameter int unsigned BURST_LEN    = 64,
  parameter int unsigned FIFO_DEPTH   = 128
) (
  input  logic                                   clk,
  input  logic                                   rst_n,
  // per-kernel control
  input  logic        [NUM_KERNELS-1:0]          start,
  input  logic [NUM_KERNELS-1:0][31:0]           num_compounds,
  input  logic [NUM_KERNELS-1:0][AXI_AW-1:0]     in_addr,
  input  logic [NUM_KERNELS-1:0][AXI_AW-1:0]     out_addr,
  output logic        [NUM_KERNELS-1:0]          busy,
  output logic        [NUM_KERNELS-1:0]          done,
  // model load port, broadcast to all kernels
  input  logic                                   load_valid,
  input  model_sel_e                             load_sel,
  input  logic [15:0]                            load_addr,
  input  logic [7:0]                             load_chunk,
  input  logic [AXI_DW-1:0]                      load_data,
  // per-kernel AXI4 masters
  output logic        [NUM_KERNELS-1:0]          m_arvalid,
  input  logic        [NUM_KERNELS-1:0]          m_arready,
  output logic [NUM_KERNELS-1:0][AXI_AW-1:0]     m_araddr,
  output logic [NUM_KERNELS-1:0][7:0]            m_arlen,
  output logic [NUM_KERNELS-1:0][2:0]            m_arsize,
  output logic [NUM_KERNELS-1:0][1:0]            m_arburst,
  input  logic        [NUM_KERNELS-1:0]          m_rvalid,
  output logic        [NUM_KERNELS-1:0]          m_rready,
  input  logic [NUM_KERNELS-1:0][AXI_DW-1:0]     m_rdata,
  input  logic        [NUM_KERNELS-1:0]          m_rlast,
  input  logic [NUM_KERNELS-1:0][1:0]            m_rresp,
  output logic        [NUM_KERNELS-1:0]          m_awvalid,
  input  logic        [NUM_KERNELS-1:0]          m_awready,
  output logic [NUM_KERNELS-1:0][AXI_AW-1:0]     m_awaddr,
  output logic [NUM_KERNELS-1:0][7:0]            m_awlen,
  output logic [NUM_KERNELS-1:0][2:0]            m_awsize,
  output logic [NUM_KERNELS-1:0][1:0]            m_awburst,
  output logic        [NUM_KERNELS-1:0]          m_wvalid,
  input  logic        [NUM_KERNELS-1:0]          m_wready,
  output logic [NUM_KERNELS-1:0][AXI_DW-1:0]     m_wdata,
  output logic [NUM_KERNELS-1:0][AXI_DW/8-1:0]   m_wstrb,
  output logic        [NUM_KERNELS-1:0]          m_wlast,
  input  logic        [NUM_KERNELS-1:0]          m_bvalid,
  output logic        [NUM_KERNELS-1:0]          m_bready,
  input  logic [NUM_KERNELS-1:0][1:0]            m_bresp
);
  for (genvar k = 0; k < NUM_KERNELS; k++) begin : g_kernel
    vms_kernel #(
      .NUM_FEATURES(NUM_FEATURES), .NUM_LATENT(NUM_LATENT),
      .NUM_SAMPLES(NUM_SAMPLES), .NUM_TARGETS(NUM_TARGETS), .NUM_PAR(NUM_PAR),
      .LAT_SHIFT(LAT_SHIFT), .PRED_SHIFT(PRED_SHIFT),
      .BURST_LEN(BURST_LEN), .FIFO_DEPTH(FIFO_DEPTH)
    ) u_kernel (
      .clk, .rst_n,
      .start         (start[k]),
      .num_compounds (num_compounds[k]),
      .in_addr       (in_addr[k]),
      .out_addr      (out_addr[k]),
      .busy          (busy[k]),
      .done          (done[k]),
      .load_valid, .load_sel, .load_addr, .load_chunk, .load_data,
      .m_arvalid (m_arvalid[k]), .m_arready (m_arready[k]), .m_araddr (m_araddr[k]),
      .m_arlen   (m_arlen[k]),   .m_arsize  (m_arsize[k]),  .m_arburst (m_arburst[k]),
      .m_rvalid  (m_rvalid[k]),  .m_rready  (m_rready[k]),  .m_rdata  (m_rdata[k]),
      .m_rlast   (m_rlast[k]),   .m_rresp   (m_rresp[k]),
      .m_awvalid (m_awvalid[k]), .m_awready (m_awready[k]), .m_awaddr (m_awaddr[k]),
      .m_awlen   (m_awlen[k]),   .m_awsize  (m_awsize[k]),  .m_awburst (m_awburst[k]),
      .m_wvalid  (m_wvalid[k]),  .m_wready  (m_wready[k]),  .m_wdata  (m_wdata[k]),
      .m_wstrb   (m_wstrb[k]),   .m_wlast   (m_wlast[k]),
      .m_bvalid  (m_bvalid[k]),  .m_bready  (m_bready[k]),  .m_bresp  (m_bresp[k])
    );
  end
endmodule
