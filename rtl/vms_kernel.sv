// vms_kernel: one virtual-screening kernel. It streams compound fingerprints
// in from its own external memory, predicts their activity on every protein
// target with the on-chip model, and streams the predictions back out.
//
// Dataflow: axi_read_streamer -> latent_engine (feature vector x beta link
// matrix, per Gibbs sample) -> latent FIFO -> predict_engine (latent vector x
// target representation, averaged over samples) -> axi_write_streamer. The
// stages run concurrently and are coupled only by valid/ready streams, so the
// kernel is limited by its slowest stage: NUM_SAMPLES*NUM_FEATURES/32 cycles
// per group of NUM_PAR compounds in the first, NUM_SAMPLES*NUM_TARGETS in the
// second.
//
// Model: before compounds are streamed the host writes the model through the
// load port, one 512-bit slice per cycle: load_sel picks the beta memory
// (word s*NUM_FEATURES/32 + b, NUM_LATENT*32*8 bits, slice load_chunk) or the
// target memory (word s*NUM_TARGETS + t, NUM_LATENT*8 bits, taken from the low
// bits of load_data). The model stays on chip for any number of invocations.
//
// Invocation: with start high for one cycle the kernel takes num_compounds,
// in_addr (fingerprints, NUM_FEATURES/32 beats per compound, feature f of a
// compound at bit (f mod 32)*16 of beat f/32) and out_addr (predictions,
// ceil(NUM_TARGETS/32) beats per compound). done pulses when the last
// prediction burst has been acknowledged by memory; busy spans the call.
// NUM_PAR compounds are computed side by side and share every model read;
// num_compounds must be a multiple of NUM_PAR.
// The structure follows the paper's prediction flow, its on-chip model and its
// compound parallelism; the interfaces and sizes are this design's choices.
module vms_kernel
  import vms_pkg::*;
#(
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
  input  logic                 clk,
  input  logic                 rst_n,
  // control
  input  logic                 start,
  input  logic [31:0]          num_compounds,
  input  logic [AXI_AW-1:0]    in_addr,
  input  logic [AXI_AW-1:0]    out_addr,
  output logic                 busy,
  output logic                 done,
  // model load port
  input  logic                 load_valid,
  input  model_sel_e           load_sel,
  input  logic [15:0]          load_addr,
  input  logic [7:0]           load_chunk,
  input  logic [AXI_DW-1:0]    load_data,
  // AXI4 master: read channels
  output logic                 m_arvalid,
  input  logic                 m_arready,
  output logic [AXI_AW-1:0]    m_araddr,
  output logic [7:0]           m_arlen,
  output logic [2:0]           m_arsize,
  output logic [1:0]           m_arburst,
  input  logic                 m_rvalid,
  output logic                 m_rready,
  input  logic [AXI_DW-1:0]    m_rdata,
  input  logic                 m_rlast,
  input  logic [1:0]           m_rresp,
  // AXI4 master: write channels
  output logic                 m_awvalid,
  input  logic                 m_awready,
  output logic [AXI_AW-1:0]    m_awaddr,
  output logic [7:0]           m_awlen,
  output logic [2:0]           m_awsize,
  output logic [1:0]           m_awburst,
  output logic                 m_wvalid,
  input  logic                 m_wready,
  output logic [AXI_DW-1:0]    m_wdata,
  output logic [AXI_DW/8-1:0]  m_wstrb,
  output logic                 m_wlast,
  input  logic                 m_bvalid,
  output logic                 m_bready,
  input  logic [1:0]           m_bresp
);
  localparam int unsigned NB         = NUM_FEATURES / FEATS_PER_BEAT;
  localparam int unsigned OUT_BEATS  = (NUM_TARGETS + PREDS_PER_BEAT - 1) / PREDS_PER_BEAT;
  localparam int unsigned BETA_DEPTH = NUM_SAMPLES * NB;
  localparam int unsigned BETA_WIDTH = FEATS_PER_BEAT * NUM_LATENT * MODEL_W;
  localparam int unsigned BETA_CHUNK = (BETA_WIDTH < AXI_DW) ? BETA_WIDTH : AXI_DW;
  localparam int unsigned BETA_NCH   = BETA_WIDTH / BETA_CHUNK;
  localparam int unsigned BETA_CW    = (BETA_NCH > 1) ? $clog2(BETA_NCH) : 1;
  localparam int unsigned TGT_DEPTH  = NUM_SAMPLES * NUM_TARGETS;
  localparam int unsigned TGT_WIDTH  = NUM_LATENT * MODEL_W;
  localparam int unsigned BETA_AW    = $clog2(BETA_DEPTH);
  localparam int unsigned TGT_AW     = $clog2(TGT_DEPTH);

  // ---------------- invocation control ----------------
  logic rd_busy, rd_done, wr_busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)           busy <= 1'b0;
    else if (start)       busy <= 1'b1;
    else if (done)        busy <= 1'b0;
  end

  // ---------------- on-chip model ----------------
  logic                    beta_rd_en;
  logic [BETA_AW-1:0]      beta_rd_addr;
  logic [BETA_WIDTH-1:0]   beta_rd_data;
  logic                    tgt_rd_en;
  logic [TGT_AW-1:0]       tgt_rd_addr;
  logic [TGT_WIDTH-1:0]    tgt_rd_data;

  model_ram #(.DEPTH(BETA_DEPTH), .WIDTH(BETA_WIDTH), .CHUNK(BETA_CHUNK)) u_beta_mem (
    .clk,
    .wr_en    (load_valid && load_sel == MODEL_BETA),
    .wr_addr  (BETA_AW'(load_addr)),
    .wr_chunk (BETA_CW'(load_chunk)),
    .wr_data  (load_data[BETA_CHUNK-1:0]),
    .rd_en    (beta_rd_en),
    .rd_addr  (beta_rd_addr),
    .rd_data  (beta_rd_data)
  );

  model_ram #(.DEPTH(TGT_DEPTH), .WIDTH(TGT_WIDTH), .CHUNK(TGT_WIDTH)) u_target_mem (
    .clk,
    .wr_en    (load_valid && load_sel == MODEL_TARGET),
    .wr_addr  (TGT_AW'(load_addr)),
    .wr_chunk (1'b0),
    .wr_data  (load_data[TGT_WIDTH-1:0]),
    .rd_en    (tgt_rd_en),
    .rd_addr  (tgt_rd_addr),
    .rd_data  (tgt_rd_data)
  );

  // ---------------- streams ----------------
  logic                         fp_valid, fp_ready;
  logic [AXI_DW-1:0]            fp_data;
  logic                         lat_valid, lat_ready;
  logic [NUM_PAR*NUM_LATENT*LAT_W-1:0] lat_data;
  logic                         latq_valid, latq_ready;
  logic [NUM_PAR*NUM_LATENT*LAT_W-1:0] latq_data;
  logic                         pred_valid, pred_ready;
  logic [AXI_DW-1:0]            pred_data;

  axi_read_streamer #(.BURST_LEN(BURST_LEN), .FIFO_DEPTH(FIFO_DEPTH)) u_reader (
    .clk, .rst_n,
    .start,
    .base_addr (in_addr),
    .num_beats (num_compounds * NB),
    .busy      (rd_busy),
    .done      (rd_done),
    .m_arvalid, .m_arready, .m_araddr, .m_arlen, .m_arsize, .m_arburst,
    .m_rvalid, .m_rready, .m_rdata, .m_rlast, .m_rresp,
    .out_valid (fp_valid),
    .out_ready (fp_ready),
    .out_data  (fp_data)
  );

  latent_engine #(
    .NUM_FEATURES(NUM_FEATURES), .NUM_LATENT(NUM_LATENT),
    .NUM_SAMPLES(NUM_SAMPLES), .NUM_PAR(NUM_PAR), .LAT_SHIFT(LAT_SHIFT)
  ) u_latent (
    .clk, .rst_n,
    .in_valid  (fp_valid),
    .in_ready  (fp_ready),
    .in_data   (fp_data),
    .beta_rd_en, .beta_rd_addr, .beta_rd_data,
    .out_valid (lat_valid),
    .out_ready (lat_ready),
    .out_data  (lat_data)
  );

  logic [$clog2(4+1)-1:0] latq_count;
  stream_fifo #(.WIDTH(NUM_PAR*NUM_LATENT*LAT_W), .DEPTH(4)) u_latent_fifo (
    .clk, .rst_n,
    .in_valid  (lat_valid),
    .in_ready  (lat_ready),
    .in_data   (lat_data),
    .out_valid (latq_valid),
    .out_ready (latq_ready),
    .out_data  (latq_data),
    .count     (latq_count)
  );

  predict_engine #(
    .NUM_LATENT(NUM_LATENT), .NUM_SAMPLES(NUM_SAMPLES),
    .NUM_TARGETS(NUM_TARGETS), .NUM_PAR(NUM_PAR), .PRED_SHIFT(PRED_SHIFT)
  ) u_predict (
    .clk, .rst_n,
    .in_valid  (latq_valid),
    .in_ready  (latq_ready),
    .in_data   (latq_data),
    .tgt_rd_en, .tgt_rd_addr, .tgt_rd_data,
    .out_valid (pred_valid),
    .out_ready (pred_ready),
    .out_data  (pred_data)
  );

  axi_write_streamer #(.BURST_LEN(BURST_LEN), .FIFO_DEPTH(FIFO_DEPTH)) u_writer (
    .clk, .rst_n,
    .start,
    .base_addr (out_addr),
    .num_beats (num_compounds * OUT_BEATS),
    .busy      (wr_busy),
    .done,
    .in_valid  (pred_valid),
    .in_ready  (pred_ready),
    .in_data   (pred_data),
    .m_awvalid, .m_awready, .m_awaddr, .m_awlen, .m_awsize, .m_awburst,
    .m_wvalid, .m_wready, .m_wdata, .m_wstrb, .m_wlast,
    .m_bvalid, .m_bready, .m_bresp
  );

  logic unused_ok;
  assign unused_ok = ^{rd_busy, rd_done, wr_busy, latq_count, load_chunk, load_addr};

  // Compounds are processed in whole groups of NUM_PAR.
  a_whole_groups: assert property (@(posedge clk) disable iff (!rst_n)
    start |-> (num_compounds % NUM_PAR) == 0);
  // A new call is only started when the previous one has finished.
  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy);
endmodule
