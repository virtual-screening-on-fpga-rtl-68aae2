// axi_read_streamer: AXI4 read master that streams a contiguous region of
// external memory (the compound fingerprints) into the kernel as 512-bit beats.
//
// start (one cycle) loads base_addr and num_beats. The master then issues INCR
// bursts of BURST_LEN beats of 64 bytes (the last burst may be shorter) at
// consecutive addresses, keeping several bursts in flight: a burst is
// requested only when the beats already requested plus those waiting in the
// FIFO leave room for it, so rready can stay high and the memory never waits
// on the kernel. Received beats go through a FIFO of FIFO_DEPTH beats to the
// out_* stream. done pulses for one cycle when the last beat has been
// received; busy is high from start until then. base_addr must be aligned to
// BURST_LEN*64 bytes so that no burst crosses a 4 KB boundary.
// Pipelined bursts over the full 512-bit interface follow the paper; burst
// length, FIFO depth and the control ports are this design's choices.
module axi_read_streamer
  import vms_pkg::*;
#(
  parameter int unsigned BURST_LEN  = 64,
  parameter int unsigned FIFO_DEPTH = 128
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // control
  input  logic                 start,
  input  logic [AXI_AW-1:0]    base_addr,
  input  logic [31:0]          num_beats,
  output logic                 busy,
  output logic                 done,
  // AXI4 read address channel
  output logic                 m_arvalid,
  input  logic                 m_arready,
  output logic [AXI_AW-1:0]    m_araddr,
  output logic [7:0]           m_arlen,
  output logic [2:0]           m_arsize,
  output logic [1:0]           m_arburst,
  // AXI4 read data channel
  input  logic                 m_rvalid,
  output logic                 m_rready,
  input  logic [AXI_DW-1:0]    m_rdata,
  input  logic                 m_rlast,
  input  logic [1:0]           m_rresp,
  // output stream
  output logic                 out_valid,
  input  logic                 out_ready,
  output logic [AXI_DW-1:0]    out_data
);
  localparam int unsigned CNT_W = $clog2(FIFO_DEPTH + 1);

  logic [AXI_AW-1:0] next_addr;
  logic [31:0]       req_left;     // beats not yet requested
  logic [31:0]       rcv_left;     // beats not yet received
  logic [CNT_W:0]    in_flight;    // beats requested, not yet received
  logic [CNT_W-1:0]  fifo_count;
  logic [31:0]       this_len;
  logic              can_issue;
  logic              r_beat, ar_beat;

  assign this_len  = (req_left < BURST_LEN) ? req_left : 32'(BURST_LEN);
  assign can_issue = busy && !m_arvalid && (req_left != 0) &&
                     (32'(fifo_count) + 32'(in_flight) + this_len <= 32'(FIFO_DEPTH));
  assign r_beat    = m_rvalid && m_rready;
  assign ar_beat   = m_arvalid && m_arready;
  assign m_arsize  = AXI_SIZE_64B;
  assign m_arburst = AXI_BURST_INCR;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      done      <= 1'b0;
      next_addr <= '0;
      req_left  <= '0;
      rcv_left  <= '0;
      in_flight <= '0;
      m_arvalid <= 1'b0;
      m_araddr  <= '0;
      m_arlen   <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy      <= (num_beats != 0);
        done      <= (num_beats == 0);
        next_addr <= base_addr;
        req_left  <= num_beats;
        rcv_left  <= num_beats;
      end
      if (ar_beat) m_arvalid <= 1'b0;
      if (can_issue) begin
        m_arvalid <= 1'b1;
        m_araddr  <= next_addr;
        m_arlen   <= 8'(this_len - 1);
        next_addr <= next_addr + AXI_AW'(this_len) * AXI_AW'(AXI_DW / 8);
        req_left  <= req_left - this_len;
      end
      in_flight <= in_flight + (can_issue ? (CNT_W+1)'(this_len) : '0) - (CNT_W+1)'(r_beat);
      if (r_beat && busy) begin
        rcv_left <= rcv_left - 1;
        if (rcv_left == 1) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  // Space for every requested beat is reserved, so data is always accepted.
  assign m_rready = 1'b1;

  logic fifo_in_ready;
  stream_fifo #(.WIDTH(AXI_DW), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n,
    .in_valid (r_beat),
    .in_ready (fifo_in_ready),
    .in_data  (m_rdata),
    .out_valid, .out_ready, .out_data,
    .count    (fifo_count)
  );

  // Reserved space means a received beat always finds room in the FIFO.
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    r_beat |-> fifo_in_ready);
  // The request stays stable until it is accepted.
  a_ar_stable: assert property (@(posedge clk) disable iff (!rst_n)
    m_arvalid && !m_arready |=> m_arvalid && $stable(m_araddr) && $stable(m_arlen));

  logic unused_ok;
  assign unused_ok = ^{m_rlast, m_rresp};
endmodule
