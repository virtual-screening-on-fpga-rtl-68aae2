// axi_write_streamer: AXI4 write master that streams the kernel's 512-bit
// prediction beats to a contiguous region of external memory.
//
// start (one cycle) loads base_addr and num_beats. Incoming beats are queued
// in a FIFO of FIFO_DEPTH beats. When the FIFO holds a whole burst (BURST_LEN
// beats, or the remainder for the last burst) the master sends the address
// (AW) and then the burst's data beats (W) back to back, so a burst never
// waits on the kernel in the middle. The next address is sent as soon as the
// previous burst's data is out; write responses (B) are counted in the
// background. done pulses for one cycle when every burst has its response;
// busy is high from start until then. base_addr must be aligned to
// BURST_LEN*64 bytes.
// Streaming the predictions out linearly with pipelined bursts follows the
// paper; the burst policy and the control ports are this design's choices.
module axi_write_streamer
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
  // input stream
  input  logic                 in_valid,
  output logic                 in_ready,
  input  logic [AXI_DW-1:0]    in_data,
  // AXI4 write address channel
  output logic                 m_awvalid,
  input  logic                 m_awready,
  output logic [AXI_AW-1:0]    m_awaddr,
  output logic [7:0]           m_awlen,
  output logic [2:0]           m_awsize,
  output logic [1:0]           m_awburst,
  // AXI4 write data channel
  output logic                 m_wvalid,
  input  logic                 m_wready,
  output logic [AXI_DW-1:0]    m_wdata,
  output logic [AXI_DW/8-1:0]  m_wstrb,
  output logic                 m_wlast,
  // AXI4 write response channel
  input  logic                 m_bvalid,
  output logic                 m_bready,
  input  logic [1:0]           m_bresp
);
  localparam int unsigned CNT_W = $clog2(FIFO_DEPTH + 1);

  typedef enum logic [1:0] {W_IDLE, W_ADDR, W_DATA} wstate_e;
  wstate_e state;

  logic [AXI_AW-1:0] next_addr;
  logic [31:0]       send_left;    // beats not yet addressed
  logic [31:0]       bursts_out;   // bursts addressed, response not yet seen
  logic [8:0]        beat_left;    // beats left in the current burst
  logic [31:0]       this_len;
  logic [CNT_W-1:0]  fifo_count;
  logic              fifo_valid;
  logic              w_beat, b_beat;

  assign this_len  = (send_left < BURST_LEN) ? send_left : 32'(BURST_LEN);
  assign m_awsize  = AXI_SIZE_64B;
  assign m_awburst = AXI_BURST_INCR;
  assign m_wstrb   = '1;
  assign m_bready  = 1'b1;
  assign m_wvalid  = (state == W_DATA) && fifo_valid;
  assign m_wlast   = (beat_left == 9'd1);
  assign w_beat    = m_wvalid && m_wready;
  assign b_beat    = m_bvalid && m_bready;

  stream_fifo #(.WIDTH(AXI_DW), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n,
    .in_valid, .in_ready, .in_data,
    .out_valid (fifo_valid),
    .out_ready (w_beat),
    .out_data  (m_wdata),
    .count     (fifo_count)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= W_IDLE;
      busy       <= 1'b0;
      done       <= 1'b0;
      next_addr  <= '0;
      send_left  <= '0;
      bursts_out <= '0;
      beat_left  <= '0;
      m_awvalid  <= 1'b0;
      m_awaddr   <= '0;
      m_awlen    <= '0;
    end else begin
      done <= 1'b0;
      bursts_out <= bursts_out + (m_awvalid && m_awready ? 32'd1 : 32'd0) - (b_beat ? 32'd1 : 32'd0);
      case (state)
        W_IDLE: begin
          if (start && !busy) begin
            busy      <= 1'b1;
            next_addr <= base_addr;
            send_left <= num_beats;
            state     <= W_ADDR;
          end else if (busy && send_left == 0 && bursts_out == 0 && !m_awvalid) begin
            busy <= 1'b0;
            done <= 1'b1;
          end
        end
        W_ADDR: begin
          if (send_left == 0) begin
            state <= W_IDLE;
          end else if (!m_awvalid && 32'(fifo_count) >= this_len) begin
            m_awvalid <= 1'b1;
            m_awaddr  <= next_addr;
            m_awlen   <= 8'(this_len - 1);
            beat_left <= 9'(this_len);
            next_addr <= next_addr + AXI_AW'(this_len) * AXI_AW'(AXI_DW / 8);
            send_left <= send_left - this_len;
            state     <= W_DATA;
          end
        end
        W_DATA: begin
          if (m_awvalid && m_awready) m_awvalid <= 1'b0;
          if (w_beat) begin
            beat_left <= beat_left - 1'b1;
            if (beat_left == 9'd1) state <= (send_left == 0) ? W_IDLE : W_ADDR;
          end
        end
        default: state <= W_IDLE;
      endcase
      if (state != W_DATA && m_awvalid && m_awready) m_awvalid <= 1'b0;
    end
  end

  // A burst's data is in the FIFO before its address goes out, so the data
  // channel never runs dry in the middle of a burst.
  a_w_no_gap: assert property (@(posedge clk) disable iff (!rst_n)
    state == W_DATA |-> fifo_valid);
  a_aw_stable: assert property (@(posedge clk) disable iff (!rst_n)
    m_awvalid && !m_awready |=> m_awvalid && $stable(m_awaddr) && $stable(m_awlen));

  logic unused_ok;
  assign unused_ok = ^m_bresp;
endmodule
