// axi_mem_model: behavioural AXI4 slave memory for simulation only. It stands
// in for one external DRAM bank and its controller.
//
// Memory is a sparse array of 512-bit words indexed by byte address / 64.
// Read bursts are queued and answered beat by beat; write bursts take their
// address from AW and data from W and are acknowledged on B. With STALL_PCT
// above zero, arready, awready and wready drop and read beats pause at random,
// so that the master's flow control is exercised; the counters report how
// often each happened. It checks that wlast marks the end of each burst.
module axi_mem_model #(
  parameter int unsigned STALL_PCT = 25,
  parameter int unsigned SEED      = 1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         arvalid,
  output logic         arready,
  input  logic [63:0]  araddr,
  input  logic [7:0]   arlen,
  output logic         rvalid,
  input  logic         rready,
  output logic [511:0] rdata,
  output logic         rlast,
  output logic [1:0]   rresp,
  input  logic         awvalid,
  output logic         awready,
  input  logic [63:0]  awaddr,
  input  logic [7:0]   awlen,
  input  logic         wvalid,
  output logic         wready,
  input  logic [511:0] wdata,
  input  logic         wlast,
  output logic         bvalid,
  input  logic         bready,
  output logic [1:0]   bresp
);
  logic [511:0] mem [longint];
  longint       rq_addr [$];
  int           rq_len  [$];
  longint       wq_addr [$];
  int           wq_len  [$];
  logic [511:0] wd_q    [$];
  logic         wl_q    [$];
  int           b_pending;
  longint       r_addr;
  int           r_left;
  int           w_idx;
  int unsigned  rng;
  int           ar_stalls, r_gaps, aw_stalls, w_stalls, protocol_errors;
  int           max_reads_queued;

  function automatic bit roll();
    rng = rng * 1103515245 + 12345;
    return ((rng >> 16) % 100) < STALL_PCT;
  endfunction

  function automatic logic [511:0] read_word(longint a);
    if (mem.exists(a)) return mem[a];
    return '0;
  endfunction

  assign rresp = 2'b00;
  assign bresp = 2'b00;

  initial begin
    rng = SEED; ar_stalls = 0; r_gaps = 0; aw_stalls = 0; w_stalls = 0;
    protocol_errors = 0; max_reads_queued = 0;
  end

  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      arready <= 1'b0; awready <= 1'b0; wready <= 1'b0;
      rvalid <= 1'b0; rlast <= 1'b0; rdata <= '0; bvalid <= 1'b0;
      r_left = 0; r_addr = 0; w_idx = 0; b_pending = 0;
      rq_addr.delete(); rq_len.delete(); wq_addr.delete(); wq_len.delete();
      wd_q.delete(); wl_q.delete();
    end else begin
      // address channels
      if (arvalid && arready) begin
        rq_addr.push_back(longint'(araddr >> 6));
        rq_len.push_back(int'(arlen) + 1);
        if (rq_addr.size() > max_reads_queued) max_reads_queued = rq_addr.size();
      end
      if (awvalid && awready) begin
        wq_addr.push_back(longint'(awaddr >> 6));
        wq_len.push_back(int'(awlen) + 1);
      end
      arready <= !roll();
      awready <= !roll();
      if (arvalid && !arready) ar_stalls++;
      if (awvalid && !awready) aw_stalls++;
      // read data
      if (rvalid && rready) begin
        rvalid <= 1'b0;
      end
      if (!rvalid || rready) begin
        if (r_left == 0 && rq_addr.size() > 0) begin
          r_addr = rq_addr.pop_front();
          r_left = rq_len.pop_front();
        end
        if (r_left > 0) begin
          if (roll()) begin
            r_gaps++;
            rvalid <= 1'b0;
          end else begin
            rvalid <= 1'b1;
            rdata  <= read_word(r_addr);
            rlast  <= (r_left == 1);
            r_addr = r_addr + 1;
            r_left = r_left - 1;
          end
        end
      end
      // write data: beats may arrive before their burst's address
      if (wvalid && wready) begin
        wd_q.push_back(wdata);
        wl_q.push_back(wlast);
      end
      while (wq_addr.size() > 0 && wd_q.size() > 0) begin
        logic [511:0] d;
        logic         lst;
        d   = wd_q.pop_front();
        lst = wl_q.pop_front();
        mem[wq_addr[0] + w_idx] = d;
        if ((w_idx + 1 == wq_len[0]) != lst) protocol_errors++;
        if (w_idx + 1 == wq_len[0]) begin
          void'(wq_addr.pop_front());
          void'(wq_len.pop_front());
          w_idx = 0;
          b_pending = b_pending + 1;
        end else begin
          w_idx = w_idx + 1;
        end
      end
      if (wvalid && !wready) w_stalls++;
      wready <= !roll();
      // write response
      if (bvalid && bready) begin
        bvalid <= 1'b0;
      end else if (!bvalid && b_pending > 0 && !roll()) begin
        bvalid    <= 1'b1;
        b_pending = b_pending - 1;
      end
    end
  end
endmodule
