// tb_axi_write_streamer: streams 150 beats (bursts of 16, the last one short)
// with random gaps into the write master, which writes them to a behavioural
// AXI memory with random stalls. Checks the memory contents afterwards, the
// burst addresses and lengths, that each burst's data went out without gaps,
// the done pulse, and a second call at a different address.
module tb_axi_write_streamer;
  localparam int BL = 16, FD = 32;
  logic clk = 0, rst_n = 0;
  logic start, busy, done;
  logic [63:0] base_addr;
  logic [31:0] num_beats;
  logic in_valid, in_ready;
  logic [511:0] in_data;
  logic m_awvalid, m_awready, m_wvalid, m_wready, m_wlast, m_bvalid, m_bready;
  logic [63:0] m_awaddr;
  logic [7:0] m_awlen;
  logic [2:0] m_awsize;
  logic [1:0] m_awburst, m_bresp;
  logic [511:0] m_wdata;
  logic [63:0] m_wstrb;
  logic arready_u, rvalid_u, rlast_u;
  logic [511:0] rdata_u;
  logic [1:0] rresp_u;
  int checks = 0, failures = 0, aws, done_pulses, w_gaps, in_burst;
  longint exp_aw_addr;
  int total;

  axi_write_streamer #(.BURST_LEN(BL), .FIFO_DEPTH(FD)) dut (.*);

  axi_mem_model #(.STALL_PCT(30), .SEED(5)) u_mem (
    .clk, .rst_n,
    .arvalid(1'b0), .arready(arready_u), .araddr(64'd0), .arlen(8'd0),
    .rvalid(rvalid_u), .rready(1'b1), .rdata(rdata_u), .rlast(rlast_u), .rresp(rresp_u),
    .awvalid(m_awvalid), .awready(m_awready), .awaddr(m_awaddr), .awlen(m_awlen),
    .wvalid(m_wvalid), .wready(m_wready), .wdata(m_wdata), .wlast(m_wlast),
    .bvalid(m_bvalid), .bready(m_bready), .bresp(m_bresp));

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic logic [511:0] word(int call_id, int i);
    return {16{32'(call_id * 100000 + i * 13 + 5)}};
  endfunction

  always @(posedge clk) begin
    if (rst_n && m_awvalid && m_awready) begin
      int len;
      len = (total - aws * BL < BL) ? total - aws * BL : BL;
      check(m_awaddr == 64'(exp_aw_addr), "burst address");
      check(int'(m_awlen) == len - 1, "burst length");
      check(m_awsize == 3'd6 && m_awburst == 2'b01, "burst size/type");
      exp_aw_addr += BL * 64;
      aws++;
    end
    if (rst_n && m_wvalid && m_wready) in_burst = m_wlast ? 0 : 1;
    if (rst_n && in_burst == 1 && !m_wvalid) w_gaps++;
    if (done) done_pulses++;
  end

  task automatic call(int id, longint b, int n);
    total = n; aws = 0; done_pulses = 0; exp_aw_addr = b;
    @(negedge clk);
    start = 1; base_addr = 64'(b); num_beats = 32'(n);
    @(negedge clk);
    start = 0;
    for (int i = 0; i < n; i++) begin
      bit took;
      while (($urandom % 100) < 30) @(negedge clk);
      in_valid = 1;
      in_data  = word(id, i);
      do begin
        took = in_ready;
        @(negedge clk);
      end while (!took);
      in_valid = 0;
    end
    while (!(done_pulses > 0)) @(negedge clk);
    repeat (3) @(negedge clk);
    check(done_pulses == 1, "one done pulse");
    check(!busy, "idle after call");
    check(aws == (n + BL - 1) / BL, "burst count");
    for (int i = 0; i < n; i++)
      check(u_mem.mem.exists(b / 64 + i) && u_mem.mem[b / 64 + i] == word(id, i),
            $sformatf("memory word %0d", i));
    check(!u_mem.mem.exists(b / 64 + n), "nothing written past the end");
  endtask

  initial begin
    start = 0; base_addr = 0; num_beats = 0; in_valid = 0; in_data = 0;
    w_gaps = 0; in_burst = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    call(1, 0, 150);
    call(2, 4096 * 7, 40);
    check(w_gaps == 0, "no gaps inside a burst");
    check(u_mem.w_stalls > 0 && u_mem.aw_stalls > 0, "memory stalls exercised");
    check(u_mem.protocol_errors == 0, "wlast placement");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
