// tb_axi_read_streamer: reads 150 beats (bursts of 16, the last one short)
// from a behavioural AXI memory with random stalls, with random back-pressure
// on the output stream. Checks every beat in order, the burst addresses and
// lengths, that more than one burst was in flight at a time, the done pulse,
// and a second call from a different base address.
module tb_axi_read_streamer;
  localparam int BL = 16, FD = 32;
  logic clk = 0, rst_n = 0;
  logic start, busy, done;
  logic [63:0] base_addr;
  logic [31:0] num_beats;
  logic m_arvalid, m_arready, m_rvalid, m_rready, m_rlast;
  logic [63:0] m_araddr;
  logic [7:0] m_arlen;
  logic [2:0] m_arsize;
  logic [1:0] m_arburst, m_rresp;
  logic [511:0] m_rdata;
  logic out_valid, out_ready;
  logic [511:0] out_data;
  logic awvalid_0 = 0, wvalid_0 = 0, wlast_0 = 0, bready_0 = 1;
  logic awready_u, wready_u, bvalid_u;
  logic [1:0] bresp_u;
  int checks = 0, failures = 0, got, done_pulses, ars, max_in_flight, in_flight;
  longint exp_ar_addr;

  axi_read_streamer #(.BURST_LEN(BL), .FIFO_DEPTH(FD)) dut (.*);

  axi_mem_model #(.STALL_PCT(30), .SEED(3)) u_mem (
    .clk, .rst_n,
    .arvalid(m_arvalid), .arready(m_arready), .araddr(m_araddr), .arlen(m_arlen),
    .rvalid(m_rvalid), .rready(m_rready), .rdata(m_rdata), .rlast(m_rlast), .rresp(m_rresp),
    .awvalid(awvalid_0), .awready(awready_u), .awaddr(64'd0), .awlen(8'd0),
    .wvalid(wvalid_0), .wready(wready_u), .wdata('0), .wlast(wlast_0),
    .bvalid(bvalid_u), .bready(bready_0), .bresp(bresp_u));

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic logic [511:0] word(longint a);
    return {16{32'(a * 7 + 1)}};
  endfunction

  longint base;
  int total;
  always @(posedge clk) begin
    if (rst_n && m_arvalid && m_arready) begin
      int len;
      len = (total - ars * BL < BL) ? total - ars * BL : BL;
      check(m_araddr == 64'(exp_ar_addr), "burst address");
      check(int'(m_arlen) == len - 1, "burst length");
      check(m_arsize == 3'd6 && m_arburst == 2'b01, "burst size/type");
      exp_ar_addr += BL * 64;
      ars++;
      in_flight += len;
    end
    if (rst_n && m_rvalid && m_rready) in_flight--;
    if (in_flight > max_in_flight) max_in_flight = in_flight;
    if (rst_n && out_valid && out_ready) begin
      check(out_data == word(base / 64 + got), $sformatf("beat %0d", got));
      got++;
    end
    if (done) done_pulses++;
  end

  task automatic call(longint b, int n);
    base = b; total = n; got = 0; ars = 0; done_pulses = 0; exp_ar_addr = b;
    @(negedge clk);
    start = 1; base_addr = 64'(b); num_beats = 32'(n);
    @(negedge clk);
    start = 0;
    while (got < n) begin
      @(negedge clk);
      out_ready = ($urandom % 100) < 60;
    end
    repeat (3) @(negedge clk);
    check(done_pulses == 1, "one done pulse");
    check(!busy, "idle after call");
    check(ars == (n + BL - 1) / BL, "burst count");
  endtask

  initial begin
    start = 0; base_addr = 0; num_beats = 0; out_ready = 0;
    max_in_flight = 0; in_flight = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (longint a = 0; a < 1024; a++) u_mem.mem[a] = word(a);
    call(0, 150);
    call(4096 * 5, 40);
    check(max_in_flight > BL, "several bursts in flight");
    check(u_mem.r_gaps > 0 && u_mem.ar_stalls > 0, "memory stalls exercised");
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
