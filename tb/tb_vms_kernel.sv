// tb_vms_kernel: one small kernel (64 features, 4 latent dimensions, 4
// samples, 40 targets, 2 compounds in parallel, bursts of 8) end to end against a behavioural AXI
// memory with random stalls. The model is written through the load port, the
// fingerprints of 10 compounds are placed in memory, the kernel is started and
// every prediction written back is compared with the reference model. A
// second call on new compounds reuses the loaded model. With these sizes the
// second stage is the bottleneck (NUM_SAMPLES*NUM_TARGETS = 160 cycles per
// pair of compounds), so the call must take at least 5*160 cycles and not much
// more,
// and the first stage must be held back by the latent FIFO.
module tb_vms_kernel;
  import vms_pkg::*;
  import vms_ref_pkg::*;
  localparam int NF = 64, NL = 4, NS = 4, NT = 40, NP = 2, BL = 8, FD = 16;
  localparam int NB = NF / 32, OUTB = (NT + 31) / 32, BETA_NCH = (32 * NL * 8 + 511) / 512;
  localparam int SEED = 21, FAMP = 2048, BAMP = 128, TAMP = 64, LS = 7, PS = 7;

  logic clk = 0, rst_n = 0;
  logic start, busy, done;
  logic [31:0] num_compounds;
  logic [63:0] in_addr, out_addr;
  logic load_valid;
  model_sel_e load_sel;
  logic [15:0] load_addr;
  logic [7:0] load_chunk;
  logic [511:0] load_data;
  logic m_arvalid, m_arready, m_rvalid, m_rready, m_rlast;
  logic [63:0] m_araddr;
  logic [7:0] m_arlen;
  logic [2:0] m_arsize;
  logic [1:0] m_arburst, m_rresp;
  logic [511:0] m_rdata;
  logic m_awvalid, m_awready, m_wvalid, m_wready, m_wlast, m_bvalid, m_bready;
  logic [63:0] m_awaddr;
  logic [7:0] m_awlen;
  logic [2:0] m_awsize;
  logic [1:0] m_awburst, m_bresp;
  logic [511:0] m_wdata;
  logic [63:0] m_wstrb;
  int checks = 0, failures = 0, cycle = 0, lat_stalls = 0, sat = 0;

  vms_kernel #(.NUM_FEATURES(NF), .NUM_LATENT(NL), .NUM_SAMPLES(NS), .NUM_TARGETS(NT), .NUM_PAR(NP),
               .LAT_SHIFT(LS), .PRED_SHIFT(PS), .BURST_LEN(BL), .FIFO_DEPTH(FD)) dut (.*);

  axi_mem_model #(.STALL_PCT(20), .SEED(9)) u_mem (
    .clk, .rst_n,
    .arvalid(m_arvalid), .arready(m_arready), .araddr(m_araddr), .arlen(m_arlen),
    .rvalid(m_rvalid), .rready(m_rready), .rdata(m_rdata), .rlast(m_rlast), .rresp(m_rresp),
    .awvalid(m_awvalid), .awready(m_awready), .awaddr(m_awaddr), .awlen(m_awlen),
    .wvalid(m_wvalid), .wready(m_wready), .wdata(m_wdata), .wlast(m_wlast),
    .bvalid(m_bvalid), .bready(m_bready), .bresp(m_bresp));

  always #5 clk = ~clk;
  always @(posedge clk) cycle++;
  always @(posedge clk) if (dut.lat_valid && !dut.lat_ready) lat_stalls++;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic load_model();
    for (int s = 0; s < NS; s++)
      for (int b = 0; b < NB; b++)
        for (int ch = 0; ch < BETA_NCH; ch++) begin
          @(negedge clk);
          load_valid = 1; load_sel = MODEL_BETA; load_addr = 16'(s * NB + b);
          load_chunk = 8'(ch); load_data = beta_chunk(SEED, s, b, ch, NL, BAMP);
        end
    for (int s = 0; s < NS; s++)
      for (int t = 0; t < NT; t++) begin
        @(negedge clk);
        load_valid = 1; load_sel = MODEL_TARGET; load_addr = 16'(s * NT + t);
        load_chunk = 0; load_data = tgt_word(SEED, s, t, NL, TAMP);
      end
    @(negedge clk) load_valid = 0;
  endtask

  // compounds c0 .. c0+n-1, fingerprints at ia, predictions to oa
  task automatic run_call(int c0, int n, longint ia, longint oa);
    int t0, cycles;
    for (int c = 0; c < n; c++)
      for (int b = 0; b < NB; b++) u_mem.mem[ia / 64 + c * NB + b] = feat_beat(SEED, c0 + c, b, FAMP);
    @(negedge clk);
    start = 1; num_compounds = 32'(n); in_addr = 64'(ia); out_addr = 64'(oa);
    t0 = cycle;
    @(negedge clk) start = 0;
    while (!done) @(negedge clk);
    cycles = cycle - t0;
    $display("call of %0d compounds: %0d cycles", n, cycles);
    check(cycles >= n / NP * NS * NT, "not faster than the second stage allows");
    check(cycles <= n / NP * NS * NT + 200, $sformatf("throughput: %0d cycles", cycles));
    @(negedge clk);
    check(!busy, "idle after done");
    for (int c = 0; c < n; c++) begin
      int pred[];
      ref_predictions(SEED, c0 + c, NF, NL, NS, NT, FAMP, BAMP, TAMP, LS, PS, pred, sat);
      for (int t = 0; t < OUTB * 32; t++) begin
        logic [511:0] w;
        logic signed [15:0] g;
        int e;
        w = u_mem.mem.exists(oa / 64 + c * OUTB + t / 32) ? u_mem.mem[oa / 64 + c * OUTB + t / 32] : '1;
        g = w[(t % 32) * 16 +: 16];
        e = (t < NT) ? pred[t] : 0;
        check(int'(g) == e, $sformatf("compound %0d target %0d: got %0d exp %0d", c0 + c, t, g, e));
      end
    end
  endtask

  initial begin
    start = 0; num_compounds = 0; in_addr = 0; out_addr = 0;
    load_valid = 0; load_sel = MODEL_BETA; load_addr = 0; load_chunk = 0; load_data = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    load_model();
    run_call(0, 10, 64'h10000, 64'h80000);
    run_call(10, 4, 64'h20000, 64'h90000);
    check(lat_stalls > 0, "latent stream back-pressure happened");
    check(u_mem.protocol_errors == 0, "AXI write bursts well formed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
