// tb_vms_top: the whole accelerator at its default size (3 kernels, 1024
// features, 32 latent dimensions, 16 Gibbs samples, 32 targets), each kernel
// on its own behavioural AXI memory with random stalls, two compounds
// computed side by side in each kernel.
//
// The model is loaded once through the broadcast load port. The three kernels
// are then started together on 6, 4 and 8 compounds, so they run
// concurrently; kernel 0 is then called a second time on new compounds
// without reloading the model. Every prediction is compared with the
// reference model. At this size both stages need NUM_SAMPLES*32 = 512 cycles
// per pair of compounds, so each call must take between n/2*512 and
// n/2*512 + 400 cycles. The testbench counts how often each
// mechanism of the design happened and fails if one never did: several read
// bursts in flight, a short (write) burst, memory stalls on every channel,
// back-pressure on the fingerprint stream, a compound loading while the
// previous one computes, both stages working in the same cycle, all kernels
// busy at once, and saturation of a latent or prediction value.
module tb_vms_top;
  import vms_pkg::*;
  import vms_ref_pkg::*;
  localparam int K = 3, NF = 1024, NL = 32, NS = 16, NT = 32, NP = 2, BL = 64;
  localparam int NB = NF / 32, OUTB = (NT + 31) / 32, BETA_NCH = 32 * NL * 8 / 512;
  localparam int SEED = 33, FAMP = 2048, BAMP = 128, TAMP = 64, LS = 7, PS = 7;

  logic clk = 0, rst_n = 0;
  logic        [K-1:0]        start, busy, done;
  logic [K-1:0][31:0]         num_compounds;
  logic [K-1:0][63:0]         in_addr, out_addr;
  logic                       load_valid;
  model_sel_e                 load_sel;
  logic [15:0]                load_addr;
  logic [7:0]                 load_chunk;
  logic [511:0]               load_data;
  logic        [K-1:0]        m_arvalid, m_arready, m_rvalid, m_rready, m_rlast;
  logic [K-1:0][63:0]         m_araddr, m_awaddr;
  logic [K-1:0][7:0]          m_arlen, m_awlen;
  logic [K-1:0][2:0]          m_arsize, m_awsize;
  logic [K-1:0][1:0]          m_arburst, m_rresp, m_awburst, m_bresp;
  logic [K-1:0][511:0]        m_rdata, m_wdata;
  logic        [K-1:0]        m_awvalid, m_awready, m_wvalid, m_wready, m_wlast, m_bvalid, m_bready;
  logic [K-1:0][63:0]         m_wstrb;

  int checks = 0, failures = 0, cycle = 0, sat = 0;
  int n_multi_burst = 0, n_short_burst = 0, n_fp_stall = 0, n_overlap = 0;
  int n_both_stages = 0, n_all_busy = 0;
  int kdone [K];
  int t_end [K];

  vms_top dut (.*);

  for (genvar k = 0; k < K; k++) begin : g_mem
    axi_mem_model #(.STALL_PCT(20), .SEED(100 + k)) u_mem (
      .clk, .rst_n,
      .arvalid(m_arvalid[k]), .arready(m_arready[k]), .araddr(m_araddr[k]), .arlen(m_arlen[k]),
      .rvalid(m_rvalid[k]), .rready(m_rready[k]), .rdata(m_rdata[k]), .rlast(m_rlast[k]), .rresp(m_rresp[k]),
      .awvalid(m_awvalid[k]), .awready(m_awready[k]), .awaddr(m_awaddr[k]), .awlen(m_awlen[k]),
      .wvalid(m_wvalid[k]), .wready(m_wready[k]), .wdata(m_wdata[k]), .wlast(m_wlast[k]),
      .bvalid(m_bvalid[k]), .bready(m_bready[k]), .bresp(m_bresp[k]));
  end

  always #5 clk = ~clk;
  always @(posedge clk) begin
    cycle++;
    for (int k = 0; k < K; k++) if (done[k]) begin
      if (kdone[k] == 0) t_end[k] = cycle;
      kdone[k]++;
    end
    if (&busy) n_all_busy++;
    for (int k = 0; k < K; k++) begin
      if (m_arvalid[k] && m_arready[k] && m_arlen[k] != 8'(BL - 1)) n_short_burst++;
      if (m_awvalid[k] && m_awready[k] && m_awlen[k] != 8'(BL - 1)) n_short_burst++;
    end
  end

  // mechanism probes inside kernel 0
  always @(posedge clk) begin
    if (dut.g_kernel[0].u_kernel.u_reader.in_flight > BL) n_multi_burst++;
    if (dut.g_kernel[0].u_kernel.fp_valid && !dut.g_kernel[0].u_kernel.fp_ready) n_fp_stall++;
    if (dut.g_kernel[0].u_kernel.fp_valid && dut.g_kernel[0].u_kernel.fp_ready &&
        dut.g_kernel[0].u_kernel.beta_rd_en) n_overlap++;
    if (dut.g_kernel[0].u_kernel.beta_rd_en && dut.g_kernel[0].u_kernel.tgt_rd_en) n_both_stages++;
  end

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

  function automatic logic [511:0] mem_word(int k, longint a);
    case (k)
      0: return g_mem[0].u_mem.mem.exists(a) ? g_mem[0].u_mem.mem[a] : '1;
      1: return g_mem[1].u_mem.mem.exists(a) ? g_mem[1].u_mem.mem[a] : '1;
      default: return g_mem[2].u_mem.mem.exists(a) ? g_mem[2].u_mem.mem[a] : '1;
    endcase
  endfunction

  task automatic put_fingerprints(int k, int c0, int n, longint ia);
    for (int c = 0; c < n; c++)
      for (int b = 0; b < NB; b++) begin
        logic [511:0] w;
        longint a;
        w = feat_beat(SEED, c0 + c, b, FAMP);
        a = ia / 64 + c * NB + b;
        case (k)
          0: g_mem[0].u_mem.mem[a] = w;
          1: g_mem[1].u_mem.mem[a] = w;
          default: g_mem[2].u_mem.mem[a] = w;
        endcase
      end
  endtask

  task automatic check_predictions(int k, int c0, int n, longint oa);
    for (int c = 0; c < n; c++) begin
      int pred[];
      ref_predictions(SEED, c0 + c, NF, NL, NS, NT, FAMP, BAMP, TAMP, LS, PS, pred, sat);
      for (int t = 0; t < OUTB * 32; t++) begin
        logic [511:0] w;
        logic signed [15:0] g;
        int e;
        w = mem_word(k, oa / 64 + c * OUTB + t / 32);
        g = w[(t % 32) * 16 +: 16];
        e = (t < NT) ? pred[t] : 0;
        check(int'(g) == e, $sformatf("kernel %0d compound %0d target %0d: got %0d exp %0d", k, c0 + c, t, g, e));
      end
    end
  endtask

  int ncomp [K] = '{6, 4, 8};
  int cbase [K] = '{0, 100, 200};
  int t_start;

  initial begin
    start = '0; num_compounds = '0; in_addr = '0; out_addr = '0;
    load_valid = 0; load_sel = MODEL_BETA; load_addr = 0; load_chunk = 0; load_data = 0;
    foreach (kdone[k]) kdone[k] = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    load_model();
    for (int k = 0; k < K; k++) put_fingerprints(k, cbase[k], ncomp[k], 64'h100000);
    @(negedge clk);
    for (int k = 0; k < K; k++) begin
      start[k] = 1; num_compounds[k] = 32'(ncomp[k]);
      in_addr[k] = 64'h100000; out_addr[k] = 64'h800000;
    end
    t_start = cycle;
    @(negedge clk) start = '0;
    while (!(kdone[0] > 0 && kdone[1] > 0 && kdone[2] > 0)) @(negedge clk);
    for (int k = 0; k < K; k++) begin
      int cy;
      cy = t_end[k] - t_start;
      $display("kernel %0d: %0d compounds in %0d cycles", k, ncomp[k], cy);
      check(cy >= ncomp[k] / NP * NS * NB && cy <= ncomp[k] / NP * NS * NB + 400,
            $sformatf("kernel %0d call length %0d cycles", k, cy));
      check_predictions(k, cbase[k], ncomp[k], 64'h800000);
    end
    // second call on kernel 0 with the model still on chip
    put_fingerprints(0, 50, 2, 64'h200000);
    @(negedge clk);
    start[0] = 1; num_compounds[0] = 2; in_addr[0] = 64'h200000; out_addr[0] = 64'h900000;
    @(negedge clk) start = '0;
    while (kdone[0] < 2) @(negedge clk);
    check_predictions(0, 50, 2, 64'h900000);

    $display("mechanisms: multi_burst=%0d short_burst=%0d fp_stall=%0d overlap=%0d both_stages=%0d all_busy=%0d saturated=%0d",
             n_multi_burst, n_short_burst, n_fp_stall, n_overlap, n_both_stages, n_all_busy, sat);
    $display("memory stalls: ar=%0d r=%0d aw=%0d w=%0d",
             g_mem[0].u_mem.ar_stalls, g_mem[0].u_mem.r_gaps, g_mem[0].u_mem.aw_stalls, g_mem[0].u_mem.w_stalls);
    check(n_multi_burst > 0, "several read bursts in flight");
    check(n_short_burst > 0, "short burst");
    check(n_fp_stall > 0, "fingerprint stream back-pressure");
    check(n_overlap > 0, "next compound loads during compute");
    check(n_both_stages > 0, "both stages busy in one cycle");
    check(n_all_busy > 0, "all kernels busy at once");
    check(sat > 0, "saturation");
    check(g_mem[0].u_mem.ar_stalls > 0 && g_mem[0].u_mem.r_gaps > 0 &&
          g_mem[0].u_mem.aw_stalls + g_mem[1].u_mem.aw_stalls + g_mem[2].u_mem.aw_stalls > 0 &&
          g_mem[0].u_mem.w_stalls + g_mem[1].u_mem.w_stalls + g_mem[2].u_mem.w_stalls > 0,
          "memory stalls on every channel");
    check(g_mem[0].u_mem.protocol_errors + g_mem[1].u_mem.protocol_errors +
          g_mem[2].u_mem.protocol_errors == 0, "AXI write bursts well formed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
