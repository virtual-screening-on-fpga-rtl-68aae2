// tb_latent_engine: feeds compound fingerprints into a small latent engine
// (64 features, 4 latent dimensions, 4 samples, 2 compounds in parallel)
// backed by a one-cycle beta memory in the testbench, and compares every
// latent value with the reference model. It runs once with the output always ready, checking the
// rate of one beta word per cycle (NUM_SAMPLES*NB cycles per group of compounds), and
// once with random output back-pressure.
module tb_latent_engine;
  import vms_ref_pkg::*;
  localparam int NF = 64, NL = 4, NS = 4, NB = NF / 32, SHIFT = 7;
  localparam int SEED = 7, FAMP = 2048, BAMP = 128;
  localparam int BW = 32 * NL * 8;
  localparam int NCOMP = 6, NP = 2, NG = NCOMP / NP;

  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [511:0] in_data;
  logic beta_rd_en;
  logic [$clog2(NS*NB)-1:0] beta_rd_addr;
  logic [BW-1:0] beta_rd_data;
  logic [NP*NL*16-1:0] out_data;
  logic [BW-1:0] beta_mem [NS*NB];
  int checks = 0, failures = 0, cycle = 0;
  int out_count, first_out, last_out, stalls;

  latent_engine #(.NUM_FEATURES(NF), .NUM_LATENT(NL), .NUM_SAMPLES(NS), .NUM_PAR(NP), .LAT_SHIFT(SHIFT)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle++;
  always @(posedge clk) if (beta_rd_en) beta_rd_data <= beta_mem[beta_rd_addr];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // checker: latent vectors arrive compound by compound, sample by sample
  always @(posedge clk) begin
    if (rst_n && out_valid && out_ready) begin
      int g, s;
      g = out_count / NS;
      s = out_count % NS;
      for (int p = 0; p < NP; p++)
        for (int l = 0; l < NL; l++) begin
          logic signed [15:0] got;
          int e;
          got = out_data[(p*NL + l)*16 +: 16];
          e = ref_latent(SEED, g * NP + p, s, l, NF, FAMP, BAMP, SHIFT);
          check(int'(got) == e, $sformatf("latent c=%0d s=%0d l=%0d got %0d exp %0d", g * NP + p, s, l, got, e));
        end
      if (out_count == 0) first_out = cycle;
      last_out = cycle;
      out_count++;
    end
    if (rst_n && out_valid && !out_ready) stalls++;
  end

  task automatic run(int pass, int ready_pct);
    out_count = 0; stalls = 0;
    fork
      begin
        for (int c = 0; c < NCOMP; c++)
          for (int b = 0; b < NB; b++) begin
            bit took;
            in_valid = 1;
            in_data  = feat_beat(SEED, c, b, FAMP);
            do begin
              took = in_ready;
              @(negedge clk);
            end while (!took);
          end
        in_valid = 0;
      end
      begin
        while (out_count < NG * NS) begin
          @(negedge clk);
          out_ready = ($urandom % 100) < ready_pct;
        end
      end
    join
    check(out_count == NG * NS, "latent count");
    if (ready_pct == 100) begin
      // after the first latent, one per NB cycles
      check(last_out - first_out == (NG * NS - 1) * NB,
            $sformatf("rate: %0d cycles for %0d latent words", last_out - first_out, NG * NS));
    end else begin
      check(stalls > 0, "back-pressure exercised");
    end
  endtask

  initial begin
    in_valid = 0; in_data = '0; out_ready = 1; beta_rd_data = '0;
    for (int s = 0; s < NS; s++)
      for (int b = 0; b < NB; b++)
        for (int ch = 0; ch < BW / 512; ch++)
          beta_mem[s*NB + b][ch*512 +: 512] = beta_chunk(SEED, s, b, ch, NL, BAMP);
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    run(0, 100);
    out_ready = 1;
    repeat (5) @(posedge clk);
    run(1, 40);
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
