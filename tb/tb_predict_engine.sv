// tb_predict_engine: feeds random latent vectors into a small predict engine
// (4 latent dimensions, 4 samples, 40 targets, so every compound gives one
// full and one partly filled output beat; 2 compounds in parallel) backed by a one-cycle target memory
// in the testbench. Every prediction beat is compared with a sum computed here
// over samples and latent dimensions, including the zero padding. With the
// output always ready it checks that a new latent vector is taken every
// NUM_TARGETS cycles; a second pass adds random output back-pressure.
module tb_predict_engine;
  import vms_ref_pkg::*;
  localparam int NL = 4, NS = 4, NT = 40, SHIFT = 7, SEED = 11, TAMP = 128, LAMP = 8192;
  localparam int NCOMP = 6, NP = 2, NG = NCOMP / NP, OUTB = (NT + 31) / 32;

  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [NP*NL*16-1:0] in_data;
  logic tgt_rd_en;
  logic [$clog2(NS*NT)-1:0] tgt_rd_addr;
  logic [NL*8-1:0] tgt_rd_data;
  logic [511:0] out_data;
  logic [NL*8-1:0] tgt_mem [NS*NT];
  int checks = 0, failures = 0, cycle = 0;
  int lat [NCOMP][NS][NL];
  int exp_pred [NCOMP][NT];
  int beats, accepted, first_acc, last_acc, stalls;

  predict_engine #(.NUM_LATENT(NL), .NUM_SAMPLES(NS), .NUM_TARGETS(NT), .NUM_PAR(NP), .PRED_SHIFT(SHIFT)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle++;
  always @(posedge clk) if (tgt_rd_en) tgt_rd_data <= tgt_mem[tgt_rd_addr];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  always @(posedge clk) begin
    if (rst_n && in_valid && in_ready) begin
      if (accepted == 0) first_acc = cycle;
      last_acc = cycle;
      accepted++;
    end
    if (rst_n && out_valid && !out_ready) stalls++;
    if (rst_n && out_valid && out_ready) begin
      int c, b;
      c = (beats / OUTB) % NCOMP;
      b = beats % OUTB;
      for (int k = 0; k < 32; k++) begin
        int t, e;
        logic signed [15:0] g;
        t = b * 32 + k;
        e = (t < NT) ? exp_pred[c][t] : 0;
        g = out_data[k*16 +: 16];
        check(int'(g) == e, $sformatf("pred c=%0d t=%0d got %0d exp %0d", c, t, g, e));
      end
      beats++;
    end
  end

  task automatic run(int ready_pct);
    beats = 0; accepted = 0; stalls = 0;
    fork
      begin
        for (int g = 0; g < NG; g++)
          for (int s = 0; s < NS; s++) begin
            bit took;
            in_valid = 1;
            for (int p = 0; p < NP; p++)
              for (int l = 0; l < NL; l++) in_data[(p*NL + l)*16 +: 16] = 16'(lat[g*NP + p][s][l]);
            do begin
              took = in_ready;
              @(negedge clk);
            end while (!took);
          end
        in_valid = 0;
      end
      begin
        while (beats < NCOMP * OUTB) begin
          @(negedge clk);
          out_ready = ($urandom % 100) < ready_pct;
        end
      end
    join
    check(beats == NCOMP * OUTB, "beat count");
    if (ready_pct == 100)
      check(last_acc - first_acc == (NG * NS - 1) * NT,
            $sformatf("rate: %0d cycles between first and last latent", last_acc - first_acc));
    else
      check(stalls > 0, "back-pressure exercised");
  endtask

  initial begin
    in_valid = 0; in_data = '0; out_ready = 1; tgt_rd_data = '0;
    for (int s = 0; s < NS; s++)
      for (int t = 0; t < NT; t++) begin
        logic [511:0] w;
        w = tgt_word(SEED, s, t, NL, TAMP);
        tgt_mem[s*NT + t] = w[NL*8-1:0];
      end
    for (int c = 0; c < NCOMP; c++) begin
      for (int s = 0; s < NS; s++)
        for (int l = 0; l < NL; l++) lat[c][s][l] = sval(mix(SEED, 9, c * 100 + s, l), LAMP);
      for (int t = 0; t < NT; t++) begin
        longint sum;
        sum = 0;
        for (int s = 0; s < NS; s++)
          for (int l = 0; l < NL; l++) sum += longint'(lat[c][s][l]) * tgt(SEED, s, l, t, TAMP);
        exp_pred[c][t] = sat16(sum >>> ($clog2(NS) + SHIFT));
      end
    end
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    run(100);
    repeat (5) @(negedge clk);
    run(40);
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
