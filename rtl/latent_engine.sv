// latent_engine: first stage of the prediction pipeline. It multiplies each
// compound's feature vector by the beta link matrix of every Gibbs sample and
// emits one latent vector per (compound, sample).
//
// Compounds are processed in groups of NUM_PAR, which share every beta word
// that is read (loop blocking over compounds). Feature vectors arrive as
// 512-bit beats of 32 signed 16-bit features, NUM_FEATURES/32 beats per
// compound, compound after compound, and are written into one half of a
// two-bank feature buffer that holds one group; while one bank is computed on,
// the next group loads into the other (the dataflow overlap of input and
// compute).
// For each sample s and each beat b the engine reads one beta word,
// address s*NB + b, holding beta[s][b*32+k][l] as a signed 8-bit value at bit
// (k*NUM_LATENT + l)*8, and performs NUM_PAR x 32 x NUM_LATENT
// multiply-accumulates in one cycle: the feature loop is unrolled by the bus
// width, the latent and compound loops fully. After the last beat of a sample
// the sums are shifted right by LAT_SHIFT, saturated to 16 bits and sent on
// the latent stream as one word per group (latent l of compound p of the group
// at bit (p*NUM_LATENT + l)*16). Steady state: one beta word per cycle,
// NUM_SAMPLES*NB cycles per group of NUM_PAR compounds. The beta read has one cycle of latency; a latent that is not taken
// (out_ready low) stalls the whole pipeline.
// The computation (feature vector times beta gives the latent vector) and the
// idea of processing several compounds in parallel follow the paper; the
// buffering, loop order, data layout and scaling are this design's choices.
module latent_engine
  import vms_pkg::*;
#(
  parameter int unsigned NUM_FEATURES = 1024,
  parameter int unsigned NUM_LATENT   = 32,
  parameter int unsigned NUM_SAMPLES  = 16,
  parameter int unsigned NUM_PAR      = 2,
  parameter int unsigned LAT_SHIFT    = 7
) (
  input  logic                                         clk,
  input  logic                                         rst_n,
  // compound feature stream
  input  logic                                         in_valid,
  output logic                                         in_ready,
  input  logic [AXI_DW-1:0]                            in_data,
  // beta link matrix read port
  output logic                                         beta_rd_en,
  output logic [$clog2(NUM_SAMPLES*NUM_FEATURES/FEATS_PER_BEAT)-1:0] beta_rd_addr,
  input  logic [FEATS_PER_BEAT*NUM_LATENT*MODEL_W-1:0] beta_rd_data,
  // latent vector stream, one per (compound, sample)
  output logic                                         out_valid,
  input  logic                                         out_ready,
  output logic [NUM_PAR*NUM_LATENT*LAT_W-1:0]          out_data
);
  localparam int unsigned NB    = NUM_FEATURES / FEATS_PER_BEAT;
  localparam int unsigned BW    = (NB > 1) ? $clog2(NB) : 1;
  localparam int unsigned SW    = (NUM_SAMPLES > 1) ? $clog2(NUM_SAMPLES) : 1;
  localparam int unsigned AW    = $clog2(NUM_SAMPLES * NB);
  localparam int unsigned ACC_W = FEAT_W + MODEL_W + $clog2(NUM_FEATURES) + 1;
  localparam int unsigned PW    = (NUM_PAR > 1) ? $clog2(NUM_PAR) : 1;

  // ---------------- two-bank feature buffer ----------------
  logic [NUM_PAR-1:0][AXI_DW-1:0] fbuf [2][NB];
  logic [1:0]        bank_full;
  logic              ld_bank, cp_bank;
  logic [BW-1:0]     ld_idx;
  logic [PW-1:0]     ld_lane;

  assign in_ready = !bank_full[ld_bank];

  // ---------------- pipeline control ----------------
  logic              adv;          // pipeline may move this cycle
  logic              issue;        // stage 0 reads a beta word
  logic [SW-1:0]     s_cnt;
  logic [BW-1:0]     b_cnt;
  logic              last_b, last_s;

  assign adv    = !(out_valid && !out_ready);
  assign issue  = adv && bank_full[cp_bank];
  assign last_b = (b_cnt == BW'(NB - 1));
  assign last_s = (s_cnt == SW'(NUM_SAMPLES - 1));

  assign beta_rd_en   = issue;
  assign beta_rd_addr = AW'(s_cnt) * AW'(NB) + AW'(b_cnt);

  // stage 1 registers: beat of features that meets the beta word
  logic              s1_valid, s1_first, s1_last;
  logic [NUM_PAR-1:0][AXI_DW-1:0] s1_feat;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bank_full <= '0;
      ld_bank   <= 1'b0;
      ld_idx    <= '0;
      ld_lane   <= '0;
      cp_bank   <= 1'b0;
      s_cnt     <= '0;
      b_cnt     <= '0;
      s1_valid  <= 1'b0;
      s1_first  <= 1'b0;
      s1_last   <= 1'b0;
      s1_feat   <= '0;
    end else begin
      // load side
      if (in_valid && in_ready) begin
        if (ld_idx == BW'(NB - 1)) begin
          ld_idx <= '0;
          if (ld_lane == PW'(NUM_PAR - 1)) begin
            bank_full[ld_bank] <= 1'b1;
            ld_bank            <= !ld_bank;
            ld_lane            <= '0;
          end else begin
            ld_lane <= ld_lane + 1'b1;
          end
        end else begin
          ld_idx <= ld_idx + 1'b1;
        end
      end
      // compute side, stage 0
      if (adv) begin
        s1_valid <= issue;
        s1_first <= (b_cnt == '0);
        s1_last  <= last_b;
        s1_feat  <= fbuf[cp_bank][b_cnt];
      end
      if (issue) begin
        if (last_b) begin
          b_cnt <= '0;
          if (last_s) begin
            s_cnt              <= '0;
            bank_full[cp_bank] <= 1'b0;
            cp_bank            <= !cp_bank;
          end else begin
            s_cnt <= s_cnt + 1'b1;
          end
        end else begin
          b_cnt <= b_cnt + 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid && in_ready) fbuf[ld_bank][ld_idx][ld_lane] <= in_data;
  end

  // ---------------- stage 1: NUM_PAR x 32 x NUM_LATENT MACs ----------------
  logic signed [ACC_W-1:0] acc     [NUM_PAR][NUM_LATENT];
  logic signed [ACC_W-1:0] partial [NUM_PAR][NUM_LATENT];
  logic signed [ACC_W-1:0] total   [NUM_PAR][NUM_LATENT];

  always_comb begin
    for (int p = 0; p < NUM_PAR; p++) begin
      for (int l = 0; l < NUM_LATENT; l++) begin
        partial[p][l] = '0;
        for (int k = 0; k < FEATS_PER_BEAT; k++) begin
          partial[p][l] += ACC_W'($signed(s1_feat[p][k*FEAT_W +: FEAT_W]) *
                                  $signed(beta_rd_data[(k*NUM_LATENT + l)*MODEL_W +: MODEL_W]));
        end
        total[p][l] = s1_first ? partial[p][l] : acc[p][l] + partial[p][l];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int p = 0; p < NUM_PAR; p++)
        for (int l = 0; l < NUM_LATENT; l++) acc[p][l] <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (adv && s1_valid) begin
        for (int p = 0; p < NUM_PAR; p++)
          for (int l = 0; l < NUM_LATENT; l++) acc[p][l] <= total[p][l];
        if (s1_last) begin
          out_valid <= 1'b1;
          for (int p = 0; p < NUM_PAR; p++)
            for (int l = 0; l < NUM_LATENT; l++)
              out_data[(p*NUM_LATENT + l)*LAT_W +: LAT_W] <= sat16(64'(total[p][l] >>> LAT_SHIFT));
        end
      end
    end
  end

  initial begin
    if (NUM_FEATURES % FEATS_PER_BEAT != 0)
      $error("latent_engine: NUM_FEATURES must be a multiple of %0d", FEATS_PER_BEAT);
  end
endmodule
