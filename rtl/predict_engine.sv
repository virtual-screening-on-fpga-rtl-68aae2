// predict_engine: second stage of the prediction pipeline. It multiplies each
// latent vector by the target representation of its Gibbs sample, averages
// the per-sample predictions over all samples and streams the predictions for
// all targets out in 512-bit beats.
//
// Latent words arrive in order sample 0..NUM_SAMPLES-1 for one group of
// NUM_PAR compounds, then the next group; a word holds latent l of compound p
// at bit (p*NUM_LATENT + l)*16. Every target word read serves all NUM_PAR
// compounds of the group. For each latent vector the engine walks the targets
// t = 0..NUM_TARGETS-1, one per cycle: it reads the target word at address
// s*NUM_TARGETS + t, holding T[s][l][t] as a signed 8-bit value at bit l*8,
// and forms NUM_PAR dot products of NUM_LATENT terms in one cycle (latent and
// compound loops fully unrolled). A per-target accumulator sums the dot products over the samples;
// at the last sample the sum is divided by NUM_SAMPLES (an arithmetic shift,
// so NUM_SAMPLES must be a power of two), shifted right by PRED_SHIFT and
// saturated to a signed 16-bit prediction. Predictions are packed 32 to a
// 512-bit beat (target t at bit (t mod 32)*16, unused slots zero); a compound
// yields ceil(NUM_TARGETS/32) beats. After the last target of the last sample
// the group's beats are copied to an output buffer and sent compound by
// compound. Steady state: NUM_TARGETS cycles per latent word, the next word
// being taken in the cycle the last target of the current one is issued. The
// target read has one cycle of latency. The pipeline stalls only if a group
// finishes while the previous group's beats are still being sent.
// Latent times target representation and averaging over Gibbs samples follow
// the paper's prediction flow; loop order, layout and scaling are this
// design's choices.
module predict_engine
  import vms_pkg::*;
#(
  parameter int unsigned NUM_LATENT  = 32,
  parameter int unsigned NUM_SAMPLES = 16,
  parameter int unsigned NUM_TARGETS = 32,
  parameter int unsigned NUM_PAR     = 2,
  parameter int unsigned PRED_SHIFT  = 7
) (
  input  logic                               clk,
  input  logic                               rst_n,
  // latent vector stream
  input  logic                               in_valid,
  output logic                               in_ready,
  input  logic [NUM_PAR*NUM_LATENT*LAT_W-1:0] in_data,
  // target representation read port
  output logic                               tgt_rd_en,
  output logic [$clog2(NUM_SAMPLES*NUM_TARGETS)-1:0] tgt_rd_addr,
  input  logic [NUM_LATENT*MODEL_W-1:0]      tgt_rd_data,
  // prediction stream
  output logic                               out_valid,
  input  logic                               out_ready,
  output logic [AXI_DW-1:0]                  out_data
);
  localparam int unsigned TW    = (NUM_TARGETS > 1) ? $clog2(NUM_TARGETS) : 1;
  localparam int unsigned SW    = (NUM_SAMPLES > 1) ? $clog2(NUM_SAMPLES) : 1;
  localparam int unsigned AW    = $clog2(NUM_SAMPLES * NUM_TARGETS);
  localparam int unsigned DOT_W = LAT_W + MODEL_W + $clog2(NUM_LATENT) + 1;
  localparam int unsigned ACC_W = DOT_W + $clog2(NUM_SAMPLES) + 1;
  localparam int unsigned DIV_SHIFT = $clog2(NUM_SAMPLES);

  // ---------------- stage 0: walk the targets ----------------
  logic                         s1_valid, s1_first, s1_last;
  logic [TW-1:0]                s1_t;
  logic                         adv, busy, issue, last_t, last_s;
  logic [TW-1:0]                t_cnt;
  logic [SW-1:0]                s_cnt;
  logic [NUM_PAR*NUM_LATENT*LAT_W-1:0] lat_reg;

  assign adv      = !(s1_valid && s1_last && s1_t == TW'(NUM_TARGETS - 1) && out_valid);
  assign issue    = adv && busy;
  assign last_t   = (t_cnt == TW'(NUM_TARGETS - 1));
  assign last_s   = (s_cnt == SW'(NUM_SAMPLES - 1));
  assign in_ready = adv && (!busy || last_t);

  assign tgt_rd_en   = issue;
  assign tgt_rd_addr = AW'(s_cnt) * AW'(NUM_TARGETS) + AW'(t_cnt);

  logic [NUM_PAR*NUM_LATENT*LAT_W-1:0] s1_lat;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy     <= 1'b0;
      t_cnt    <= '0;
      s_cnt    <= '0;
      lat_reg  <= '0;
      s1_valid <= 1'b0;
      s1_first <= 1'b0;
      s1_last  <= 1'b0;
      s1_t     <= '0;
      s1_lat   <= '0;
    end else if (adv) begin
      s1_valid <= issue;
      s1_first <= (s_cnt == '0);
      s1_last  <= last_s;
      s1_t     <= t_cnt;
      s1_lat   <= lat_reg;
      if (issue) begin
        if (last_t) begin
          t_cnt <= '0;
          s_cnt <= last_s ? '0 : s_cnt + 1'b1;
          busy  <= 1'b0;
        end else begin
          t_cnt <= t_cnt + 1'b1;
        end
      end
      if (in_valid && in_ready) begin
        lat_reg <= in_data;
        busy    <= 1'b1;
      end
    end
  end

  // ---------------- stage 1: dot products and sample average ----------------
  localparam int unsigned OUTB   = (NUM_TARGETS + PREDS_PER_BEAT - 1) / PREDS_PER_BEAT;
  localparam int unsigned NOB    = NUM_PAR * OUTB;
  localparam int unsigned OW     = (NOB > 1) ? $clog2(NOB) : 1;
  localparam int unsigned SLOT_W = $clog2(PREDS_PER_BEAT);

  logic signed [DOT_W-1:0]               dot  [NUM_PAR];
  logic        [NUM_PAR-1:0][ACC_W-1:0]  acc  [NUM_TARGETS];
  logic        [NUM_PAR-1:0][ACC_W-1:0]  sum;
  logic signed [PRED_W-1:0]              pred [NUM_PAR];

  always_comb begin
    for (int p = 0; p < NUM_PAR; p++) begin
      dot[p] = '0;
      for (int l = 0; l < NUM_LATENT; l++)
        dot[p] += DOT_W'($signed(s1_lat[(p*NUM_LATENT + l)*LAT_W +: LAT_W]) *
                         $signed(tgt_rd_data[l*MODEL_W +: MODEL_W]));
      sum[p]  = s1_first ? ACC_W'(dot[p]) : ACC_W'($signed(acc[s1_t][p]) + ACC_W'(dot[p]));
      pred[p] = sat16(64'($signed(sum[p]) >>> (DIV_SHIFT + PRED_SHIFT)));
    end
  end

  always_ff @(posedge clk) begin
    if (adv && s1_valid) acc[s1_t] <= sum;
  end

  // Predictions of the last sample are collected per compound and beat; after
  // the last target the group's NUM_PAR*OUTB beats are sent compound by
  // compound.
  logic [AXI_DW-1:0] pack [NOB];
  logic [AXI_DW-1:0] obuf [NOB];
  logic [OW-1:0]     o_idx;
  logic [SLOT_W-1:0] slot;
  logic [OW-1:0]     beat;

  assign slot     = SLOT_W'(s1_t);
  assign beat     = OW'(s1_t / PREDS_PER_BEAT);
  assign out_data = obuf[o_idx];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NOB; i++) begin
        pack[i] <= '0;
        obuf[i] <= '0;
      end
      out_valid <= 1'b0;
      o_idx     <= '0;
    end else begin
      if (out_valid && out_ready) begin
        if (o_idx == OW'(NOB - 1)) begin
          out_valid <= 1'b0;
          o_idx     <= '0;
        end else begin
          o_idx <= o_idx + 1'b1;
        end
      end
      if (adv && s1_valid && s1_last) begin
        if (s1_t == TW'(NUM_TARGETS - 1)) begin
          for (int p = 0; p < NUM_PAR; p++)
            for (int b = 0; b < OUTB; b++) begin
              obuf[p*OUTB + b] <= pack[p*OUTB + b];
              if (OW'(b) == beat) obuf[p*OUTB + b][slot*PRED_W +: PRED_W] <= pred[p];
              pack[p*OUTB + b] <= '0;
            end
          out_valid <= 1'b1;
        end else begin
          for (int p = 0; p < NUM_PAR; p++)
            pack[p*OUTB + int'(beat)][slot*PRED_W +: PRED_W] <= pred[p];
        end
      end
    end
  end

  initial begin
    if ((1 << DIV_SHIFT) != NUM_SAMPLES)
      $error("predict_engine: NUM_SAMPLES must be a power of two");
  end
endmodule
