// vms_pkg: widths and stream formats shared by the virtual-screening kernel.
//
// The kernel works on fixed-point numbers. Compound features and predictions
// are 16-bit signed values on the 512-bit memory stream; the embedded model
// (the beta link matrix and the target representation) is stored as 8-bit
// signed values. The 512-bit bus width is the memory-interface width the
// kernel is built around; the split of 16 bits for the streams and 8 bits for
// the model is this design's reading of "16bit and 8bit fixed point".
package vms_pkg;
  // Width of one memory / stream beat.
  localparam int unsigned AXI_DW = 512;
  localparam int unsigned AXI_AW = 64;
  // Fixed-point element widths.
  localparam int unsigned FEAT_W  = 16;  // compound feature (input stream)
  localparam int unsigned MODEL_W = 8;   // beta and target-representation entries
  localparam int unsigned LAT_W   = 16;  // latent value between the two stages
  localparam int unsigned PRED_W  = 16;  // prediction (output stream)
  // Elements per 512-bit beat.
  localparam int unsigned FEATS_PER_BEAT = AXI_DW / FEAT_W;  // 32
  localparam int unsigned PREDS_PER_BEAT = AXI_DW / PRED_W;  // 32
  // AXI burst type INCR and the beat size code for 64-byte beats.
  localparam logic [1:0] AXI_BURST_INCR = 2'b01;
  localparam logic [2:0] AXI_SIZE_64B   = 3'd6;

  // Which on-chip model memory a load word is for.
  typedef enum logic [0:0] {
    MODEL_BETA   = 1'b0,
    MODEL_TARGET = 1'b1
  } model_sel_e;

  // Saturate a wide signed value to a narrower signed width.
  function automatic logic signed [15:0] sat16(input logic signed [63:0] v);
    if (v > 64'sd32767)       return 16'sh7fff;
    else if (v < -64'sd32768) return 16'sh8000;
    else                      return v[15:0];
  endfunction
endpackage
