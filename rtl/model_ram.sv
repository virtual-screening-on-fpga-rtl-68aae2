// model_ram: on-chip memory that holds one part of the prediction model,
// either the beta link matrix or the target representation, for all Gibbs
// samples.
//
// The model is embedded in the FPGA before compounds are streamed, so the
// memory has a narrow load port and a wide read port. The load port writes one
// CHUNK-bit slice (chosen by wr_chunk) of the word at wr_addr per cycle; a
// word of WIDTH bits is loaded in WIDTH/CHUNK cycles. The read port returns a
// whole WIDTH-bit word one cycle after rd_en with rd_addr; rd_data holds its
// value while rd_en is low, which lets the compute pipelines stall. Keeping the
// model on chip follows the paper; the load port and the one-cycle read are
// this design's choices.
module model_ram #(
  parameter int unsigned DEPTH = 512,
  parameter int unsigned WIDTH = 8192,
  parameter int unsigned CHUNK = 512
) (
  input  logic                      clk,
  input  logic                      wr_en,
  input  logic [$clog2(DEPTH)-1:0]  wr_addr,
  input  logic [((WIDTH/CHUNK) > 1 ? $clog2(WIDTH/CHUNK) : 1)-1:0] wr_chunk,
  input  logic [CHUNK-1:0]          wr_data,
  input  logic                      rd_en,
  input  logic [$clog2(DEPTH)-1:0]  rd_addr,
  output logic [WIDTH-1:0]          rd_data
);
  localparam int unsigned NCHUNK = WIDTH / CHUNK;

  logic [NCHUNK-1:0][CHUNK-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr][wr_chunk] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end

  initial begin
    if (WIDTH % CHUNK != 0) $error("model_ram: WIDTH must be a multiple of CHUNK");
  end
endmodule
