// stream_fifo: first-word-fall-through FIFO that carries a valid/ready stream
// between two stages of the kernel's dataflow pipeline.
//
// A beat is written when in_valid && in_ready and read when out_valid &&
// out_ready; both can happen in the same cycle. in_ready is low only when the
// FIFO holds DEPTH beats; out_valid is high whenever it holds at least one and
// out_data then shows the oldest beat (no read latency). count gives the fill
// level so that a producer can reserve space before it asks for data.
// The FIFO itself is this design's choice of how to realise the streams that
// connect the dataflow stages.
module stream_fifo #(
  parameter int unsigned WIDTH = 512,
  parameter int unsigned DEPTH = 16
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         in_valid,
  output logic                         in_ready,
  input  logic [WIDTH-1:0]             in_data,
  output logic                         out_valid,
  input  logic                         out_ready,
  output logic [WIDTH-1:0]             out_data,
  output logic [$clog2(DEPTH+1)-1:0]   count
);
  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [PW-1:0]    wr_ptr, rd_ptr;
  logic             push, pop;

  assign in_ready  = (count != DEPTH[$clog2(DEPTH+1)-1:0]);
  assign out_valid = (count != '0);
  assign out_data  = mem[rd_ptr];
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;

  function automatic logic [PW-1:0] next_ptr(input logic [PW-1:0] p);
    return (p == PW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) wr_ptr <= next_ptr(wr_ptr);
      if (pop)  rd_ptr <= next_ptr(rd_ptr);
      case ({push, pop})
        2'b10:   count <= count + 1'b1;
        2'b01:   count <= count - 1'b1;
        default: count <= count;
      endcase
    end
  end

  // The fill level never exceeds the capacity.
  a_count_bound: assert property (@(posedge clk) disable iff (!rst_n)
    count <= DEPTH[$clog2(DEPTH+1)-1:0]);
endmodule
