// tb_model_ram: loads a small model memory slice by slice, then reads every
// word back and checks the data, the one-cycle read latency and that the read
// register holds its value while rd_en is low.
module tb_model_ram;
  localparam int DEPTH = 16, WIDTH = 64, CHUNK = 16, NCH = WIDTH / CHUNK;
  logic clk = 0;
  logic wr_en, rd_en;
  logic [$clog2(DEPTH)-1:0] wr_addr, rd_addr;
  logic [$clog2(NCH)-1:0] wr_chunk;
  logic [CHUNK-1:0] wr_data;
  logic [WIDTH-1:0] rd_data;
  logic [WIDTH-1:0] ref_mem [DEPTH];
  int checks = 0, failures = 0;

  model_ram #(.DEPTH(DEPTH), .WIDTH(WIDTH), .CHUNK(CHUNK)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    wr_en = 0; rd_en = 0; wr_addr = 0; rd_addr = 0; wr_chunk = 0; wr_data = 0;
    foreach (ref_mem[i]) ref_mem[i] = {$urandom, $urandom};
    // load in a scrambled chunk order
    for (int a = 0; a < DEPTH; a++)
      for (int c = NCH - 1; c >= 0; c--) begin
        @(negedge clk);
        wr_en = 1; wr_addr = a[$clog2(DEPTH)-1:0]; wr_chunk = c[$clog2(NCH)-1:0];
        wr_data = ref_mem[a][c*CHUNK +: CHUNK];
      end
    @(negedge clk) wr_en = 0;
    // overwrite one slice of word 5
    @(negedge clk);
    wr_en = 1; wr_addr = 5; wr_chunk = 2; wr_data = 16'hBEEF;
    ref_mem[5][2*CHUNK +: CHUNK] = 16'hBEEF;
    @(negedge clk) wr_en = 0;
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      rd_en = 1; rd_addr = a[$clog2(DEPTH)-1:0];
      @(negedge clk);
      rd_en = 0; rd_addr = '1;
      check(rd_data == ref_mem[a], $sformatf("read word %0d", a));
      @(negedge clk);
      check(rd_data == ref_mem[a], $sformatf("hold word %0d", a));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
