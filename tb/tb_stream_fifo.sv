// tb_stream_fifo: random traffic through a 4-deep stream FIFO, compared with
// a queue. Checks order, data, the fill count, that in_ready drops exactly
// when the FIFO is full and that a written beat is visible the next cycle.
module tb_stream_fifo;
  localparam int W = 32, D = 4;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [W-1:0] in_data, out_data;
  logic [$clog2(D+1)-1:0] count;
  int checks = 0, failures = 0, cycles = 0, full_seen = 0;
  logic [W-1:0] q[$];

  stream_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at cycle %0d", what, cycles); end
  endtask

  initial begin
    in_valid = 0; out_ready = 0; in_data = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      // phase-dependent pressure so the FIFO both fills and drains
      in_valid  = ($urandom % 100) < ((i / 200) % 2 ? 80 : 30);
      out_ready = ($urandom % 100) < ((i / 200) % 2 ? 30 : 80);
      in_data   = $urandom;
      check(count == q.size(), "count");
      check(in_ready == (q.size() < D), "in_ready");
      check(out_valid == (q.size() > 0), "out_valid");
      if (q.size() > 0) check(out_data == q[0], "data order");
      if (q.size() == D) full_seen++;
      @(posedge clk);
      if (out_valid && out_ready) void'(q.pop_front());
      if (in_valid && in_ready) q.push_back(in_data);
      cycles++;
    end
    check(full_seen > 0, "fifo became full");
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
