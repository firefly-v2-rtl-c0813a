// tb_stream_fifo: checks the synchronous valid/ready FIFO.
//
// Random pushes and pops (random valid and ready) through a 16-deep FIFO; a queue model checks
// order, data, the `count` output, that it fills completely (in_ready low at DEPTH words) and
// that a word written in one cycle can leave in the next.
module tb_stream_fifo;
  localparam int W = 40, D = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [W-1:0] in_data, out_data;
  logic [$clog2(D):0] count;
  stream_fifo #(.W(W), .DEPTH(D)) dut (.*);

  logic [W-1:0] q [$];
  int fulls = 0, quick = 0;
  always @(posedge clk) if (rst_n) begin
    checks++;
    if (int'(count) != q.size() || out_valid != (q.size() > 0) || in_ready != (q.size() < D)) begin
      failures++;
      if (failures < 10) $display("FAIL count %0d model %0d", count, q.size());
    end
    if (q.size() == D) fulls++;
    if (out_valid && out_ready) begin
      checks++;
      if (out_data !== q[0]) begin failures++; $display("FAIL data"); end
      void'(q.pop_front());
    end
    if (in_valid && in_ready) begin
      if (q.size() == 0 && out_valid == 0) quick++;
      q.push_back(in_data);
    end
  end
  initial begin
    in_valid = 0; out_ready = 0; in_data = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 5000; i++) begin
      @(negedge clk);
      in_valid = (i % 1000 < 500) ? ($urandom % 4 != 0) : ($urandom % 4 == 0);
      out_ready = (i % 1000 < 500) ? ($urandom % 4 == 0) : ($urandom % 4 != 0);
      in_data = {$urandom, $urandom};
    end
    checks++;
    if (fulls == 0) begin failures++; $display("FAIL never full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1000000;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
