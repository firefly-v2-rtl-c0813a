// tb_coalesce_padding: checks the widening of padded rows to whole im2col bank lines.
//
// For several shapes (Wp = Wi+2P padded pixels per row, stride 1 or 2, 1 or 2 pixel groups)
// random rows of Wp pixels (2 words each) go in with random gaps; each output row must be the
// input row followed by zero pixels up to Wc = (wg+1)*N*stride pixels, taken with random
// back-pressure.
module tb_coalesce_padding;
  import ff2_pkg::*;
  localparam int W = 64, N = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  layer_cfg_t cfg;
  logic start, in_valid, in_ready, out_valid, out_ready;
  logic [W-1:0] in_data, out_data;
  coalesce_padding #(.W(W), .N(N)) dut (.*);

  logic [W-1:0] exp_q [$];
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    checks++;
    if (exp_q.size() == 0 || out_data !== exp_q[0]) begin
      failures++; if (failures < 10) $display("FAIL word %h", out_data);
    end
    if (exp_q.size() > 0) void'(exp_q.pop_front());
  end

  task automatic run(int wi, int p, int st, int wg, int rows);
    int wp = wi + 2*p, wc = (wg + 1) * N * st;
    logic [W-1:0] in_q [$];
    cfg = '0; cfg.wi = 10'(wi); cfg.pad = 3'(p); cfg.stride = 2'(st); cfg.wg = 8'(wg);
    cfg.ci_tiles = 8'd1; cfg.te_tiles = 8'd2;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    for (int y = 0; y < rows; y++)
      for (int x = 0; x < wc; x++)
        for (int k = 0; k < 2; k++)
          if (x >= wp) exp_q.push_back('0);
          else begin
            logic [W-1:0] w;
            w = {$urandom, $urandom} | 64'd1;
            exp_q.push_back(w); in_q.push_back(w);
          end
    foreach (in_q[i]) begin
      @(negedge clk);
      while ($urandom % 3 == 0) begin in_valid = 0; @(negedge clk); end
      in_valid = 1; in_data = in_q[i];
      @(posedge clk);
      while (!in_ready) @(posedge clk);
    end
    @(negedge clk); in_valid = 0;
    while (exp_q.size() > 0) @(posedge clk);
    repeat (2) @(posedge clk);
  endtask

  initial begin
    start = 0; in_valid = 0; in_data = 0; out_ready = 1; cfg = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    fork
      begin run(8, 1, 1, 1, 4); run(14, 1, 2, 1, 3); run(12, 0, 1, 2, 3); run(16, 0, 1, 2, 2); end
      forever begin @(negedge clk); out_ready = ($urandom % 3 != 0); end
    join_any
    disable fork;
    checks++;
    if (exp_q.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #2000000;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
