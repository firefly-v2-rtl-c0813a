// tb_conv_padding: checks the zero padding of the input map.
//
// For pads of 0, 1 and 2 and two output-channel tiles, a random Hi x Wi map (2 words per
// pixel) is offered with random gaps and taken with random back-pressure. The output must be
// the (Hi+2P) x (Wi+2P) map per tile, zero words at the border, the input words inside in
// order, and nothing at all before `start` or after the last tile.
module tb_conv_padding;
  import ff2_pkg::*;
  localparam int W = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  layer_cfg_t cfg;
  logic start, in_valid, in_ready, out_valid, out_ready;
  logic [W-1:0] in_data, out_data;
  conv_padding #(.W(W)) dut (.*);

  logic [W-1:0] exp_q [$];
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    checks++;
    if (exp_q.size() == 0 || out_data !== exp_q[0]) begin
      failures++; if (failures < 10) $display("FAIL word %h", out_data);
    end
    if (exp_q.size() > 0) void'(exp_q.pop_front());
  end

  task automatic run(int hi, int wi, int p, int co);
    logic [W-1:0] in_q [$];
    cfg = '0; cfg.hi = 10'(hi); cfg.wi = 10'(wi); cfg.pad = 3'(p); cfg.ci_tiles = 8'd2;
    cfg.te_tiles = 8'd1; cfg.co_tiles = 8'(co);
    repeat (3) @(posedge clk);
    checks++;
    if (out_valid) begin failures++; $display("FAIL output before start"); end
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    for (int o = 0; o < co; o++)
      for (int y = 0; y < hi + 2*p; y++)
        for (int x = 0; x < wi + 2*p; x++)
          for (int k = 0; k < 2; k++)
            if (y < p || y >= p + hi || x < p || x >= p + wi) exp_q.push_back('0);
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
    repeat (4) @(posedge clk);
    checks++;
    if (out_valid) begin failures++; $display("FAIL output after the last tile"); end
  endtask

  initial begin
    start = 0; in_valid = 0; in_data = 0; out_ready = 1; cfg = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    fork
      begin run(4, 5, 1, 2); run(3, 3, 0, 2); run(5, 4, 2, 2); end
      forever begin @(negedge clk); out_ready = ($urandom % 3 != 0); end
    join_any
    disable fork;
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
