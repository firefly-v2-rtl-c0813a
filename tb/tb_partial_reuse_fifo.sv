// tb_partial_reuse_fifo: checks the weight window replay FIFO.
//
// A small instance (32-bit words, 16 entries) is given several layers (window lengths
// L = Kh*Kw*Ci/V of 1..16 words, R = Ho*Wo/N*T/S replays of 1..6), each with three windows,
// random input valid and output ready. Each window must be read out exactly R times in order.
// With L <= DEPTH/2 the next window must be fully loaded by the time the last replay of the
// current one ends (the loading overlaps the replays), which is checked by counting output
// stalls between windows when the input is always valid.
module tb_partial_reuse_fifo;
  import ff2_pkg::*;
  localparam int W = 32, D = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  layer_cfg_t cfg;
  logic start, in_valid, in_ready, out_valid, out_ready;
  logic [W-1:0] in_data, out_data;
  partial_reuse_fifo #(.W(W), .DEPTH(D)) dut (.*);

  logic [W-1:0] exp_q [$];
  int bubbles = 0;
  bit fast;
  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) begin
      checks++;
      if (exp_q.size() == 0 || out_data !== exp_q[0]) begin
        failures++; if (failures < 10) $display("FAIL word %h", out_data);
      end
      if (exp_q.size() > 0) void'(exp_q.pop_front());
    end else if (fast && exp_q.size() > 0 && exp_q.size() < 3 * 1000) bubbles += !out_valid;
  end

  task automatic run(int kh, int kw, int ct, int ho, int wg, int te, bit always_on);
    int L = kh * kw * ct, R = ho * wg * te;
    logic [W-1:0] win [3][];
    cfg = '0; cfg.kh = 4'(kh); cfg.kw = 4'(kw); cfg.ci_tiles = 8'(ct);
    cfg.ho = 10'(ho); cfg.wg = 8'(wg); cfg.te_tiles = 8'(te); cfg.co_tiles = 8'd3;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    for (int o = 0; o < 3; o++) begin
      win[o] = new[L];
      foreach (win[o][i]) win[o][i] = $urandom;
      for (int r = 0; r < R; r++) foreach (win[o][i]) exp_q.push_back(win[o][i]);
    end
    fast = always_on;
    fork
      for (int o = 0; o < 3; o++)
        for (int i = 0; i < L; i++) begin
          @(negedge clk);
          while (!always_on && $urandom % 3 == 0) begin in_valid = 0; @(negedge clk); end
          in_valid = 1; in_data = win[o][i];
          @(posedge clk);
          while (!in_ready) @(posedge clk);
          @(negedge clk); in_valid = 0;
        end
      while (exp_q.size() > 0) begin
        @(negedge clk); out_ready = always_on ? 1'b1 : ($urandom % 3 != 0);
      end
    join
    @(negedge clk); out_ready = 1; in_valid = 0;
    repeat (3) @(posedge clk);
    checks++;
    if (out_valid) begin failures++; $display("FAIL extra output"); end
  endtask

  initial begin
    start = 0; in_valid = 0; out_ready = 1; in_data = 0; cfg = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    run(3, 3, 1, 2, 1, 2, 0);
    run(1, 1, 1, 3, 2, 1, 0);
    run(2, 2, 4, 1, 1, 2, 0);     // L = DEPTH
    run(1, 1, 1, 1, 1, 1, 0);
    bubbles = 0;
    run(2, 2, 2, 2, 2, 1, 1);     // L = DEPTH/2, always valid/ready
    checks++;
    if (bubbles > 16) begin failures++; $display("FAIL %0d output bubbles", bubbles); end
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
