// tb_im2col: checks the banked line buffer and its strided read generator.
//
// For several layer shapes (3x3 stride 1 with two input-channel tiles and two time tiles,
// 3x3 stride 2, 1x1, 5x5, two output-channel tiles each) a random padded and coalesced input
// map (rows of Wc = (wg+1)*N*stride pixels, V*S-bit words) is streamed in once per output
// tile, with random gaps; the output is taken with random back-pressure. Every output tile
// must hold, for pixel n, the word of input row h*stride+kh, column (wg*N+n)*stride+kw, input
// tile c, time tile t, in the loop order o, h, wg, t, kh, kw, c, with `last` on the final c, kw,
// kh. As the input is slower than the reads, the read side must wait for its rows; any read
// of a row not yet written would show up as wrong data.
module tb_im2col;
  import ff2_pkg::*;
  localparam int V = 16, N = 8, S = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  layer_cfg_t cfg;
  logic start, in_valid, in_ready, out_valid, out_ready, out_last;
  logic [V*S-1:0] in_data;
  logic [V*N*S-1:0] out_data;
  im2col #(.V(V), .N(N), .S(S), .DEPTH(2048)) dut (.*);

  typedef struct { logic [V*N*S-1:0] d; bit last; } exp_t;
  exp_t exp_q [$];
  int outs = 0;
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    checks++;
    if (exp_q.size() == 0 || out_data !== exp_q[0].d || out_last != exp_q[0].last) begin
      failures++; if (failures < 10) $display("FAIL tile %0d", outs);
    end
    if (exp_q.size() > 0) void'(exp_q.pop_front());
    outs++;
  end

  task automatic run(int hi, int pad, int st, int k, int ct, int te, int ho, int wg, int co);
    int hp = hi + 2*pad, wc = (wg + 1) * N * st;
    logic [V*S-1:0] mp [][][][];
    cfg = '0; cfg.hi = 10'(hi); cfg.pad = 3'(pad); cfg.stride = 2'(st); cfg.kh = 4'(k);
    cfg.kw = 4'(k); cfg.ci_tiles = 8'(ct); cfg.te_tiles = 8'(te); cfg.ho = 10'(ho);
    cfg.wg = 8'(wg); cfg.co_tiles = 8'(co);
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    mp = new[hp];
    foreach (mp[y]) begin
      mp[y] = new[wc];
      foreach (mp[y][x]) begin
        mp[y][x] = new[ct];
        foreach (mp[y][x][c]) begin
          mp[y][x][c] = new[te];
          foreach (mp[y][x][c][t]) mp[y][x][c][t] = {$urandom, $urandom};
        end
      end
    end
    for (int o = 0; o < co; o++)
      for (int h = 0; h < ho; h++)
        for (int g = 0; g < wg; g++)
          for (int t = 0; t < te; t++)
            for (int kh = 0; kh < k; kh++)
              for (int kw = 0; kw < k; kw++)
                for (int c = 0; c < ct; c++) begin
                  exp_t e;
                  for (int n = 0; n < N; n++)
                    e.d[n*V*S +: V*S] = mp[h*st+kh][(g*N+n)*st+kw][c][t];
                  e.last = (c == ct-1) && (kw == k-1) && (kh == k-1);
                  exp_q.push_back(e);
                end
    for (int o = 0; o < co; o++)
      for (int y = 0; y < hp; y++)
        for (int x = 0; x < wc; x++)
          for (int c = 0; c < ct; c++)
            for (int t = 0; t < te; t++) begin
              @(negedge clk);
              while ($urandom % 5 == 0) begin in_valid = 0; @(negedge clk); end
              in_valid = 1; in_data = mp[y][x][c][t];
              @(posedge clk);
              while (!in_ready) @(posedge clk);
            end
    @(negedge clk); in_valid = 0;
    while (exp_q.size() > 0) @(posedge clk);
    repeat (4) @(posedge clk);
    checks++;
    if (out_valid) begin failures++; $display("FAIL extra output"); end
  endtask

  initial begin
    start = 0; in_valid = 0; in_data = 0; out_ready = 1; cfg = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    fork
      begin
        run(6, 1, 1, 3, 2, 2, 6, 1, 2);     // 8 x 8 padded, 3x3 s1
        run(9, 1, 2, 3, 1, 1, 5, 1, 2);     // 3x3 s2
        run(4, 0, 1, 1, 1, 4, 4, 2, 2);     // 1x1
        run(8, 2, 1, 5, 1, 1, 8, 1, 1);     // 5x5
      end
      forever begin @(negedge clk); out_ready = ($urandom % 4 != 0); end
    join_any
    disable fork;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #20000000;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
