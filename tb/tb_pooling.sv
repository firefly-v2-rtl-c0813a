// tb_pooling: checks 2x2 stride-2 max and average pooling and the pass-through mode.
//
// A random binary spike map (Ho = 4 rows, two pixel groups of N, two time tiles, M x S spikes
// per word) is streamed in the engine's order h, wg, t, pixel with random gaps and output
// back-pressure, once per mode: no pooling, max pooling, average pooling with 2-bit saturation
// and average pooling with a right shift. The reference pools each 2x2 window per channel and
// time step; outputs must come in the order pooled row, wg, t, pooled pixel (N/2 per group),
// 4-bit values, with tile_last on the last word.
module tb_pooling;
  import ff2_pkg::*;
  localparam int M = 16, N = 8, S = 4, HO = 4, WG = 2, TO = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  layer_cfg_t cfg;
  logic in_valid, in_ready, in_tile_last, out_valid, out_ready, out_tile_last;
  logic [M*S-1:0] in_spk;
  logic [$clog2(N)-1:0] in_pix, out_pix;
  logic [M*S*4-1:0] out_spk;
  pooling #(.M(M), .N(N), .S(S)) dut (.*);

  typedef struct { logic [M*S*4-1:0] v; int pix; bit tl; } exp_t;
  exp_t exp_q [$];
  logic [M*S-1:0] mp [HO][WG*N][TO];

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    checks++;
    if (exp_q.size() == 0 || out_spk !== exp_q[0].v || int'(out_pix) != exp_q[0].pix ||
        out_tile_last != exp_q[0].tl) begin
      failures++;
      if (failures < 10) $display("FAIL mode %s pix %0d", cfg.pool_mode.name(), out_pix);
    end
    if (exp_q.size() > 0) void'(exp_q.pop_front());
  end

  task automatic run(pool_mode_e pm, fit_mode_e pf);
    cfg = '0; cfg.pool_mode = pm; cfg.pool_fit = pf; cfg.ho = 10'(HO); cfg.wg = 8'(WG);
    cfg.te_tiles = 8'(TO); cfg.spk_mode = SPK_1B; cfg.co_tiles = 8'd1;
    foreach (mp[h, x, t]) mp[h][x][t] = {$urandom, $urandom};
    // expected outputs
    if (pm == POOL_NONE) begin
      for (int h = 0; h < HO; h++)
        for (int g = 0; g < WG; g++)
          for (int t = 0; t < TO; t++)
            for (int n = 0; n < N; n++) begin
              exp_t e;
              for (int i = 0; i < M*S; i++) e.v[i*4 +: 4] = {3'b0, mp[h][g*N+n][t][i]};
              e.pix = n; e.tl = (h == HO-1) && (g == WG-1) && (t == TO-1) && (n == N-1);
              exp_q.push_back(e);
            end
    end else begin
      for (int h = 0; h < HO/2; h++)
        for (int g = 0; g < WG; g++)
          for (int t = 0; t < TO; t++)
            for (int j = 0; j < N/2; j++) begin
              exp_t e;
              for (int i = 0; i < M*S; i++) begin
                int c;
                c = mp[2*h][g*N+2*j][t][i] + mp[2*h][g*N+2*j+1][t][i] +
                    mp[2*h+1][g*N+2*j][t][i] + mp[2*h+1][g*N+2*j+1][t][i];
                e.v[i*4 +: 4] = (pm == POOL_MAX) ? 4'(c != 0) : fit4(5'(c), pf);
              end
              e.pix = j; e.tl = (h == HO/2-1) && (g == WG-1) && (t == TO-1) && (j == N/2-1);
              exp_q.push_back(e);
            end
    end
    for (int h = 0; h < HO; h++)
      for (int g = 0; g < WG; g++)
        for (int t = 0; t < TO; t++)
          for (int n = 0; n < N; n++) begin
            @(negedge clk);
            while ($urandom % 4 == 0) begin in_valid = 0; @(negedge clk); end
            in_valid = 1; in_spk = mp[h][g*N+n][t]; in_pix = n;
            in_tile_last = (h == HO-1) && (g == WG-1) && (t == TO-1) && (n == N-1);
            @(posedge clk);
            while (!in_ready) @(posedge clk);
          end
    @(negedge clk); in_valid = 0;
    repeat (5) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL %0d outputs missing", exp_q.size()); end
  endtask

  initial begin
    in_valid = 0; in_spk = 0; in_pix = 0; in_tile_last = 0; out_ready = 1; cfg = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    fork
      begin
        run(POOL_NONE, FIT_SAT2);
        run(POOL_MAX, FIT_SAT2);
        run(POOL_AVG, FIT_SAT2);
        run(POOL_AVG, FIT_SHIFT2);
      end
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
