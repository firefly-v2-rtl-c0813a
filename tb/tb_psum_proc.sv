// tb_psum_proc: checks the partial-sum processing unit in all four spike modes.
//
// For each mode (1-bit, 2-bit, 4-bit spikes and 8-bit pixels) and two output-channel tiles,
// random 12-bit partial sums are fed as the engine would (groups of N pixels, loop order
// h, wg, equivalent time tile), with random input gaps, random output back-pressure and a
// throttled bias stream. The reference merges the rounds by shift-add (lowest bit first;
// high nibble first for pixels), adds the tile's bias, applies the optional shift and wraps to
// 18 bits. Each output word, its pixel index, `out_first` and `out_tile_last` are checked.
module tb_psum_proc;
  import ff2_pkg::*;
  localparam int M = 16, N = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  layer_cfg_t cfg;
  logic in_valid, in_ready, in_grp_last, bias_valid, bias_ready, out_valid, out_ready;
  logic out_first, out_tile_last;
  logic [M*4*12-1:0] in_psum;
  logic [$clog2(N)-1:0] in_pix, out_pix;
  logic [127:0] bias_data;
  logic [M*4*18-1:0] out_vmem;
  psum_proc #(.M(M), .N(N)) dut (.*);

  typedef struct { logic [17:0] v [M][4]; int pix; bit first; bit tlast; } exp_t;
  exp_t exp_q [$];
  logic [127:0] bias_q [$];
  int outs = 0;

  // bias stream with random gaps
  always @(negedge clk) begin
    bias_valid = (bias_q.size() > 0) && ($urandom % 3 != 0);
    bias_data  = (bias_q.size() > 0) ? bias_q[0] : '0;
  end
  always @(posedge clk) if (rst_n && bias_valid && bias_ready) void'(bias_q.pop_front());

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    checks++;
    if (exp_q.size() == 0) begin
      failures++; $display("FAIL unexpected output");
    end else begin
      logic bad;
      bad = (int'(out_pix) != exp_q[0].pix) || (out_first != exp_q[0].first) ||
            (out_tile_last != exp_q[0].tlast);
      for (int m = 0; m < M; m++)
        for (int s = 0; s < 4; s++)
          if (out_vmem[(m*4+s)*18 +: 18] !== exp_q[0].v[m][s]) bad = 1;
      if (bad) begin
        failures++;
        if (failures < 10) $display("FAIL mode %s output %0d pix %0d", cfg.spk_mode.name(), outs, out_pix);
      end
      void'(exp_q.pop_front());
      outs++;
    end
  end

  task automatic run_mode(spk_mode_e mode, int te, bit shl);
    int rounds, ho = 2, wg = 2;
    int bias [M];
    int part [N][M][4];
    rounds = int'(spk_rounds(mode));
    cfg = '0; cfg.spk_mode = mode; cfg.te_tiles = 8'(te); cfg.ho = 10'(ho); cfg.wg = 8'(wg);
    cfg.psum_shl = shl; cfg.co_tiles = 8'd2;
    for (int o = 0; o < 2; o++) begin
      for (int m = 0; m < M; m++) bias[m] = $urandom;
      for (int b = 0; b < M*32/128; b++) begin
        logic [127:0] w;
        for (int k = 0; k < 4; k++) w[k*32 +: 32] = bias[b*4+k];
        bias_q.push_back(w);
      end
      for (int h = 0; h < ho; h++)
        for (int g = 0; g < wg; g++)
          for (int t = 0; t < te; t++)
            for (int n = 0; n < N; n++) begin
              int p [M][4];
              @(negedge clk);
              while ($urandom % 4 == 0) begin in_valid = 0; @(negedge clk); end
              in_valid = 1; in_pix = n; in_grp_last = (n == N-1);
              for (int m = 0; m < M; m++)
                for (int s = 0; s < 4; s++) begin
                  in_psum[(m*4+s)*12 +: 12] = 12'($urandom);
                  p[m][s] = int'(signed'(in_psum[(m*4+s)*12 +: 12]));
                end
              // reference merge
              for (int m = 0; m < M; m++) begin
                int r = t % rounds;
                case (mode)
                  SPK_2B: begin
                    part[n][m][2*r]   = p[m][0] + 2*p[m][1];
                    part[n][m][2*r+1] = p[m][2] + 2*p[m][3];
                  end
                  SPK_4B: part[n][m][r] = p[m][0] + 2*p[m][1] + 4*p[m][2] + 8*p[m][3];
                  PIX_8B: begin
                    int r0 = p[m][0] + 2*p[m][1] + 4*p[m][2] + 8*p[m][3];
                    if (r == 0) part[n][m][0] = r0;
                    else begin
                      int hi = part[n][m][0];
                      for (int s = 0; s < 4; s++) part[n][m][s] = r0 + 16*hi;
                    end
                  end
                  default: for (int s = 0; s < 4; s++) part[n][m][s] = p[m][s];
                endcase
              end
              if (t % rounds == rounds - 1) begin
                exp_t e;
                for (int m = 0; m < M; m++)
                  for (int s = 0; s < 4; s++) begin
                    int v = part[n][m][s] + int'(signed'(18'(bias[m])));
                    e.v[m][s] = 18'(shl ? v * 2 : v);
                  end
                e.pix = n; e.first = (t / rounds == 0);
                e.tlast = (h == ho-1) && (g == wg-1) && (t == te-1) && (n == N-1);
                exp_q.push_back(e);
              end
              @(posedge clk);
              while (!in_ready) @(posedge clk);
            end
    end
    @(negedge clk); in_valid = 0;
  endtask

  initial begin
    in_valid = 0; in_grp_last = 0; in_psum = 0; in_pix = 0; out_ready = 1; cfg = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    fork
      begin
        run_mode(SPK_1B, 2, 0);
        run_mode(SPK_2B, 4, 1);
        run_mode(SPK_4B, 4, 0);
        run_mode(PIX_8B, 2, 1);
        run_mode(SPK_1B, 1, 1);
      end
      forever begin @(negedge clk); out_ready = ($urandom % 3 != 0); end
    join_any
    disable fork;
    out_ready = 1;
    repeat (10) @(posedge clk);
    checks++;
    if (exp_q.size() != 0 || outs == 0) begin failures++; $display("FAIL %0d outputs missing", exp_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #10000000;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
