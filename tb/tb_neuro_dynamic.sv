// tb_neuro_dynamic: checks the two-phase neurodynamics unit for IF, LIF and RMP neurons.
//
// Three instances (one per neuron model) get the same stream: two output-channel tiles, each
// with its own thresholds from a throttled 128-bit stream, and for each of four pixel groups
// three time tiles of N pixels (membrane inputs of S steps), `in_first` on the first time
// tile. A step-by-step reference (IF: integrate, fire if V > threshold, reset to 0; LIF: leak
// V -= V >>> 1 first; RMP: subtract the threshold on a spike) gives the expected S spikes per
// word. Outputs are checked with random back-pressure, together with pixel and tile_last.
// Timing: with the output always ready one word per cycle must pass, two cycles after input.
module tb_neuro_dynamic;
  import ff2_pkg::*;
  localparam int M = 16, N = 8, S = 4, TT = 3, G = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic in_valid, in_first, in_tile_last, out_ready;
  logic [2:0] in_ready, thr_ready, out_valid, out_tile_last;
  logic [M*S*18-1:0] in_vmem;
  logic [$clog2(N)-1:0] in_pix;
  logic [$clog2(N)-1:0] out_pix [3];
  logic [M*S-1:0] out_spk [3];
  logic thr_valid;
  logic [127:0] thr_data;

  neuro_dynamic #(.M(M), .N(N), .S(S), .NEURON(NEURON_IF)) u_if (
    .clk, .rst_n, .in_valid(in_valid && in_ready == 3'b111), .in_ready(in_ready[0]), .in_vmem,
    .in_pix, .in_first, .in_tile_last, .thr_valid(thr_valid && thr_ready == 3'b111),
    .thr_ready(thr_ready[0]), .thr_data, .out_valid(out_valid[0]), .out_ready,
    .out_spk(out_spk[0]), .out_pix(out_pix[0]), .out_tile_last(out_tile_last[0]));
  neuro_dynamic #(.M(M), .N(N), .S(S), .NEURON(NEURON_LIF), .LEAK_SHIFT(1)) u_lif (
    .clk, .rst_n, .in_valid(in_valid && in_ready == 3'b111), .in_ready(in_ready[1]), .in_vmem,
    .in_pix, .in_first, .in_tile_last, .thr_valid(thr_valid && thr_ready == 3'b111),
    .thr_ready(thr_ready[1]), .thr_data, .out_valid(out_valid[1]), .out_ready,
    .out_spk(out_spk[1]), .out_pix(out_pix[1]), .out_tile_last(out_tile_last[1]));
  neuro_dynamic #(.M(M), .N(N), .S(S), .NEURON(NEURON_RMP)) u_rmp (
    .clk, .rst_n, .in_valid(in_valid && in_ready == 3'b111), .in_ready(in_ready[2]), .in_vmem,
    .in_pix, .in_first, .in_tile_last, .thr_valid(thr_valid && thr_ready == 3'b111),
    .thr_ready(thr_ready[2]), .thr_data, .out_valid(out_valid[2]), .out_ready,
    .out_spk(out_spk[2]), .out_pix(out_pix[2]), .out_tile_last(out_tile_last[2]));

  typedef struct { logic [M*S-1:0] spk [3]; int pix; bit tlast; longint t; } exp_t;
  exp_t exp_q [$];
  logic [127:0] thr_q [$];
  int outs = 0, lat_bad = 0;
  bit full_rate = 1;

  always @(negedge clk) begin
    thr_valid = (thr_q.size() > 0) && ($urandom % 3 != 0);
    thr_data  = (thr_q.size() > 0) ? thr_q[0] : '0;
  end
  always @(posedge clk) if (rst_n && thr_valid && thr_ready == 3'b111) void'(thr_q.pop_front());

  always @(posedge clk) if (rst_n && out_valid[0] && out_ready) begin
    checks++;
    if (exp_q.size() == 0 || out_valid != 3'b111) begin
      failures++; $display("FAIL unexpected or unaligned output");
    end else begin
      logic bad;
      bad = 0;
      for (int k = 0; k < 3; k++)
        if (out_spk[k] !== exp_q[0].spk[k] || int'(out_pix[k]) != exp_q[0].pix ||
            out_tile_last[k] != exp_q[0].tlast) begin
          bad = 1;
          if (failures < 10) $display("FAIL neuron %0d word %0d: %h expected %h", k, outs,
                                      out_spk[k], exp_q[0].spk[k]);
        end
      if (full_rate && cyc - exp_q[0].t != 2) lat_bad++;
      if (bad) failures++;
      void'(exp_q.pop_front());
      outs++;
    end
  end

  int vm [3][N][M];
  initial begin
    int thr [M];
    in_valid = 0; in_first = 0; in_tile_last = 0; in_vmem = 0; in_pix = 0; out_ready = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    fork
      for (int o = 0; o < 2; o++) begin
        for (int m = 0; m < M; m++) thr[m] = $urandom % 600;
        for (int b = 0; b < M*32/128; b++) begin
          logic [127:0] w;
          for (int k = 0; k < 4; k++) w[k*32 +: 32] = thr[b*4+k];
          thr_q.push_back(w);
        end
        for (int g = 0; g < G; g++) begin
          if (o == 1) full_rate = 0;
          for (int t = 0; t < TT; t++)
            for (int n = 0; n < N; n++) begin
              exp_t e;
              @(negedge clk);
              while (!full_rate && $urandom % 4 == 0) begin in_valid = 0; @(negedge clk); end
              in_valid = 1; in_pix = n; in_first = (t == 0);
              in_tile_last = (g == G-1) && (t == TT-1) && (n == N-1);
              for (int m = 0; m < M; m++)
                for (int s = 0; s < S; s++)
                  in_vmem[(m*S+s)*18 +: 18] = 18'(int'($urandom % 500) - 200);
              for (int k = 0; k < 3; k++) begin
                e.spk[k] = '0;
                for (int m = 0; m < M; m++) begin
                  if (t == 0) vm[k][n][m] = 0;
                  for (int s = 0; s < S; s++) begin
                    int p;
                    p = int'(signed'(in_vmem[(m*S+s)*18 +: 18]));
                    if (k == 1) vm[k][n][m] = vm[k][n][m] - (vm[k][n][m] >>> 1);
                    vm[k][n][m] += p;
                    if (vm[k][n][m] > thr[m]) begin
                      e.spk[k][m*S+s] = 1;
                      vm[k][n][m] = (k == 2) ? vm[k][n][m] - thr[m] : 0;
                    end
                  end
                end
              end
              e.pix = n; e.tlast = in_tile_last;
              @(posedge clk);
              while (in_ready != 3'b111) @(posedge clk);
              e.t = cyc;
              exp_q.push_back(e);
            end
        end
        @(negedge clk); in_valid = 0;
      end
      forever begin @(negedge clk); out_ready = full_rate ? 1'b1 : ($urandom % 3 != 0); end
    join_any
    disable fork;
    out_ready = 1;
    repeat (10) @(posedge clk);
    checks += 2;
    if (exp_q.size() != 0 || outs != 2*G*TT*N) begin failures++; $display("FAIL %0d outputs", outs); end
    if (lat_bad != 0) begin failures++; $display("FAIL %0d words not 2 cycles late", lat_bad); end
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
