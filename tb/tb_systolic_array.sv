// tb_systolic_array: checks the N x M/4 output-stationary PE array at its default size.
//
// Random groups of 1..10 words are fed on clk2x with random idle cycles; every word carries
// N spike rows and M/4 weight columns. The reference sum of PE(r,c), lane m, time step s is the
// 12-bit wrapped sum over the group of weight(c*4+m, v) x spike(r, v, s). Each PE's result must
// be correct and arrive exactly r + c + V/4 cycles after the group's last word entered the
// array (the systolic staircase plus the cascade latency).
module tb_systolic_array;
  localparam int M = 16, V = 16, N = 8, S = 4, C = M / 4, PH = V / 4;
  logic clk2x = 0, rst_n = 0;
  always #5 clk2x = ~clk2x;
  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk2x) cyc <= cyc + 1;

  logic in_valid, in_last;
  logic [N*(V/2)*S-1:0] spk_in;
  logic [C*(V/2)*32-1:0] w_in;
  logic [N*C-1:0] sum_valid;
  logic [N*C*S*48-1:0] sums;
  systolic_array #(.M(M), .V(V), .N(N), .S(S)) dut (.*);

  typedef logic [11:0] grp_t [N][C][4][S];
  grp_t ref_q [$];
  longint last_q [$];
  int got [N][C];       // results seen per PE
  grp_t acc;

  always @(posedge clk2x) if (rst_n) begin
    for (int r = 0; r < N; r++)
      for (int c = 0; c < C; c++)
        if (sum_valid[r*C+c]) begin
          int g;
          g = got[r][c];
          checks++;
          if (g >= ref_q.size()) begin
            failures++; $display("FAIL unexpected sum PE(%0d,%0d)", r, c);
          end else begin
            logic bad;
            bad = 0;
            if (cyc - last_q[g] != r + c + PH) begin
              bad = 1;
              $display("FAIL PE(%0d,%0d) latency %0d", r, c, cyc - last_q[g]);
            end
            for (int m = 0; m < 4; m++)
              for (int s = 0; s < S; s++)
                if (sums[(r*C+c)*S*48 + (s*4+m)*12 +: 12] !== ref_q[g][r][c][m][s]) bad = 1;
            if (bad) begin
              failures++;
              if (failures < 10) $display("FAIL PE(%0d,%0d) group %0d sums", r, c, g);
            end
          end
          got[r][c] = g + 1;
        end
  end

  initial begin
    in_valid = 0; in_last = 0; spk_in = 0; w_in = 0;
    foreach (got[r, c]) got[r][c] = 0;
    repeat (3) @(posedge clk2x);
    rst_n = 1;
    for (int g = 0; g < 150; g++) begin
      int len;
      len = 1 + $urandom % 10;
      foreach (acc[r, c, m, s]) acc[r][c][m][s] = 0;
      for (int i = 0; i < len; i++) begin
        while ($urandom % 4 == 0) begin
          @(negedge clk2x); in_valid = 0;
        end
        @(negedge clk2x);
        in_valid = 1; in_last = (i == len - 1);
        for (int k = 0; k < N*(V/2)*S/32; k++) spk_in[k*32 +: 32] = $urandom;
        for (int k = 0; k < C*(V/2); k++) w_in[k*32 +: 32] = $urandom;
        for (int r = 0; r < N; r++)
          for (int c = 0; c < C; c++)
            for (int m = 0; m < 4; m++)
              for (int s = 0; s < S; s++)
                for (int v = 0; v < V/2; v++)
                  if (spk_in[r*(V/2)*S + s*(V/2) + v])
                    acc[r][c][m][s] += 12'(signed'(w_in[c*(V/2)*32 + (v*4+m)*8 +: 8]));
        if (in_last) begin
          ref_q.push_back(acc);
          last_q.push_back(cyc);
        end
      end
    end
    @(negedge clk2x); in_valid = 0;
    repeat (40) @(posedge clk2x);
    foreach (got[r, c]) begin
      checks++;
      if (got[r][c] != ref_q.size()) begin
        failures++; $display("FAIL PE(%0d,%0d) gave %0d sums", r, c, got[r][c]);
      end
    end
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
