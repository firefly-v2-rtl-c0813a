// tb_gather_fast2slow: checks shift-align, clock crossing and pixel serialisation.
//
// On clk2x the testbench plays the PE array: for each group, PE(r,c) raises sum_valid r+c
// cycles after PE(0,0) with random 12-bit sums. Groups start every 1..6 fast cycles, but never
// more than FIFO_DEPTH groups ahead of `grp_done` (the engine's credit rule). On clk the output
// is taken with random back-pressure. Every group must come out as N words, pixel 0 first,
// value (m*S+s) = lane m%4 of column s of PE(pix, m/4), with out_grp_last on pixel N-1 and one
// grp_done per group. With no back-pressure a new pixel must leave every clk cycle.
module tb_gather_fast2slow;
  localparam int M = 16, N = 8, S = 4, C = M / 4, D = 4;
  logic clk = 0, clk2x = 0, rst_n = 0;
  initial forever begin
    #1 clk2x = 1; clk = 1; #1 clk2x = 0; #1 clk2x = 1; clk = 0; #1 clk2x = 0;
  end
  int checks = 0, failures = 0;

  logic [N*C-1:0] sum_valid;
  logic [N*C*S*48-1:0] sums;
  logic out_valid, out_ready, out_grp_last, grp_done;
  logic [M*S*12-1:0] out_psum;
  logic [$clog2(N)-1:0] out_pix;
  gather_fast2slow #(.M(M), .N(N), .S(S), .FIFO_DEPTH(D)) dut (.*);

  typedef logic [N*C*S*48-1:0] grp_t;
  grp_t grp_q [$];
  grp_t pend [$];          // groups being played into the array
  longint start_t [$];
  int sent = 0, done_cnt = 0, outw = 0, ngrp = 400;
  longint fc = 0;
  bit full_rate = 1;
  int gap = 0, gaps_seen = 0;

  always @(posedge clk) if (rst_n && grp_done) done_cnt++;

  // fast side: play groups with staircase timing
  always @(negedge clk2x) if (rst_n) begin
    sum_valid = '0;
    for (int k = 0; k < pend.size(); k++)
      for (int r = 0; r < N; r++)
        for (int c = 0; c < C; c++)
          if (fc - start_t[k] == r + c) begin
            sum_valid[r*C+c] = 1;
            sums[(r*C+c)*S*48 +: S*48] = pend[k][(r*C+c)*S*48 +: S*48];
          end
    while (pend.size() > 0 && fc - start_t[0] > N + C) begin
      void'(pend.pop_front()); void'(start_t.pop_front());
    end
    if (gap > 0) gap--;
    else if (sent < ngrp && sent - done_cnt < D && (fc % 2 == 0)) begin
      grp_t g;
      for (int k = 0; k < N*C*S*48/32; k++) g[k*32 +: 32] = $urandom;
      pend.push_back(g); start_t.push_back(fc + 1); grp_q.push_back(g);
      sent++;
      gap = full_rate ? 0 : $urandom % 6;
    end
    fc++;
  end

  // slow side: check outputs
  int pix = 0;
  logic prev_fire = 0;
  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) begin
      checks++;
      if (grp_q.size() == 0) begin
        failures++; $display("FAIL unexpected output");
      end else begin
        logic bad;
        bad = (int'(out_pix) != pix) || (out_grp_last != (pix == N-1));
        for (int m = 0; m < M; m++)
          for (int s = 0; s < S; s++)
            if (out_psum[(m*S+s)*12 +: 12] !==
                grp_q[0][(pix*C + m/4)*S*48 + (s*4 + m%4)*12 +: 12]) bad = 1;
        if (bad) begin
          failures++;
          if (failures < 10) $display("FAIL group word pix %0d (out_pix %0d)", pix, out_pix);
        end
        if (pix == N-1) begin pix = 0; void'(grp_q.pop_front()); end
        else pix++;
        outw++;
      end
    end
    // in the full-rate phase with the output always ready, pixels of a group are back to back
    if (full_rate && out_ready && prev_fire && pix != 0 && !out_valid) gaps_seen++;
    prev_fire = out_valid && out_ready;
  end

  initial begin
    sum_valid = 0; sums = 0; out_ready = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (20000) begin
      @(negedge clk);
      if (sent >= 100) begin full_rate = 0; out_ready = ($urandom % 3 != 0); end
      if (sent == ngrp && grp_q.size() == 0) break;
    end
    checks += 3;
    if (outw != ngrp * N) begin failures++; $display("FAIL %0d words out", outw); end
    if (done_cnt != ngrp) begin failures++; $display("FAIL %0d grp_done", done_cnt); end
    if (gaps_seen != 0) begin failures++; $display("FAIL %0d bubbles at full rate", gaps_seen); end
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
