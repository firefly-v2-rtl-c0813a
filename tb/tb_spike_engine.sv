// tb_spike_engine: checks the spike computing engine (gearboxes, PE array, gather) as a whole.
//
// Groups of 1..9 steps of random V x N x S spike tiles and M x V weight matrices are offered on
// clk; the step flagged `last` closes a group. Every output pixel must equal the reference
// sum over its group of weight(m, v) x spike(v, n, s), wrapped to 12 bits, pixels 0..N-1 in
// order with out_grp_last on pixel N-1. Phase 1 keeps both inputs valid and the output ready
// with groups of 9 steps: the engine must then take one step in every clk cycle (the paper's
// one tile per slow cycle). Phase 2 adds random input gaps and output back-pressure; the
// return FIFO must then stall the inputs at some point and nothing may be lost.
module tb_spike_engine;
  localparam int M = 16, V = 16, N = 8, S = 4;
  logic clk = 0, clk2x = 0, rst_n = 0;
  initial forever begin
    #1 clk2x = 1; clk = 1; #1 clk2x = 0; #1 clk2x = 1; clk = 0; #1 clk2x = 0;
  end
  int checks = 0, failures = 0;

  logic spk_valid, spk_ready, spk_last, w_valid, w_ready, out_valid, out_ready, out_grp_last, busy;
  logic [V*N*S-1:0] spk_data;
  logic [M*V*8-1:0] w_data;
  logic [M*S*12-1:0] out_psum;
  logic [$clog2(N)-1:0] out_pix;
  spike_engine #(.M(M), .V(V), .N(N), .S(S)) dut (.*);

  typedef logic [11:0] grp_t [N][M][S];
  grp_t ref_q [$];
  grp_t acc;
  int pix = 0, words = 0, stalls = 0, steps = 0;

  always @(posedge clk) if (rst_n) begin
    if (spk_valid && w_valid && !(spk_ready && w_ready)) stalls++;
    if (out_valid && out_ready) begin
      checks++;
      if (ref_q.size() == 0) begin
        failures++; $display("FAIL unexpected output");
      end else begin
        logic bad;
        bad = (int'(out_pix) != pix) || (out_grp_last != (pix == N-1));
        for (int m = 0; m < M; m++)
          for (int s = 0; s < S; s++)
            if (out_psum[(m*S+s)*12 +: 12] !== ref_q[0][pix][m][s]) bad = 1;
        if (bad) begin
          failures++;
          if (failures < 10) $display("FAIL pixel %0d", pix);
        end
        words++;
        if (pix == N-1) begin pix = 0; void'(ref_q.pop_front()); end
        else pix++;
      end
    end
  end

  task automatic run_groups(int ngrp, bit rnd);
    for (int g = 0; g < ngrp; g++) begin
      int len;
      len = rnd ? 1 + $urandom % 9 : 9;
      foreach (acc[n, m, s]) acc[n][m][s] = 0;
      for (int i = 0; i < len; i++) begin
        @(negedge clk);
        while (rnd && $urandom % 4 == 0) begin
          spk_valid = 0; w_valid = 0; @(negedge clk);
        end
        spk_valid = 1; w_valid = 1; spk_last = (i == len - 1);
        for (int k = 0; k < V*N*S/32; k++) spk_data[k*32 +: 32] = $urandom;
        for (int k = 0; k < M*V*8/32; k++) w_data[k*32 +: 32] = $urandom;
        for (int n = 0; n < N; n++)
          for (int m = 0; m < M; m++)
            for (int s = 0; s < S; s++)
              for (int v = 0; v < V; v++)
                if (spk_data[(n*S+s)*V+v]) acc[n][m][s] += 12'(signed'(w_data[(v*M+m)*8 +: 8]));
        @(posedge clk);
        while (!(spk_ready && w_ready)) @(posedge clk);
        steps++;
      end
      ref_q.push_back(acc);
    end
    @(negedge clk); spk_valid = 0; w_valid = 0;
  endtask

  initial begin
    longint t0, t1;
    spk_valid = 0; w_valid = 0; spk_last = 0; spk_data = 0; w_data = 0; out_ready = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    // phase 1: full rate
    t0 = $time;
    run_groups(40, 0);
    t1 = $time;
    checks++;
    if ((t1 - t0) / 4 > 40 * 9 + 1) begin
      failures++; $display("FAIL %0d steps took %0d cycles", 40*9, (t1 - t0) / 4);
    end
    // phase 2: random gaps and back-pressure
    fork
      run_groups(300, 1);
      repeat (20000) begin @(negedge clk); out_ready = ($urandom % 4 == 0); end
    join_any
    disable fork;
    out_ready = 1;
    repeat (200) @(posedge clk);
    checks += 2;
    if (ref_q.size() != 0 || words != 340 * N) begin
      failures++; $display("FAIL %0d groups left, %0d words", ref_q.size(), words);
    end
    if (stalls == 0) begin failures++; $display("FAIL input never stalled"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #4000000;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
