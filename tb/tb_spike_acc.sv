// tb_spike_acc: checks the spike counter and its pass-through mode.
//
// Three tiles of random spike words (4-bit values 0..3 in each of the M x S fields) are sent
// with random gaps and back-pressure. In counting mode the unit must send exactly one word per
// tile, at the tile's end, holding per channel the sum of all values of that channel (16-bit
// counts), with tile_last set, and start again from zero for the next tile. In spike mode each
// word must pass unchanged.
module tb_spike_acc;
  import ff2_pkg::*;
  localparam int M = 16, S = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  layer_cfg_t cfg;
  logic in_valid, in_ready, in_tile_last, out_valid, out_ready, out_tile_last;
  logic [M*S*4-1:0] in_spk, out_data;
  spike_acc #(.M(M), .S(S)) dut (.*);

  typedef struct { logic [M*S*4-1:0] v; bit tl; } exp_t;
  exp_t exp_q [$];
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    checks++;
    if (exp_q.size() == 0 || out_data !== exp_q[0].v || out_tile_last != exp_q[0].tl) begin
      failures++; if (failures < 10) $display("FAIL mode %s", cfg.out_mode.name());
    end
    if (exp_q.size() > 0) void'(exp_q.pop_front());
  end

  task automatic run(out_mode_e om);
    cfg = '0; cfg.out_mode = om;
    for (int tile = 0; tile < 3; tile++) begin
      int cnt [M];
      int len;
      len = 20 + $urandom % 60;
      foreach (cnt[m]) cnt[m] = 0;
      for (int w = 0; w < len; w++) begin
        @(negedge clk);
        while ($urandom % 4 == 0) begin in_valid = 0; @(negedge clk); end
        in_valid = 1; in_tile_last = (w == len-1);
        for (int i = 0; i < M*S; i++) begin
          in_spk[i*4 +: 4] = 4'($urandom % 4);
          cnt[i/S] += in_spk[i*4 +: 4];
        end
        if (om != OUT_COUNT) begin
          exp_t e; e.v = in_spk; e.tl = in_tile_last; exp_q.push_back(e);
        end else if (in_tile_last) begin
          exp_t e; e.v = '0; e.tl = 1;
          for (int m = 0; m < M; m++) e.v[m*16 +: 16] = 16'(cnt[m]);
          exp_q.push_back(e);
        end
        @(posedge clk);
        while (!in_ready) @(posedge clk);
      end
    end
    @(negedge clk); in_valid = 0;
    repeat (6) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL %0d outputs missing", exp_q.size()); end
  endtask

  initial begin
    in_valid = 0; in_spk = 0; in_tile_last = 0; out_ready = 1; cfg = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    fork
      begin run(OUT_COUNT); run(OUT_SPIKE); run(OUT_COUNT); end
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
