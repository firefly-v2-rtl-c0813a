// tb_sew_res_connect: checks the spike-element-wise residual connection.
//
// Words of M x S backbone spikes (4-bit fields holding 0/1) are combined with shortcut spikes
// packed densely in 128-bit beats, for: IAND with 1-bit shortcuts, ADD with 2-bit shortcuts
// saturated to 2 bits, ADD with 2-bit shortcuts shifted, ADD with 4-bit shortcuts kept at 4
// bits, and no residual (pass-through, no shortcut read). Inputs, shortcut beats and output
// ready are randomly throttled; each output word and tile_last are compared with a reference.
module tb_sew_res_connect;
  import ff2_pkg::*;
  localparam int M = 16, S = 4, WORDS = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  layer_cfg_t cfg;
  logic in_valid, in_ready, in_tile_last, sc_valid, sc_ready, out_valid, out_ready, out_tile_last;
  logic [M*S*4-1:0] in_spk, out_spk;
  logic [127:0] sc_data;
  sew_res_connect #(.M(M), .S(S)) dut (.*);

  typedef struct { logic [M*S*4-1:0] v; bit tl; } exp_t;
  exp_t exp_q [$];
  logic [127:0] sc_q [$];

  always @(negedge clk) begin
    if (!sc_valid || sc_taken) begin
      sc_valid = (sc_q.size() > 0) && ($urandom % 3 != 0);
      sc_data  = (sc_q.size() > 0) ? sc_q[0] : '0;
    end
  end
  logic sc_taken = 0;
  always @(posedge clk) begin
    sc_taken = rst_n && sc_valid && sc_ready;
    if (sc_taken) void'(sc_q.pop_front());
  end

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    checks++;
    if (exp_q.size() == 0 || out_spk !== exp_q[0].v || out_tile_last != exp_q[0].tl) begin
      failures++; if (failures < 10) $display("FAIL mode %s", cfg.res_mode.name());
    end
    if (exp_q.size() > 0) void'(exp_q.pop_front());
  end

  task automatic run(res_mode_e rm, int rb, fit_mode_e rf);
    int nb = M * S * rb;
    logic [M*S*4-1:0] sc [WORDS];
    cfg = '0; cfg.res_mode = rm; cfg.res_bits = 3'(rb); cfg.res_fit = rf;
    for (int w = 0; w < WORDS; w++)
      for (int i = 0; i < M*S; i++) sc[w][i*4 +: 4] = 4'($urandom % (1 << rb));
    if (rm != RES_NONE)
      for (int b = 0; b < WORDS * nb / 128; b++) begin
        logic [127:0] beat;
        for (int k = 0; k < 128; k++) begin
          int bit_i = b * 128 + k, w = bit_i / nb, i = (bit_i % nb) / rb, j = bit_i % rb;
          beat[k] = sc[w][i*4 + j];
        end
        sc_q.push_back(beat);
      end
    for (int w = 0; w < WORDS; w++) begin
      exp_t e;
      @(negedge clk);
      while ($urandom % 4 == 0) begin in_valid = 0; @(negedge clk); end
      in_valid = 1; in_tile_last = (w == WORDS-1);
      for (int i = 0; i < M*S; i++) in_spk[i*4 +: 4] = {3'b0, 1'($urandom)};
      for (int i = 0; i < M*S; i++) begin
        logic [3:0] a, b;
        a = in_spk[i*4 +: 4]; b = sc[w][i*4 +: 4];
        case (rm)
          RES_IAND: e.v[i*4 +: 4] = {3'b0, ~a[0] & b[0]};
          RES_ADD:  e.v[i*4 +: 4] = fit4(5'(a + b), rf);
          default:  e.v[i*4 +: 4] = a;
        endcase
      end
      e.tl = in_tile_last;
      exp_q.push_back(e);
      @(posedge clk);
      while (!in_ready) @(posedge clk);
    end
    @(negedge clk); in_valid = 0;
    repeat (6) @(posedge clk);
    checks++;
    if (exp_q.size() != 0 || sc_q.size() != 0) begin
      failures++; $display("FAIL left: %0d words, %0d beats", exp_q.size(), sc_q.size());
    end
  endtask

  initial begin
    in_valid = 0; in_spk = 0; in_tile_last = 0; out_ready = 1; cfg = '0; sc_valid = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    fork
      begin
        run(RES_IAND, 1, FIT_SAT2);
        run(RES_ADD, 2, FIT_SAT2);
        run(RES_ADD, 2, FIT_SHIFT2);
        run(RES_ADD, 4, FIT_EXT4);
        run(RES_NONE, 1, FIT_SAT2);
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
