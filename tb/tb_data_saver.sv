// tb_data_saver: checks the write-side command generator and packing cache.
//
// Three layers (1-bit spikes, 2-bit spikes and 32-bit partial sums; two output-channel tiles
// each) send random result words with random gaps. A write DataMover model takes the commands
// and beats with random back-pressure and answers each finished command with a status. Each
// command must address out_base + o*out_len with out_len bytes; the beats must hold the words
// packed densely at the mode's width, lowest first, zero-padded, with tlast on the tile's
// last beat; `done` must rise only after both statuses.
module tb_data_saver;
  import ff2_pkg::*;
  localparam int M = 16, S = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  layer_cfg_t cfg;
  logic start, in_valid, in_ready, in_tile_last, cmd_valid, cmd_ready, dout_valid, dout_ready;
  logic dout_last, sts_valid, done;
  logic [M*S*32-1:0] in_data;
  dm_cmd_t cmd;
  logic [127:0] dout_data;
  data_saver #(.M(M), .S(S)) dut (.*);

  dm_cmd_t exp_cmd [$];
  logic [128:0] exp_beat [$];
  int beats_in_cmd = 0, cmds_open = 0;
  always @(posedge clk) begin
    sts_valid <= 0;
    if (rst_n && cmd_valid && cmd_ready) begin
      checks++;
      if (exp_cmd.size() == 0 || cmd != exp_cmd[0]) begin
        failures++; $display("FAIL command %h/%0d", cmd.addr, cmd.btt);
      end
      if (exp_cmd.size() > 0) void'(exp_cmd.pop_front());
      cmds_open++;
    end
    if (rst_n && dout_valid && dout_ready) begin
      checks++;
      if (exp_beat.size() == 0 || {dout_last, dout_data} !== exp_beat[0]) begin
        failures++; if (failures < 10) $display("FAIL beat %h last %b", dout_data, dout_last);
      end
      if (exp_beat.size() > 0) void'(exp_beat.pop_front());
      if (dout_last) begin sts_valid <= 1; cmds_open--; end
    end
  end

  task automatic run(out_mode_e om, int bits, int words);
    int vb = (om == OUT_PSUM) ? M*S*32 : M*S*bits;
    int nbeats = (words * vb + 127) / 128;
    cfg = '0; cfg.out_mode = om; cfg.co_tiles = 8'd2; cfg.out_base = 32'h4000_0000;
    cfg.out_len = nbeats * 16;
    cfg.res_mode = (bits == 2) ? RES_ADD : RES_NONE; cfg.res_fit = FIT_SAT2;
    for (int o = 0; o < 2; o++) begin
      dm_cmd_t c;
      c.addr = cfg.out_base + o * cfg.out_len; c.btt = 23'(cfg.out_len);
      exp_cmd.push_back(c);
    end
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    for (int o = 0; o < 2; o++) begin
      logic [128*64-1:0] packed_bits;
      logic [M*S*32-1:0] wq [];
      wq = new[words];
      packed_bits = '0;
      foreach (wq[w]) begin
        for (int k = 0; k < M*S; k++) wq[w][k*32 +: 32] = $urandom;
        for (int k = 0; k < vb; k++) packed_bits[w*vb + k] = wq[w][k];
      end
      for (int b = 0; b < nbeats; b++) exp_beat.push_back({b == nbeats-1, packed_bits[b*128 +: 128]});
      for (int w = 0; w < words; w++) begin
        @(negedge clk);
        while ($urandom % 3 == 0) begin in_valid = 0; @(negedge clk); end
        in_valid = 1; in_tile_last = (w == words-1); in_data = wq[w];
        @(posedge clk);
        while (!in_ready) @(posedge clk);
      end
      @(negedge clk); in_valid = 0;
    end
    while (exp_beat.size() > 0) @(posedge clk);
    repeat (3) @(posedge clk);
    checks++;
    if (!done || exp_cmd.size() != 0) begin failures++; $display("FAIL done or command missing"); end
  endtask

  initial begin
    start = 0; in_valid = 0; in_tile_last = 0; in_data = 0; cfg = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    fork
      begin
        run(OUT_SPIKE, 1, 9);       // 9 x 64 bits: last beat padded
        run(OUT_SPIKE, 2, 8);
        run(OUT_PSUM, 32, 3);
      end
      forever begin
        @(negedge clk); cmd_ready = ($urandom % 2 == 0); dout_ready = ($urandom % 3 != 0) && cmds_open > 0;
      end
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
