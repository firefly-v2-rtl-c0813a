// tb_firefly_v2: end-to-end test of the accelerator at its default parameters.
//
// Memory-mapped DataMover models serve the two read channels and the write channel from a
// word-addressed memory; the host side writes the layer configuration over AXI4-Lite and waits
// for done. Six layers are run, each checked value by value against a reference computed in
// this testbench from the same random inputs:
//   A  1-bit spikes, 3x3 conv, pad 1, two output-channel tiles, IF neurons
//   B  8-bit pixels (direct encoding), 3x3 conv stride 2, partial sums written out, shift by 1
//   C  2-bit spikes, two input-channel tiles, 2x2 max pooling
//   D  4-bit spikes, 1x1 conv, 2x2 average pooling with shift
//   E  1-bit spikes, T = 8, SEW ADD with 2-bit shortcut spikes, saturated to 2 bits
//   F  1-bit spikes, SEW IAND with 1-bit shortcut spikes, spike counts written out
// It also checks that the engine takes exactly Co/M*Ho*Wo/N*T/S*Kh*Kw*Ci/V steps per layer and
// counts how often each mechanism occurs (padding, coalescing, row waits, weight replays,
// engine back-pressure, the second DataMover, each spike mode, pooling, residual, counting).
module tb_firefly_v2;
  import ff2_pkg::*;
  localparam int M = 16, V = 16, N = 8, S = 4;

  logic clk = 0, clk2x = 0, rst_n = 0;
  initial begin
    #1;
    forever begin
      clk2x = 1; clk = 1; #1 clk2x = 0; #1 clk2x = 1; clk = 0; #1 clk2x = 0; #1;
    end
  end

  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  // ---------------- DUT ----------------
  logic s_awvalid = 0, s_wvalid = 0, s_bready = 1, s_arvalid = 0, s_rready = 1;
  logic s_awready, s_wready, s_bvalid, s_arready, s_rvalid;
  logic [11:0] s_awaddr = 0, s_araddr = 0;
  logic [31:0] s_wdata = 0, s_rdata;
  logic [1:0] rcmd_valid, rcmd_ready, rdata_valid, rdata_ready, rdata_last;
  dm_cmd_t rcmd [2];
  logic [127:0] rdata [2];
  logic wcmd_valid, wcmd_ready, wdata_valid, wdata_ready, wdata_last, wsts_valid, irq_done;
  dm_cmd_t wcmd;
  logic [127:0] wdata;

  firefly_v2 dut (.*);

  // ---------------- memory and DataMover models ----------------
  localparam int MEMW = 1 << 16;            // 128-bit words (1 MiB)
  logic [127:0] mem [MEMW];

  for (genvar i = 0; i < 2; i++) begin : g_rdm
    dm_cmd_t q [$];
    int unsigned pos;
    logic        act;
    dm_cmd_t     cur;
    assign rcmd_ready[i] = (q.size() < 4);
    always @(posedge clk) begin
      if (!rst_n) begin
        act <= 0; rdata_valid[i] <= 0;
      end else begin
        if (rcmd_valid[i] && rcmd_ready[i]) q.push_back(rcmd[i]);
        if (rdata_valid[i] && rdata_ready[i]) begin
          rdata_valid[i] <= 0;
          if (rdata_last[i]) act <= 0;
        end
        if ((!rdata_valid[i] || rdata_ready[i]) && ($urandom % 5 != 0)) begin
          if (act && !(rdata_valid[i] && rdata_ready[i] && rdata_last[i])) begin
            rdata_valid[i] <= 1;
            rdata[i] <= mem[(cur.addr >> 4) + pos];
            rdata_last[i] <= (pos + 1) * 16 >= cur.btt;
            pos <= pos + 1;
          end else if (q.size() > 0) begin
            dm_cmd_t c;
            c = q.pop_front();
            cur <= c; act <= 1; pos <= 1;
            rdata_valid[i] <= 1;
            rdata[i] <= mem[c.addr >> 4];
            rdata_last[i] <= (c.btt <= 16);
          end
        end
      end
    end
  end

  dm_cmd_t wq [$];
  int unsigned wpos = 0;
  assign wcmd_ready  = (wq.size() < 4);
  assign wdata_ready = (wq.size() > 0) && rst_n;
  always @(posedge clk) begin
    wsts_valid <= 0;
    if (rst_n && wcmd_valid && wcmd_ready) wq.push_back(wcmd);
    if (wdata_valid && wdata_ready) begin
      mem[(wq[0].addr >> 4) + wpos] <= wdata;
      if (wdata_last) begin
        checks++;
        if ((wpos + 1) * 16 != wq[0].btt) begin
          failures++;
          $display("FAIL write length %0d beats, command %0d bytes", wpos + 1, wq[0].btt);
        end
        void'(wq.pop_front());
        wpos <= 0;
        wsts_valid <= 1;
      end else wpos <= wpos + 1;
    end
  end

  // ---------------- mechanism counters ----------------
  int n_pad = 0, n_coal = 0, n_rowwait = 0, n_replay = 0, n_credit = 0, n_dm1 = 0, n_steps = 0;
  int n_spk_out = 0, n_scb = 0, n_resf = 0, n_spkb = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.u_cpad.out_valid && dut.u_cpad.out_ready && dut.u_cpad.is_pad) n_pad++;
    if (dut.u_coal.out_valid && dut.u_coal.out_ready && dut.u_coal.is_pad) n_coal++;
    if (!dut.u_im2col.rd_ok && !dut.u_im2col.done_all) n_rowwait++;
    if (dut.u_reuse.out_valid && dut.u_reuse.out_ready && dut.u_reuse.rep != 0 && dut.u_reuse.off == 0) n_replay++;
    if (dut.u_engine.spk_valid && dut.u_engine.w_valid && !dut.u_engine.fire) n_credit++;
    if (rcmd_valid[1] && rcmd_ready[1]) n_dm1++;
    if (dut.u_engine.fire) n_steps++;
    if (dut.in_dv[1] && dut.in_dr[1]) n_scb++;
    if (dut.u_res.fire) n_resf++;
    if (dut.u_cg_spk.din_valid && dut.u_cg_spk.din_ready) n_spkb++;
    if (dut.u_neuro.out_valid && dut.u_neuro.out_ready && dut.u_neuro.out_spk != 0) n_spk_out++;
  end

  // ---------------- host access ----------------
  task automatic axil_write(input logic [11:0] a, input logic [31:0] d);
    @(negedge clk);
    s_awvalid = 1; s_awaddr = a; s_wvalid = 1; s_wdata = d;
    do @(posedge clk); while (!(s_awready));
    @(negedge clk);
    s_awvalid = 0; s_wvalid = 0;
  endtask

  task automatic axil_read(input logic [11:0] a, output logic [31:0] d);
    @(negedge clk);
    s_arvalid = 1; s_araddr = a;
    do @(posedge clk); while (!s_arready);
    @(negedge clk);
    s_arvalid = 0;
    while (!s_rvalid) @(negedge clk);
    d = s_rdata;
  endtask

  // ---------------- layer description and reference ----------------
  localparam int IN_BASE = 32'h0000_0000, RES_BASE = 32'h0004_0000, PRM_BASE = 32'h0008_0000,
                 OUT_BASE = 32'h000C_0000;
  int Hi, Wi, P, Sd, K, Ci, Co, T, B, Ho, Wo, WG, RB;
  int inp [][][][];      // [y][x][ci][t] spike value (B bits)
  int wgt [][][][];      // [co][ci][kh][kw]
  int bias [], thr [];
  int sc [][][][];       // shortcut [co][h][x][t]
  layer_cfg_t cfg;

  function automatic int bits_of(spk_mode_e m);
    case (m) SPK_2B: return 2; SPK_4B: return 4; PIX_8B: return 8; default: return 1; endcase
  endfunction

  function automatic void put_word64(int widx, logic [63:0] w);
    logic [127:0] t;
    t = mem[(IN_BASE >> 4) + widx / 2];
    t[64 * (widx % 2) +: 64] = w;
    mem[(IN_BASE >> 4) + widx / 2] = t;
  endfunction

  function automatic void set_bits(int base_byte, int bitpos, int nbits, longint val);
    for (int i = 0; i < nbits; i++) begin
      int b;
      logic [127:0] t;
      b = bitpos + i;
      t = mem[(base_byte >> 4) + b / 128];
      t[b % 128] = val[i];
      mem[(base_byte >> 4) + b / 128] = t;
    end
  endfunction

  function automatic longint get_bits(int base_byte, int bitpos, int nbits, bit sgn);
    longint v = 0;
    for (int i = 0; i < nbits; i++) begin
      int b = bitpos + i;
      v[i] = mem[(base_byte >> 4) + b / 128][b % 128];
    end
    if (sgn && v[nbits-1]) v = v - (longint'(1) << nbits);
    return v;
  endfunction

  // value of the padded input at (y, x) in padded coordinates, 0 outside
  function automatic int pin(int y, int x, int ci, int t);
    int yy = y - P, xx = x - P;
    if (yy < 0 || yy >= Hi || xx < 0 || xx >= Wi || ci >= Ci) return 0;
    return inp[yy][xx][ci][t];
  endfunction

  // synaptic current (merged, with bias) of output (co, h, x) at time t
  function automatic int current(int co, int h, int x, int t, bit shl);
    int acc = bias[co];
    for (int ci = 0; ci < Ci; ci++)
      for (int kh = 0; kh < K; kh++)
        for (int kw = 0; kw < K; kw++)
          acc += wgt[co][ci][kh][kw] * pin(h * Sd + kh, x * Sd + kw, ci, t);
    return shl ? acc * 2 : acc;
  endfunction

  task automatic build_layer(spk_mode_e mode, int hi, int wi, int p, int sd, int k, int ci, int co,
                             int t, int wmax, int thmin, int thmax);
    int ct, te, tt;
    Hi = hi; Wi = wi; P = p; Sd = sd; K = k; Ci = ci; Co = co; T = t; B = bits_of(mode);
    Ho = (Hi + 2*P - K) / Sd + 1; Wo = (Wi + 2*P - K) / Sd + 1; WG = (Wo + N - 1) / N;
    ct = (Ci + V - 1) / V;
    te = (mode == PIX_8B) ? 2 : (T * B) / S;
    inp = new[Hi];
    foreach (inp[y]) begin
      inp[y] = new[Wi];
      foreach (inp[y][x]) begin
        inp[y][x] = new[Ci];
        foreach (inp[y][x][c]) begin
          inp[y][x][c] = new[(mode == PIX_8B) ? 1 : T];
          foreach (inp[y][x][c][tt]) inp[y][x][c][tt] = $urandom % (1 << B);
        end
      end
    end
    wgt = new[Co];
    foreach (wgt[o]) begin
      wgt[o] = new[Ci];
      foreach (wgt[o][c]) begin
        wgt[o][c] = new[K];
        foreach (wgt[o][c][a]) begin
          wgt[o][c][a] = new[K];
          foreach (wgt[o][c][a][b]) wgt[o][c][a][b] = int'($urandom % (2*wmax + 1)) - wmax;
        end
      end
    end
    bias = new[Co]; thr = new[Co];
    foreach (bias[o]) begin
      bias[o] = int'($urandom % 9) - 4;
      thr[o]  = thmin + int'($urandom % (thmax - thmin + 1));
    end
    // input spikes: [y][x][ci tile][te tile] words of V*S bits, bit s*V+v
    for (int y = 0; y < Hi; y++)
      for (int x = 0; x < Wi; x++)
        for (int c = 0; c < ct; c++)
          for (int e = 0; e < te; e++) begin
            logic [63:0] w = '0;
            for (int s = 0; s < S; s++)
              for (int v = 0; v < V; v++) begin
                int ch = c * V + v, eq = e * S + s, val, tt2, bit_i;
                if (ch >= Ci) continue;
                if (mode == PIX_8B) begin
                  val = inp[y][x][ch][0];
                  bit_i = (e == 0) ? 4 + s : s;        // high nibble first
                end else begin
                  tt2 = eq / B; bit_i = eq % B;        // lowest bit first
                  val = inp[y][x][ch][tt2];
                end
                w[s*V + v] = (val >> bit_i) & 1;
              end
            put_word64(((y * Wi + x) * ct + c) * te + e, w);
          end
    // parameters per output-channel tile: bias, thresholds, weights
    for (int ot = 0; ot < Co / M; ot++) begin
      int base = PRM_BASE + ot * (128 + K*K*ct*M*V);
      for (int m = 0; m < M; m++) begin
        set_bits(base, m*32, 32, bias[ot*M+m]);
        set_bits(base + 64, m*32, 32, thr[ot*M+m]);
      end
      for (int kh = 0; kh < K; kh++)
        for (int kw = 0; kw < K; kw++)
          for (int c = 0; c < ct; c++) begin
            int wb = base + 128 + ((kh*K + kw)*ct + c) * (M*V);
            for (int v = 0; v < V; v++)
              for (int m = 0; m < M; m++)
                set_bits(wb, (v*M + m)*8, 8, (c*V + v < Ci) ? wgt[ot*M+m][c*V+v][kh][kw] : 0);
          end
    end
    cfg = '0;
    cfg.hi = 10'(Hi); cfg.wi = 10'(Wi); cfg.pad = 3'(P); cfg.stride = 2'(Sd);
    cfg.kh = 4'(K); cfg.kw = 4'(K); cfg.ci_tiles = 8'(ct); cfg.te_tiles = 8'(te);
    cfg.co_tiles = 8'(Co / M); cfg.ho = 10'(Ho); cfg.wg = 8'(WG); cfg.spk_mode = mode;
    cfg.in_base = IN_BASE; cfg.in_len = Hi * Wi * ct * te * 8;
    cfg.prm_base = PRM_BASE; cfg.w_len = K*K*ct*M*V; cfg.prm_len = 128 + K*K*ct*M*V;
    cfg.out_base = OUT_BASE; cfg.res_base = RES_BASE;
  endtask

  // reference output spikes of one neuron: IF, hard reset, spike when V > threshold
  function automatic void neuron(int co, int h, int x, bit shl, ref int spk []);
    int vm = 0;
    spk = new[T];
    for (int t = 0; t < T; t++) begin
      vm += current(co, h, x, (B == 8) ? 0 : t, shl);
      spk[t] = (vm > thr[co]);
      if (spk[t]) vm = 0;
    end
  endfunction

  task automatic run_layer(input string name);
    logic [31:0] st;
    localparam int NCFG = ($bits(layer_cfg_t) + 31) / 32;
    logic [NCFG*32-1:0] flat;
    longint t0;
    flat = '0;
    flat[$bits(layer_cfg_t)-1:0] = cfg;
    for (int i = 0; i < NCFG; i++) axil_write(12'(8 + 4*i), flat[i*32 +: 32]);
    n_steps = 0;
    t0 = cycle;
    axil_write(12'h0, 32'h1);
    do begin
      repeat (50) @(posedge clk);
      axil_read(12'h4, st);
      if (cycle - t0 > 400000) begin
        failures++;
        $display("FAIL %s hangs: steps=%0d im2col rows=%0d/%0d tile=%0d reuse rep=%0d psum=%b/%b neuro=%b/%b saver=%b/%b",
                 name, n_steps, dut.u_im2col.wr_row, dut.u_im2col.rd_base, dut.u_im2col.tile_base,
                 dut.u_reuse.rep, dut.u_psum.out_valid, dut.u_psum.out_ready,
                 dut.u_neuro.out_valid, dut.u_neuro.out_ready, dut.u_saver.in_valid, dut.u_saver.in_ready);
        $display("  spk loader: active=%b seg=%0d off=%0d outstanding=%0d dout_valid=%b res ready=%b unpack valid=%b",
                 dut.u_cg_spk.active, dut.u_cg_spk.d, dut.u_cg_spk.off, dut.u_cg_spk.outstanding,
                 dut.u_cg_spk.dout_valid, dut.u_res.sc_ready, dut.u_res.u_valid);
        $display("  shortcut beats=%0d res fires=%0d loader beats=%0d", n_scb, n_resf, n_spkb);
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
        $finish;
      end
    end while (!st[1]);
    checks++;
    if (n_steps != (Co/M) * Ho * WG * int'(cfg.te_tiles) * K * K * int'(cfg.ci_tiles)) begin
      failures++;
      $display("FAIL %s: %0d engine steps", name, n_steps);
    end
    $display("layer %s done in %0d cycles, %0d engine steps", name, cycle - t0, n_steps);
  endtask

  // ---------------- checks of the written output ----------------
  int bad_shown = 0;
  task automatic expect_val(string name, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (bad_shown++ < 10) $display("FAIL %s: got %0d expected %0d", name, got, exp);
    end
  endtask

  // word index of an output (h, x, t-tile) in engine order, pooled or not
  function automatic int word_idx(int h, int x, int tt, int to, int np);
    return ((h * WG + x / np) * to + tt) * np + x % np;
  endfunction

  task automatic check_spikes(string name, pool_mode_e pm, fit_mode_e pf, res_mode_e rm,
                              int rbits, fit_mode_e rf);
    int to = T / S, ob, np, hh, ww;
    int spk [];
    int tilebits;
    np = (pm == POOL_NONE) ? N : N / 2;
    hh = (pm == POOL_NONE) ? Ho : Ho / 2;
    ww = (pm == POOL_NONE) ? Wo : Wo / 2;
    ob = (rm == RES_ADD) ? ((rf == FIT_EXT4) ? 4 : 2) : (pm == POOL_AVG) ? 2 : 1;
    tilebits = hh * WG * to * np * M * S * ob;
    for (int co = 0; co < Co; co++)
      for (int h = 0; h < hh; h++)
        for (int x = 0; x < ww; x++)
          for (int t = 0; t < T; t++) begin
            int e = 0, got, base, w;
            if (pm == POOL_NONE) begin
              neuron(co, h, x, 0, spk); e = spk[t];
            end else begin
              for (int dy = 0; dy < 2; dy++)
                for (int dx = 0; dx < 2; dx++) begin
                  neuron(co, 2*h+dy, 2*x+dx, 0, spk);
                  e = (pm == POOL_MAX) ? (e | spk[t]) : e + spk[t];
                end
              if (pm == POOL_AVG) e = int'(fit4(5'(e), pf));
            end
            if (rm == RES_IAND) e = (!e) & sc[co][h][x][t];
            if (rm == RES_ADD)  e = int'(fit4(5'(e + sc[co][h][x][t]), rf));
            base = OUT_BASE + (co / M) * cfg.out_len;
            w = word_idx(h, x, t / S, to, np);
            got = int'(get_bits(base, w * M*S*ob + ((co % M)*S + t % S) * ob, ob, 0));
            expect_val(name, got, e);
          end
  endtask

  // shortcut spikes for layers with a residual connection
  task automatic build_shortcut(int rbits);
    int to = T / S, words = Ho * WG * to * N;
    sc = new[Co];
    foreach (sc[o]) begin
      sc[o] = new[Ho];
      foreach (sc[o][h]) begin
        sc[o][h] = new[WG * N];
        foreach (sc[o][h][x]) begin
          sc[o][h][x] = new[T];
          foreach (sc[o][h][x][t]) sc[o][h][x][t] = $urandom % (1 << rbits);
        end
      end
    end
    cfg.res_len = words * M * S * rbits / 8;
    for (int co = 0; co < Co; co++)
      for (int h = 0; h < Ho; h++)
        for (int x = 0; x < WG * N; x++)
          for (int t = 0; t < T; t++)
            set_bits(RES_BASE + (co / M) * cfg.res_len,
                     word_idx(h, x, t / S, to, N) * M*S*rbits + ((co % M)*S + t % S) * rbits,
                     rbits, sc[co][h][x][t]);
  endtask

  function automatic int out_len_bytes(int words, int bits);
    return ((words * bits + 127) / 128) * 16;
  endfunction

  int mech_fail;
  initial begin
    for (int i = 0; i < MEMW; i++) mem[i] = '0;
    repeat (5) @(posedge clk);
    rst_n = 1;
    repeat (5) @(posedge clk);

    // ---- A: 1-bit spikes, 3x3, pad 1, Co = 32, IF ----
    build_layer(SPK_1B, 8, 8, 1, 1, 3, 16, 32, 4, 3, 4, 20);
    cfg.out_len = out_len_bytes(Ho * WG * N, M*S);
    run_layer("A");
    check_spikes("A", POOL_NONE, FIT_SAT2, RES_NONE, 1, FIT_SAT2);

    // ---- B: 8-bit pixels, stride 2, partial sums out with shift ----
    build_layer(PIX_8B, 6, 6, 1, 2, 3, 3, 16, 4, 3, 0, 0);
    cfg.out_mode = OUT_PSUM; cfg.psum_shl = 1;
    cfg.out_len = out_len_bytes(Ho * WG * N, M*S*32);
    run_layer("B");
    for (int co = 0; co < Co; co++)
      for (int h = 0; h < Ho; h++)
        for (int x = 0; x < Wo; x++)
          for (int s = 0; s < S; s++)
            expect_val("B", get_bits(OUT_BASE, word_idx(h, x, 0, 1, N) * M*S*32 + (co*S + s)*32, 32, 1),
                       current(co, h, x, 0, 1));

    // ---- C: 2-bit spikes, Ci = 32, max pooling ----
    build_layer(SPK_2B, 8, 8, 1, 1, 3, 32, 16, 4, 2, 6, 24);
    cfg.pool_mode = POOL_MAX;
    cfg.out_len = out_len_bytes(Ho/2 * WG * N/2, M*S);
    run_layer("C");
    check_spikes("C", POOL_MAX, FIT_SAT2, RES_NONE, 1, FIT_SAT2);

    // ---- D: 4-bit spikes, 1x1, average pooling with shift ----
    build_layer(SPK_4B, 4, 8, 0, 1, 1, 16, 16, 4, 2, 2, 12);
    cfg.pool_mode = POOL_AVG; cfg.pool_fit = FIT_SHIFT2;
    cfg.out_len = out_len_bytes(Ho/2 * WG * N/2, M*S*2);
    run_layer("D");
    check_spikes("D", POOL_AVG, FIT_SHIFT2, RES_NONE, 1, FIT_SAT2);

    // ---- E: T = 8, SEW ADD with 2-bit shortcut, saturate to 2 bits ----
    build_layer(SPK_1B, 8, 8, 1, 1, 3, 16, 16, 8, 3, 4, 16);
    cfg.res_mode = RES_ADD; cfg.res_bits = 3'd2; cfg.res_fit = FIT_SAT2;
    build_shortcut(2);
    cfg.out_len = out_len_bytes(Ho * WG * 2 * N, M*S*2);
    run_layer("E");
    check_spikes("E", POOL_NONE, FIT_SAT2, RES_ADD, 2, FIT_SAT2);

    // ---- F: SEW IAND and spike counting ----
    build_layer(SPK_1B, 8, 8, 1, 1, 3, 16, 16, 4, 3, 4, 16);
    cfg.res_mode = RES_IAND; cfg.res_bits = 3'd1; cfg.out_mode = OUT_COUNT;
    build_shortcut(1);
    cfg.out_len = 16 * ((M*16 + 127) / 128);
    run_layer("F");
    for (int co = 0; co < Co; co++) begin
      int cnt;
      int spk [];
      cnt = 0;
      for (int h = 0; h < Ho; h++)
        for (int x = 0; x < WG * N; x++) begin
          neuron(co, h, x, 0, spk);
          for (int t = 0; t < T; t++) cnt += (!spk[t]) & sc[co][h][x][t];
        end
      expect_val("F", get_bits(OUT_BASE, co * 16, 16, 0), cnt);
    end

    // ---- mechanisms ----
    $display("mechanisms: pad=%0d coalesce=%0d rowwait=%0d replay=%0d backpressure=%0d dm1=%0d spikes=%0d",
             n_pad, n_coal, n_rowwait, n_replay, n_credit, n_dm1, n_spk_out);
    mech_fail = 0;
    if (n_pad == 0) mech_fail++;
    if (n_coal == 0) mech_fail++;
    if (n_rowwait == 0) mech_fail++;
    if (n_replay == 0) mech_fail++;
    if (n_credit == 0) mech_fail++;
    if (n_dm1 == 0) mech_fail++;
    if (n_spk_out == 0) mech_fail++;
    checks += 7;
    failures += mech_fail;
    if (mech_fail) $display("FAIL %0d mechanisms never happened", mech_fail);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200000000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
